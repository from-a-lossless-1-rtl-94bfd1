// mem_arbiter: shares one external memory port among many compressed
// streams (the "Memory Arbiter/Controller" of the paper's Fig. 12).
//
// The paper only names this block. This design's version: NR read channels
// feed decompressor FIFOs and NW write channels drain compressor FIFOs.
// Each cycle at most one request goes to memory, chosen round-robin among
// the channels that can use it. A read channel can request while it has
// words left to fetch and a credit, one credit per free place in its
// FIFO: credits are taken when a read is issued and returned when the
// decompressor pops a word (`rd_pop`), so every returning word has room.
// Reads walk downwards, from the last word of a stream (its header) to the
// first, because ANS streams are read in the reverse order of writing;
// writes walk upwards and `wr_count` tells how many words a write channel
// has stored.
//
// The memory port is a request/response port: a request is accepted when
// mem_req && mem_ready; read data comes back later, in the order of the
// requests, tagged with the requesting channel (mem_id -> mem_rid). Words of
// one channel must not overtake each other; the tag only routes them.
// rd_data is mem_rdata itself, shared by all read channels (it is an
// output that only follows an input); rd_valid alone says which channel
// owns the word, so no per-channel data multiplexer is needed.
//
// Configuration (U_ARB, cfg.chan = channel, reads first): addr 1 sets a
// read channel's word count, addr 0 sets the base address and restarts the
// channel (for reads, the address of the stream's last word).
module mem_arbiter
  import ans_pkg::*;
#(
  parameter int unsigned NR    = 11,
  parameter int unsigned NW    = 10,
  parameter int unsigned DEPTH = 16,
  parameter int unsigned AW    = 32,
  localparam int unsigned IDW  = (NR > 1) ? $clog2(NR) : 1,
  localparam int unsigned CRW  = $clog2(DEPTH + 1)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  cfg_t             cfg,
  // read channels
  output logic [NR-1:0]    rd_valid,
  output logic [MEM_W-1:0] rd_data,
  input  logic [NR-1:0]    rd_pop,
  // write channels
  input  logic [NW-1:0]    wr_valid,
  output logic [NW-1:0]    wr_ready,
  input  logic [MEM_W-1:0] wr_data [NW],
  output logic [31:0]      wr_count [NW],
  // external memory
  output logic             mem_req,
  output logic             mem_we,
  output logic [AW-1:0]    mem_addr,
  output logic [MEM_W-1:0] mem_wdata,
  output logic [IDW-1:0]   mem_id,
  input  logic             mem_ready,
  input  logic             mem_rvalid,
  input  logic [IDW-1:0]   mem_rid,
  input  logic [MEM_W-1:0] mem_rdata
);
  localparam int unsigned N  = NR + NW;
  localparam int unsigned GW = $clog2(N);

  logic [AW-1:0]  rptr_q [NR];
  logic [31:0]    rleft_q[NR];
  logic [31:0]    rcnt_q [NR];
  logic [CRW-1:0] cred_q [NR];
  logic [AW-1:0]  wptr_q [NW];

  logic [N-1:0]  req;
  logic [GW-1:0] rr_q, g;
  logic          any, issue;

  always_comb begin
    for (int i = 0; i < NR; i++) req[i] = (rleft_q[i] != 0) && (cred_q[i] != 0);
    for (int j = 0; j < NW; j++) req[NR + j] = wr_valid[j];
    // round robin: first requester at or after rr_q
    any = 1'b0;
    g   = '0;
    for (int o = 0; o < N; o++) begin
      int idx;
      idx = (int'(rr_q) + o) % N;
      if (!any && req[idx]) begin
        any = 1'b1;
        g   = GW'(idx);
      end
    end
    issue = any && mem_ready;
  end

  always_comb begin
    mem_req   = any;
    mem_we    = (int'(g) >= NR);
    mem_addr  = '0;
    mem_wdata = '0;
    mem_id    = '0;
    if (int'(g) < NR) begin
      mem_addr = rptr_q[IDW'(g)];
      mem_id   = IDW'(g);
    end else begin
      mem_addr  = wptr_q[int'(g) - NR];
      mem_wdata = wr_data[int'(g) - NR];
    end
    for (int j = 0; j < NW; j++) wr_ready[j] = issue && (int'(g) == NR + j);
    for (int i = 0; i < NR; i++) rd_valid[i] = mem_rvalid && (int'(mem_rid) == i);
    rd_data = mem_rdata;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rr_q <= '0;
      for (int i = 0; i < NR; i++) begin
        rptr_q[i]  <= '0;
        rleft_q[i] <= '0;
        rcnt_q[i]  <= '0;
        cred_q[i]  <= CRW'(DEPTH);
      end
      for (int j = 0; j < NW; j++) begin
        wptr_q[j]   <= '0;
        wr_count[j] <= '0;
      end
    end else begin
      if (issue) rr_q <= (int'(g) == N - 1) ? '0 : g + GW'(1);
      for (int i = 0; i < NR; i++) begin
        if (cfg.we && cfg.unit == U_ARB && int'(cfg.chan) == i) begin
          if (cfg.addr == 8'd0) begin
            rptr_q[i]  <= cfg.data[AW-1:0];
            rleft_q[i] <= rcnt_q[i];
            cred_q[i]  <= CRW'(DEPTH);
          end else if (cfg.addr == 8'd1) begin
            rcnt_q[i] <= cfg.data[31:0];
          end
        end else begin
          if (issue && int'(g) == i) begin
            rptr_q[i]  <= rptr_q[i] - AW'(1);
            rleft_q[i] <= rleft_q[i] - 1;
          end
          cred_q[i] <= cred_q[i] - CRW'(issue && int'(g) == i) + CRW'(rd_pop[i]);
        end
      end
      for (int j = 0; j < NW; j++) begin
        if (cfg.we && cfg.unit == U_ARB && int'(cfg.chan) == NR + j && cfg.addr == 8'd0) begin
          wptr_q[j]   <= cfg.data[AW-1:0];
          wr_count[j] <= '0;
        end else if (issue && int'(g) == NR + j) begin
          wptr_q[j]   <= wptr_q[j] + AW'(1);
          wr_count[j] <= wr_count[j] + 1;
        end
      end
    end
  end

  a_credit: assert property (@(posedge clk) disable iff (!rst_n)
    issue && int'(g) < NR |-> cred_q[IDW'(g)] != 0);
endmodule
