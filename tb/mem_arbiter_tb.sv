// mem_arbiter_tb: three read channels and two write channels share a
// behavioural memory that accepts requests at random and answers reads in
// order after a random delay. Each read channel must receive exactly its
// words, from its base address downwards, and never more than DEPTH words
// that its consumer has not yet popped (credit check). Each write channel's
// words must land at base, base+1, ... with the right wr_count. A second
// round restarts the channels at new addresses. All channels must finish
// (round-robin service).
module mem_arbiter_tb;
  import ans_pkg::*;

  localparam int NR = 3, NW = 2, DEPTH = 4, AW = 16, IDW = 2;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  cfg_t cfg;
  logic [NR-1:0] rd_valid, rd_pop;
  logic [MEM_W-1:0] rd_data;
  logic [NW-1:0] wr_valid, wr_ready;
  logic [MEM_W-1:0] wr_data [NW];
  logic [31:0] wr_count [NW];
  logic mem_req, mem_we, mem_ready, mem_rvalid;
  logic [AW-1:0] mem_addr;
  logic [MEM_W-1:0] mem_wdata, mem_rdata;
  logic [IDW-1:0] mem_id, mem_rid;

  mem_arbiter #(.NR(NR), .NW(NW), .DEPTH(DEPTH), .AW(AW)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  // behavioural memory: in-order responses, random latency
  logic [MEM_W-1:0] mem [1 << AW];
  typedef struct { int due; logic [IDW-1:0] id; logic [MEM_W-1:0] d; } rsp_t;
  rsp_t rq[$];
  int now = 0;

  always @(posedge clk) begin
    now <= now + 1;
    mem_ready <= ($urandom_range(0, 3) != 0);
    if (rst_n && mem_req && mem_ready) begin
      if (mem_we) mem[mem_addr] <= mem_wdata;
      else begin
        rsp_t r;
        r.due = now + $urandom_range(1, 6);
        if (rq.size() && rq[$].due > r.due) r.due = rq[$].due;
        r.id = mem_id;
        r.d = mem[mem_addr];
        rq.push_back(r);
      end
    end
  end

  always_comb begin
    mem_rvalid = rq.size() > 0 && rq[0].due <= now;
    mem_rid = mem_rvalid ? rq[0].id : '0;
    mem_rdata = mem_rvalid ? rq[0].d : '0;
  end
  always @(posedge clk) if (mem_rvalid) void'(rq.pop_front());

  // read consumers
  logic [MEM_W-1:0] rfifo [NR][$];
  int rgot [NR];
  int rbase[NR], rcnt[NR];
  always @(posedge clk) begin
    for (int i = 0; i < NR; i++) begin
      if (rd_pop[i]) begin
        check(rfifo[i][0] == mem[AW'(rbase[i] - rgot[i])], $sformatf("read data ch%0d", i));
        void'(rfifo[i].pop_front());
        rgot[i]++;
      end
      if (rd_valid[i]) rfifo[i].push_back(rd_data);
    end
  end
  always @(negedge clk) begin
    for (int i = 0; i < NR; i++) begin
      if (rfifo[i].size() > DEPTH) begin
        failures++;
        $display("credit overrun on ch%0d", i);
      end
      rd_pop[i] <= rfifo[i].size() > 0 && $urandom_range(0, 2) != 0;
    end
  end

  // write producers
  int wsent[NW], wbase[NW], wcnt[NW];
  always @(posedge clk) begin
    for (int j = 0; j < NW; j++) if (wr_valid[j] && wr_ready[j]) wsent[j]++;
  end
  always @(negedge clk) begin
    for (int j = 0; j < NW; j++) begin
      wr_valid[j] <= wsent[j] < wcnt[j];
      wr_data[j]  <= 32'hA000_0000 | (j << 16) | wsent[j];
    end
  end

  task automatic cfg_wr(int ch, int a, longint d);
    @(negedge clk);
    cfg.we = 1'b1; cfg.unit = U_ARB; cfg.chan = 8'(ch); cfg.addr = 8'(a); cfg.data = 48'(d);
    @(negedge clk);
    cfg.we = 1'b0;
  endtask

  task automatic round(int r);
    for (int i = 0; i < NR; i++) begin
      rbase[i] = 1000 * (i + 1) + 100 * r + 99;
      rcnt[i]  = 20 + 13 * i + r;
      rgot[i]  = 0;
      cfg_wr(i, 1, rcnt[i]);
      cfg_wr(i, 0, rbase[i]);
    end
    for (int j = 0; j < NW; j++) begin
      wbase[j] = 8000 + 1000 * j + 100 * r;
      wcnt[j]  = 0;
      wsent[j] = 0;
      cfg_wr(NR + j, 0, wbase[j]);
      wcnt[j]  = 25 + 7 * j + r;
    end
    for (int t = 0; t < 3000; t++) begin
      bit done;
      done = 1;
      for (int i = 0; i < NR; i++) if (rgot[i] < rcnt[i]) done = 0;
      for (int j = 0; j < NW; j++) if (wr_count[j] < 32'(wcnt[j])) done = 0;
      if (done) break;
      @(posedge clk);
    end
    repeat (5) @(posedge clk);
    for (int i = 0; i < NR; i++) check(rgot[i] == rcnt[i], $sformatf("round %0d ch%0d read %0d of %0d", r, i, rgot[i], rcnt[i]));
    for (int j = 0; j < NW; j++) begin
      check(wr_count[j] == 32'(wcnt[j]), $sformatf("wr_count ch%0d", j));
      for (int n = 0; n < wcnt[j]; n++)
        check(mem[AW'(wbase[j] + n)] == (32'hA000_0000 | (j << 16) | n), $sformatf("write data ch%0d word %0d", j, n));
    end
  endtask

  initial begin
    cfg = '0;
    rd_pop = '0;
    wr_valid = '0;
    mem_ready = 1'b0;
    for (int a = 0; a < (1 << AW); a++) mem[a] = $urandom;
    for (int j = 0; j < NW; j++) begin wcnt[j] = 0; wsent[j] = 0; end
    for (int i = 0; i < NR; i++) begin rgot[i] = 0; rbase[i] = 0; end
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    round(0);
    round(1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
