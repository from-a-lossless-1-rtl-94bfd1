// token_factory: shared, compressed weight streaming for P processors that
// run the same network in lockstep on unrelated inputs (the paper's
// "token factory", Fig. 13, built from the streaming fabric of Fig. 12).
//
// One weight decompressor reads the compressed weights once and broadcasts
// every decompressed weight to all P processors, so the weight bandwidth
// does not grow with P. Each processor also has its own compressor and
// decompressor for its private data (activations, KV cache). All 2P+1
// streams share one external memory port through the memory arbiter.
// Each processor receives the weights through a small FIFO (WBUF entries):
// a weight is broadcast when every one of these FIFOs has room, so the
// processors may drift apart by up to WBUF weights. The processors and the
// memory are outside this module: their signals are ports.
//
// Channel numbers on the configuration bus (cfg.chan): 0 is the weight
// decompressor, 1..P the processors' decompressors, P+1..2P their
// compressors. The arbiter uses the same numbers (read channels 0..P, write
// channels P+1..2P). The default P = 10 is the paper's worked example
// (ten processors sharing one weight stream).
//
// Per-processor arrays are indexed by processor 0..P-1. Weights and
// activations are 16-bit (bfloat16 or int16 per stream configuration).
module token_factory
  import ans_pkg::*;
#(
  parameter int unsigned P          = 10,
  parameter int unsigned FIFO_DEPTH = 16,
  parameter int unsigned WBUF       = 4,
  parameter int unsigned AW         = 32,
  localparam int unsigned NR        = P + 1,
  localparam int unsigned IDW       = (NR > 1) ? $clog2(NR) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  cfg_t             cfg,
  // shared weights to the processors
  output logic             w_valid [P],
  input  logic             w_ready [P],
  output logic [VAL_W-1:0] w_data  [P],
  // processors' own data, decompressed, to the processors
  output logic             a_rd_valid [P],
  input  logic             a_rd_ready [P],
  output logic [VAL_W-1:0] a_rd_data  [P],
  // processors' own data, from the processors, to be compressed
  input  logic             a_wr_valid [P],
  output logic             a_wr_ready [P],
  input  logic [VAL_W-1:0] a_wr_data  [P],
  output logic             a_wr_done  [P],
  output logic [31:0]      a_wr_count [P],
  output logic             w_busy,
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
  logic [NR-1:0]    rd_valid, rd_pop;
  logic [MEM_W-1:0] rd_data;
  logic [P-1:0]     wr_valid, wr_ready;
  logic [MEM_W-1:0] wr_data [P];

  mem_arbiter #(.NR(NR), .NW(P), .DEPTH(FIFO_DEPTH), .AW(AW)) u_arb (
    .clk, .rst_n, .cfg,
    .rd_valid, .rd_data, .rd_pop,
    .wr_valid, .wr_ready, .wr_data, .wr_count(a_wr_count),
    .mem_req, .mem_we, .mem_addr, .mem_wdata, .mem_id,
    .mem_ready, .mem_rvalid, .mem_rid, .mem_rdata
  );

  // shared weight decompressor and broadcast
  logic             wd_valid, wd_ready;
  logic [VAL_W-1:0] wd_value;
  logic [P-1:0]     wb_in_ready;

  decomp_channel #(.CHAN(0), .DEPTH(FIFO_DEPTH)) u_wdec (
    .clk, .rst_n, .cfg,
    .rd_valid(rd_valid[0]), .rd_data, .rd_pop(rd_pop[0]),
    .out_valid(wd_valid), .out_ready(wd_ready), .out_value(wd_value),
    .busy(w_busy)
  );

  assign wd_ready = &wb_in_ready;

  for (genvar p = 0; p < P; p++) begin : g_proc
    logic [$clog2(WBUF):0] wb_level;
    logic [$clog2(FIFO_DEPTH):0] unused_level;
    logic rd_busy;

    stream_fifo #(.W(VAL_W), .DEPTH(WBUF)) u_wbuf (
      .clk, .rst_n, .clr(1'b0),
      .in_valid(wd_valid && wd_ready), .in_ready(wb_in_ready[p]), .in_data(wd_value),
      .out_valid(w_valid[p]), .out_ready(w_ready[p]), .out_data(w_data[p]),
      .level(wb_level)
    );

    decomp_channel #(.CHAN(1 + p), .DEPTH(FIFO_DEPTH)) u_adec (
      .clk, .rst_n, .cfg,
      .rd_valid(rd_valid[1 + p]), .rd_data, .rd_pop(rd_pop[1 + p]),
      .out_valid(a_rd_valid[p]), .out_ready(a_rd_ready[p]), .out_value(a_rd_data[p]),
      .busy(rd_busy)
    );

    comp_channel #(.CHAN(P + 1 + p), .DEPTH(FIFO_DEPTH)) u_acomp (
      .clk, .rst_n, .cfg,
      .in_valid(a_wr_valid[p]), .in_ready(a_wr_ready[p]), .in_value(a_wr_data[p]),
      .wr_valid(wr_valid[p]), .wr_ready(wr_ready[p]), .wr_data(wr_data[p]),
      .done(a_wr_done[p])
    );
  end
endmodule
