// stream_fifo: synchronous first-in first-out word buffer.
//
// The paper places a "FIFO/Cache" between the shared memory arbiter and each
// compressor or decompressor (Fig. 12), and small buffers between the
// shared weight decompressor and each processor (Sec. 4.7). It names the
// block only; this is the plain circular-buffer FIFO that does the job:
// DEPTH entries of W bits, valid/ready on both sides, data out straight
// from the storage array (first-word fall-through), `level` gives the
// occupancy. A push into a full FIFO or a pop from an empty one cannot
// happen through the handshake. `clr` empties it.
module stream_fifo #(
  parameter int unsigned W     = 32,
  parameter int unsigned DEPTH = 16,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         clr,
  input  logic         in_valid,
  output logic         in_ready,
  input  logic [W-1:0] in_data,
  output logic         out_valid,
  input  logic         out_ready,
  output logic [W-1:0] out_data,
  output logic [AW:0]  level
);
  logic [W-1:0] mem [DEPTH];
  logic [AW-1:0] wp_q, rp_q;
  logic push, pop;

  assign in_ready  = (level != (AW + 1)'(DEPTH));
  assign out_valid = (level != '0);
  assign out_data  = mem[rp_q];
  assign push      = in_valid && in_ready;
  assign pop       = out_valid && out_ready;

  function automatic logic [AW-1:0] inc(input logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + AW'(1);
  endfunction

  always_ff @(posedge clk) if (push) mem[wp_q] <= in_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp_q  <= '0;
      rp_q  <= '0;
      level <= '0;
    end else if (clr) begin
      wp_q  <= '0;
      rp_q  <= '0;
      level <= '0;
    end else begin
      if (push) wp_q <= inc(wp_q);
      if (pop)  rp_q <= inc(rp_q);
      level <= level + (AW + 1)'(push) - (AW + 1)'(pop);
    end
  end

  a_level: assert property (@(posedge clk) disable iff (!rst_n) level <= (AW + 1)'(DEPTH));
endmodule
