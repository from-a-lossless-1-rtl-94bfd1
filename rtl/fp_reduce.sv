// fp_reduce: internal floating point (bfloat16) -> coding pair.
//
// Follows the paper's compression-side glue for a floating-point processor
// (Fig. 9b). A 256-entry look-up table, indexed by the exponent, gives the
// code and how many mantissa bits m that code keeps (its additional data is
// the sign plus m mantissa bits). The mantissa is rounded by adding 1 << r,
// r = 6 - m (half of the last kept bit, so ties round away from zero, as the
// figure's adder implies), then truncated to m bits. If rounding carries out
// of the mantissa the value becomes the next power of two: the exponent is
// incremented, its code read from a second table port, and the mantissa is
// zero. With m = 7 nothing is rounded. The carry handling and the second
// read port are this design's choices; the figure shows only the adder and
// the truncation. Exponent 255 (inf/NaN) is not treated specially.
//
// Interface: cfg (U_FPR_LUT), valid/ready bfloat16 in, valid/ready pair
// out (additional data left-aligned: sign at bit 7, mantissa below).
// One value per clock, one register stage of latency.
module fp_reduce
  import ans_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  cfg_t             cfg,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [VAL_W-1:0] in_value,
  output logic             out_valid,
  input  logic             out_ready,
  output pair_t            out_pair
);
  logic [CODE_W-1:0] code_t [256];
  logic [2:0]        mb_t   [256];

  always_ff @(posedge clk) begin
    if (cfg.we && cfg.unit == U_FPR_LUT) begin
      code_t[cfg.addr] <= cfg.data[5:0];
      mb_t[cfg.addr]   <= cfg.data[8:6];
    end
  end

  bf16_t      v;
  logic [2:0] mb;
  logic [7:0] m8, keep;
  logic [7:0] exp1;
  pair_t      res;
  logic       ov_q;
  pair_t      op_q;

  always_comb begin
    v    = in_value;
    mb   = mb_t[v.exp];
    exp1 = v.exp + 8'd1;
    m8   = {1'b0, v.man};
    if (mb != 3'd7) m8 = m8 + (8'd1 << (3'd6 - mb));
    keep = ~(8'h7f >> mb);
    if (m8[7]) begin
      res.code = code_t[exp1];
      res.ad   = {v.sign, 7'd0};
    end else begin
      res.code = code_t[v.exp];
      res.ad   = {v.sign, m8[6:0] & keep[6:0]};
    end
  end

  assign in_ready  = !ov_q || out_ready;
  assign out_valid = ov_q;
  assign out_pair  = op_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ov_q <= 1'b0;
      op_q <= '0;
    end else if (in_ready) begin
      ov_q <= in_valid;
      if (in_valid) op_q <= res;
    end
  end
endmodule
