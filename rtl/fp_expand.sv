// fp_expand: coding pair -> internal floating point (bfloat16).
//
// Follows the paper's decompression-side glue for a floating-point
// processor (Fig. 9a) with the direct-value bypass of Fig. 11. A 64-entry
// look-up table, indexed by the code, gives the exponent; the zero-padded
// additional data gives the sign (its first bit) and the mantissa (the
// bits after it, left-aligned, so missing low mantissa bits are zero). The
// same table entry may instead flag the code as a directly coded value:
// then a multiplexer per field passes the 16-bit value stored in the table
// (useful for zero, fp4-style formats or one code per quantised value). The
// paper leaves the multiplexer control out of its figure and says it comes
// from the table; here it is one flag bit per entry.
//
// bfloat16 as internal format and the absence of exponent saturation (the
// table writes the processor's exponent directly, so nothing can fall out
// of range) are this design's choices.
//
// Interface: cfg (U_FPX_LUT), valid/ready pair in, valid/ready value out.
// One value per clock, one register stage of latency.
module fp_expand
  import ans_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  cfg_t              cfg,
  input  logic              in_valid,
  output logic              in_ready,
  input  pair_t             in_pair,
  output logic              out_valid,
  input  logic              out_ready,
  output logic [VAL_W-1:0]  out_value
);
  logic [7:0]       exp_t [NCODES];
  logic             dir_t [NCODES];
  logic [VAL_W-1:0] val_t [NCODES];

  always_ff @(posedge clk) begin
    if (cfg.we && cfg.unit == U_FPX_LUT) begin
      exp_t[cfg.addr[CODE_W-1:0]] <= cfg.data[7:0];
      dir_t[cfg.addr[CODE_W-1:0]] <= cfg.data[8];
      val_t[cfg.addr[CODE_W-1:0]] <= cfg.data[24:9];
    end
  end

  bf16_t normal, direct, res;
  logic  ov_q;
  logic [VAL_W-1:0] ovl_q;

  always_comb begin
    normal.sign = in_pair.ad[AD_W-1];
    normal.exp  = exp_t[in_pair.code];
    normal.man  = in_pair.ad[AD_W-2:0];
    direct      = val_t[in_pair.code];
    res.sign    = dir_t[in_pair.code] ? direct.sign : normal.sign;
    res.exp     = dir_t[in_pair.code] ? direct.exp  : normal.exp;
    res.man     = dir_t[in_pair.code] ? direct.man  : normal.man;
  end

  assign in_ready  = !ov_q || out_ready;
  assign out_valid = ov_q;
  assign out_value = ovl_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ov_q  <= 1'b0;
      ovl_q <= '0;
    end else if (in_ready) begin
      ov_q <= in_valid;
      if (in_valid) ovl_q <= res;
    end
  end
endmodule
