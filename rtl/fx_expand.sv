// fx_expand: coding pair -> internal fixed point (16-bit two's complement).
//
// Follows the paper's decompression-side glue for a fixed-point processor
// (Fig. 10a), plus the direct-value bypass of Fig. 11. The additional data
// holds the sign and the bits below the leading one of the magnitude,
// left-aligned; the leading one is put back in front of them (the "1" of
// the figure), giving an 8-bit magnitude 1.mmmmmmm. This is turned into
// two's complement and then shifted by a signed amount from a 64-entry
// table indexed by the code (left for positive amounts, arithmetic right
// for negative ones). For the paper's integer code (code k = position of the
// leading one + 1) the table holds k - 8. A table entry may instead flag
// the code as a direct value, which is how the zero code, which has no
// leading one, is given its value.
//
// This design's choices: 16-bit output, right shifts round towards minus
// infinity (exact for every integer the paper's code can carry), results
// that do not fit in 16 bits wrap (no saturation).
//
// Interface: cfg (U_FXX_LUT), valid/ready pair in, valid/ready value out.
// One value per clock, one register stage of latency.
module fx_expand
  import ans_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  cfg_t             cfg,
  input  logic             in_valid,
  output logic             in_ready,
  input  pair_t            in_pair,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [VAL_W-1:0] out_value
);
  logic signed [5:0] sh_t  [NCODES];
  logic              dir_t [NCODES];
  logic [VAL_W-1:0]  val_t [NCODES];

  always_ff @(posedge clk) begin
    if (cfg.we && cfg.unit == U_FXX_LUT) begin
      sh_t[cfg.addr[CODE_W-1:0]]  <= cfg.data[5:0];
      dir_t[cfg.addr[CODE_W-1:0]] <= cfg.data[6];
      val_t[cfg.addr[CODE_W-1:0]] <= cfg.data[22:7];
    end
  end

  logic signed [5:0]  sh;
  logic [7:0]         mag;
  logic signed [31:0] tc, w;
  logic [VAL_W-1:0]   res;
  logic               ov_q;
  logic [VAL_W-1:0]   ovl_q;

  always_comb begin
    sh  = sh_t[in_pair.code];
    mag = {1'b1, in_pair.ad[AD_W-2:0]};
    tc  = in_pair.ad[AD_W-1] ? -$signed({24'd0, mag}) : $signed({24'd0, mag});
    if (sh >= 0) w = tc <<< sh;
    else         w = tc >>> (-sh);
    res = dir_t[in_pair.code] ? val_t[in_pair.code] : w[VAL_W-1:0];
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
