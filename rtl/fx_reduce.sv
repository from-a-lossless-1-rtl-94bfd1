// fx_reduce: internal fixed point (16-bit two's complement) -> coding pair.
//
// Follows the paper's compression-side glue for a fixed-point processor
// (Fig. 10b): sign, Abs(), rounding by adding 1 << r, normalisation by a
// priority encoder and a shifter, and a look-up table from the exponent
// (position of the leading one) to the code. The table is indexed by that
// position + 1, with index 0 for the value zero, exactly the paper's integer
// code when the table is the identity. Each entry also gives how many bits
// m below the leading one the code keeps (at most 7, since the additional
// data is the sign plus at most 7 bits).
//
// The rounding position depends on the code, which depends on the leading
// one, so a first priority encoder on |v| selects the entry whose m sets
// r = p - m - 1 (no rounding when p <= m); the rounded magnitude is cut
// to that precision and normalised again, which picks the next code if rounding carried into a
// new leading bit. This two-step order is this design's choice; the figure
// shows rounding ahead of normalisation without saying where r comes from.
//
// Interface: cfg (U_FXR_LUT, 32 entries, 0..17 used), valid/ready value
// in, valid/ready pair out (sign at ad[7], kept bits left-aligned below).
// One value per clock, one register stage of latency.
module fx_reduce
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
  logic [CODE_W-1:0] code_t [32];
  logic [2:0]        mb_t   [32];

  always_ff @(posedge clk) begin
    if (cfg.we && cfg.unit == U_FXR_LUT) begin
      code_t[cfg.addr[4:0]] <= cfg.data[5:0];
      mb_t[cfg.addr[4:0]]   <= cfg.data[8:6];
    end
  end

  // index of the leading one + 1, 0 for zero
  function automatic logic [4:0] lead_idx(input logic [16:0] a);
    lead_idx = '0;
    for (int i = 0; i < 17; i++) if (a[i]) lead_idx = 5'(i + 1);
  endfunction

  logic        sign;
  logic [16:0] a, ar, norm;
  logic [4:0]  i1, i2;
  logic [2:0]  mb1, mb2;
  logic [7:0]  keep;
  pair_t       res;
  logic        ov_q;
  pair_t       op_q;

  always_comb begin
    sign = in_value[VAL_W-1];
    a    = sign ? 17'(-$signed({1'b1, in_value})) : {1'b0, in_value};
    i1   = lead_idx(a);
    mb1  = mb_t[i1];
    ar   = a;
    if (i1 > 5'(mb1) + 5'd1) begin
      ar = a + (17'd1 << (i1 - 5'(mb1) - 5'd2));
      ar = ar & ~((17'd1 << (i1 - 5'(mb1) - 5'd1)) - 17'd1);   // truncate to the step
    end
    i2   = lead_idx(ar);
    mb2  = mb_t[i2];
    norm = (i2 == 0) ? 17'd0 : (ar << (5'd17 - i2));
    keep = ~(8'h7f >> mb2);
    res.code = code_t[i2];
    res.ad   = (i2 == 0) ? 8'd0 : {sign, norm[15:9] & keep[6:0]};
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
