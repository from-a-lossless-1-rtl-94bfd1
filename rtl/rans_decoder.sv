// rans_decoder: range ANS (rANS) decompressor of coding pairs.
//
// Function (from the paper): one coding pair out per clock, 16-bit
// probabilities used directly as configuration, up to 64 codes, 0..8 bits
// of additional data per code, fixed 32-bit words requested as the bit
// buffer empties, one multiplier.
//
// How it works (standard rANS with bit-wise renormalisation, matching
// rans_encoder; the paper gives no internals). The state x lies in
// [2^24, 2^25). Its low 16 bits, the slot, select the code s whose range
// [c_s, c_s + f_s) holds it: all 64 ranges are compared in parallel, so a
// code with f_s = 0 never matches. The state before renormalisation is
// f_s * (x >> 16) + slot - c_s, the one multiplication of the core, which
// lies in [f_s 2^8, f_s 2^9). nb (k_s or k_s - 1) state bits are then taken
// from the bit buffer to bring it back into range, together with the adl_s
// additional-data bits below them.
//
// Stream entry: the first word after `start` is the header
// {pending bit count [28:24], state - 2^24 [23:0]}, the second the partial
// word, then the full words in reverse order of writing.
//
// Interface: cfg (tables U_ADL, U_RANS_SYM), valid/ready 32-bit word input,
// valid/ready registered pair output (additional data left-aligned).
module rans_decoder
  import ans_pkg::*;
(
  input  logic                 clk,
  input  logic                 rst_n,
  input  cfg_t                 cfg,
  input  logic                 start,
  input  logic                 in_valid,
  output logic                 in_ready,
  input  logic [RANS_WORD-1:0] in_word,
  output logic                 out_valid,
  input  logic                 out_ready,
  output pair_t                out_pair
);
  localparam int unsigned B  = 2 * RANS_KMAX + RANS_WORD;
  localparam int unsigned CW = $clog2(B + 1);
  localparam int unsigned XW = RANS_SB + 1;

  typedef enum logic [1:0] {P_HDR, P_PART, P_RUN} phase_e;

  logic [ADL_W-1:0]  adl_t [NCODES];
  logic [RANS_N-1:0] f_t   [NCODES];
  logic [RANS_N-1:0] c_t   [NCODES];
  logic [4:0]        k_t   [NCODES];

  always_ff @(posedge clk) begin
    if (cfg.we) begin
      case (cfg.unit)
        U_ADL:      adl_t[cfg.addr[CODE_W-1:0]] <= cfg.data[ADL_W-1:0];
        U_RANS_SYM: begin
          f_t[cfg.addr[CODE_W-1:0]] <= cfg.data[15:0];
          c_t[cfg.addr[CODE_W-1:0]] <= cfg.data[31:16];
          k_t[cfg.addr[CODE_W-1:0]] <= cfg.data[36:32];
        end
        default: ;
      endcase
    end
  end

  phase_e             ph_q;
  logic [RANS_SB-1:0] x_q;
  logic [4:0]         r_q;
  logic               ov_q;
  pair_t              op_q;

  logic               can_load, load, init, fire, out_free;
  logic [CW-1:0]      cnt, need;
  logic [RANS_KMAX-1:0] peek, v;
  logic [RANS_N-1:0]  slot, f, c;
  logic [CODE_W-1:0]  s;
  logic [ADL_W-1:0]   adl;
  logic [4:0]         kk, nb;
  logic [40:0]        xpre, t;
  logic [AD_W-1:0]    ad;
  logic [XW-1:0]      sb, xn;

  always_comb begin
    slot = x_q[RANS_N-1:0];
    s    = '0;
    for (int i = 0; i < NCODES; i++) begin
      if (slot >= c_t[i] && (slot - c_t[i]) < f_t[i]) s = CODE_W'(i);
    end
    f    = f_t[s];
    c    = c_t[s];
    kk   = k_t[s];
    adl  = adl_t[s];
    xpre = 41'(f) * 41'({1'b1, x_q[RANS_SB-1:RANS_N]}) + 41'(slot - c);
    t    = xpre << (kk - 5'd1);
    nb   = (t >= (41'(1) << RANS_SB)) ? kk - 5'd1 : kk;
    need = CW'(nb) + CW'(adl);
    out_free = !ov_q || out_ready;
    fire     = (ph_q == P_RUN) && (cnt >= need) && out_free;
    v    = peek & ((RANS_KMAX'(1) << need) - RANS_KMAX'(1));
    ad   = AD_W'(v) & ((AD_W'(1) << adl) - AD_W'(1));
    sb   = XW'(v >> adl);
    xn   = XW'(xpre << nb) | sb;
    in_ready = (ph_q != P_RUN) || can_load;
    load     = (ph_q == P_RUN) && in_valid && can_load;
    init     = (ph_q == P_PART) && in_valid;
  end

  ans_bitunpack #(.W(RANS_WORD), .KMAX(RANS_KMAX), .B(B)) u_unpack (
    .clk, .rst_n, .init, .init_r(CW'(r_q)), .load, .word(in_word),
    .pop(fire), .k(need), .can_load, .cnt, .peek
  );

  assign out_valid = ov_q;
  assign out_pair  = op_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ph_q <= P_HDR;
      x_q  <= '0;
      r_q  <= '0;
      ov_q <= 1'b0;
      op_q <= '0;
    end else if (start) begin
      ph_q <= P_HDR;
      ov_q <= 1'b0;
    end else begin
      if (out_ready) ov_q <= 1'b0;
      case (ph_q)
        P_HDR: if (in_valid) begin
          x_q  <= in_word[RANS_SB-1:0];
          r_q  <= in_word[RANS_SB+4:RANS_SB];
          ph_q <= P_PART;
        end
        P_PART: if (in_valid) ph_q <= P_RUN;
        default: if (fire) begin
          x_q       <= xn[RANS_SB-1:0];
          ov_q      <= 1'b1;
          op_q.code <= s;
          op_q.ad   <= ad << (4'(AD_W) - adl);
        end
      endcase
    end
  end

  a_state_range: assert property (@(posedge clk) disable iff (!rst_n)
    fire |-> xn[RANS_SB]);
endmodule
