// tans_decoder: table-based ANS (tANS) decompressor of coding pairs.
//
// Function (from the paper): one coding pair out per clock, 8-bit
// probabilities, up to 64 codes, 0..8 bits of additional data per code,
// fixed 16-bit words requested as the internal bit buffer empties, the
// additional data zero padded to the width of the interface.
//
// How it works (standard tANS; the paper gives no internals). The state
// x - 256 indexes a 256-entry table holding, per state, the code, the number
// nb of state bits to read and the base of the next state. With adl the
// additional-data size of that code, the decompressor takes nb + adl bits
// from the bottom of its bit buffer: the low adl bits are the additional
// data, the rest are added to the base to give the next state. A pair is
// produced whenever the buffer holds the bits it needs; words are loaded
// whenever there is room, which keeps the rate at one pair per clock.
//
// Stream entry (this design's format, matching tans_encoder): after `start`
// the first word read is the header {pending bit count [11:8], state [7:0]},
// the second is the partial word whose low "count" bits are valid, then the
// full words follow, all in the reverse of the order they were written.
// The header is also what a random access into a stream needs: a word
// address, a bit count and a decompressor state.
//
// Interface: cfg (tables U_ADL, U_TANS_DEC), valid/ready 16-bit word input,
// valid/ready registered pair output (additional data left-aligned, zero
// padded). The decompressor does not know where a stream ends: the user
// stops taking pairs after the last one.
module tans_decoder
  import ans_pkg::*;
(
  input  logic                 clk,
  input  logic                 rst_n,
  input  cfg_t                 cfg,
  input  logic                 start,
  input  logic                 in_valid,
  output logic                 in_ready,
  input  logic [TANS_WORD-1:0] in_word,
  output logic                 out_valid,
  input  logic                 out_ready,
  output pair_t                out_pair
);
  localparam int unsigned B  = 2 * TANS_KMAX + TANS_WORD;
  localparam int unsigned CW = $clog2(B + 1);

  typedef enum logic [1:0] {P_HDR, P_PART, P_RUN} phase_e;

  logic [ADL_W-1:0]  adl_t  [NCODES];
  logic [CODE_W-1:0] dsym_t [TANS_L];
  logic [3:0]        dnb_t  [TANS_L];
  logic [TANS_R-1:0] dbase_t[TANS_L];

  always_ff @(posedge clk) begin
    if (cfg.we) begin
      case (cfg.unit)
        U_ADL:      adl_t[cfg.addr[CODE_W-1:0]] <= cfg.data[ADL_W-1:0];
        U_TANS_DEC: begin
          dsym_t[cfg.addr]  <= cfg.data[5:0];
          dnb_t[cfg.addr]   <= cfg.data[9:6];
          dbase_t[cfg.addr] <= cfg.data[17:10];
        end
        default: ;
      endcase
    end
  end

  phase_e            ph_q;
  logic [TANS_R-1:0] x_q;
  logic [3:0]        r_q;
  logic              ov_q;
  pair_t             op_q;

  logic              can_load, load, init, fire, out_free;
  logic [CW-1:0]     cnt, need;
  logic [TANS_KMAX-1:0] peek, v;
  logic [CODE_W-1:0] s;
  logic [ADL_W-1:0]  adl;
  logic [3:0]        nb;
  logic [AD_W-1:0]   ad;
  logic [TANS_R:0]   sb;

  always_comb begin
    s        = dsym_t[x_q];
    nb       = dnb_t[x_q];
    adl      = adl_t[s];
    need     = CW'(nb) + CW'(adl);
    out_free = !ov_q || out_ready;
    fire     = (ph_q == P_RUN) && (cnt >= need) && out_free;
    v        = peek & ((TANS_KMAX'(1) << need) - TANS_KMAX'(1));
    ad       = AD_W'(v) & ((AD_W'(1) << adl) - AD_W'(1));
    sb       = (TANS_R + 1)'(v >> adl);
    in_ready = (ph_q != P_RUN) || can_load;
    load     = (ph_q == P_RUN) && in_valid && can_load;
    init     = (ph_q == P_PART) && in_valid;
  end

  ans_bitunpack #(.W(TANS_WORD), .KMAX(TANS_KMAX), .B(B)) u_unpack (
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
          x_q  <= in_word[TANS_R-1:0];
          r_q  <= in_word[TANS_R+3:TANS_R];
          ph_q <= P_PART;
        end
        P_PART: if (in_valid) ph_q <= P_RUN;
        default: if (fire) begin
          x_q       <= dbase_t[x_q] + sb[TANS_R-1:0];
          ov_q      <= 1'b1;
          op_q.code <= s;
          op_q.ad   <= ad << (4'(AD_W) - adl);
        end
      endcase
    end
  end

  a_pop_covered: assert property (@(posedge clk) disable iff (!rst_n)
    fire |-> cnt >= need);
endmodule
