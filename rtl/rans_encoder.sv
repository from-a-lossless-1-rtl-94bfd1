// rans_encoder: range ANS (rANS) compressor of coding pairs.
//
// Function (from the paper): one coding pair in per clock, codes entropy
// coded with 16-bit normalised probabilities f_s/65536 used directly as the
// configuration, additional data (0..8 bits per code) passed through, output
// in fixed 32-bit words as the internal bit buffer fills, no multiplier.
//
// How it works (standard rANS with bit-wise renormalisation; the paper gives
// no internals, the state size is this design's choice). The state is x in
// [2^24, 2^25), held as x - 2^24. For code s with frequency f_s, cumulative
// frequency c_s and k_s = 16 - floor(log2 f_s), the compressor sheds nb low
// bits (nb = k_s, or k_s - 1 if x < f_s << (8 + k_s)) so that
// xs = x >> nb lies in [f_s 2^8, f_s 2^9). The quotient q = xs / f_s then has
// exactly 9 bits and is found by a 9-step restoring division (shifts and
// subtractions, no multiplier). The new state is q * 2^16 + c_s + xs mod f_s.
// The chunk {shed state bits, additional data} (<= 24 bits) goes into the
// bit packer.
//
// Stream end (this design's format, matching rans_decoder): on `flush`
// (held until `flush_done`) the pending bits leave right-aligned in one
// word, then a header word {pending bit count [28:24], state - 2^24 [23:0]}.
//
// Resuming: if `resume` is high at `start`, the state and the pending bits
// are loaded from a header {r, state} and its partial word (`resume_hdr`,
// `resume_bits`), so new pairs continue a stream already in memory, written
// over its old partial word (this design's mechanism for the paper's
// "restore status information in the compressor").
//
// Interface: cfg (tables U_ADL, U_RANS_SYM), start, resume, valid/ready pair input,
// valid/ready registered 32-bit word output. One pair per clock.
module rans_encoder
  import ans_pkg::*;
(
  input  logic                 clk,
  input  logic                 rst_n,
  input  cfg_t                 cfg,
  input  logic                 start,
  input  logic                 resume,
  input  logic [31:0]          resume_hdr,
  input  logic [RANS_WORD-1:0] resume_bits,
  input  logic                 in_valid,
  output logic                 in_ready,
  input  pair_t                in_pair,
  input  logic                 flush,
  output logic                 flush_done,
  output logic                 out_valid,
  input  logic                 out_ready,
  output logic [RANS_WORD-1:0] out_word
);
  localparam int unsigned CW = $clog2(RANS_WORD + RANS_KMAX + 1);
  localparam int unsigned XW = RANS_SB + 1;     // 25-bit state

  typedef enum logic [1:0] {S_RUN, S_PART, S_HDR} state_e;

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

  state_e             st_q;
  logic [RANS_SB-1:0] x_q;
  logic               ov_q;
  logic [RANS_WORD-1:0] ow_q;

  logic               out_free, fire;
  logic [CODE_W-1:0]  s;
  logic [ADL_W-1:0]   adl;
  logic [RANS_N-1:0]  f;
  logic [4:0]         kk, nb;
  logic [XW-1:0]      x, xs, rem, sbits, xn;
  logic [40:0]        thr, dv;
  logic [8:0]         q;
  logic [AD_W-1:0]    adv;
  logic [RANS_KMAX-1:0] chunk;
  logic [CW-1:0]      k;
  logic               emit;
  logic [RANS_WORD-1:0] word, pend;
  logic [CW-1:0]      pcnt;

  assign out_free = !ov_q || out_ready;
  assign in_ready = (st_q == S_RUN) && out_free;
  assign fire     = in_valid && in_ready;

  always_comb begin
    s     = in_pair.code;
    adl   = adl_t[s];
    f     = f_t[s];
    kk    = k_t[s];
    x     = {1'b1, x_q};
    thr   = 41'(f) << (5'(RANS_Q) + kk);
    nb    = (41'(x) >= thr) ? kk : kk - 5'd1;
    sbits = x & ((XW'(1) << nb) - XW'(1));
    xs    = x >> nb;
    // restoring division xs / f, quotient known to fit in 9 bits
    rem = xs;
    q   = '0;
    for (int j = 8; j >= 0; j--) begin
      dv = 41'(f) << j;
      if (41'(rem) >= dv) begin
        rem  = rem - XW'(dv);
        q[j] = 1'b1;
      end
    end
    xn    = (XW'(q) << RANS_N) + XW'(c_t[s]) + rem;
    adv   = in_pair.ad >> (4'(AD_W) - adl);
    chunk = (RANS_KMAX'(sbits) << adl) | RANS_KMAX'(adv);
    k     = CW'(nb) + CW'(adl);
  end

  ans_bitpack #(.W(RANS_WORD), .KMAX(RANS_KMAX)) u_pack (
    .clk, .rst_n, .clr(start || (st_q == S_HDR && out_free)),
    .push(fire), .k, .chunk, .load(start && resume),
    .load_cnt(CW'(resume_hdr[28:24])), .load_bits(resume_bits),
    .emit, .word, .cnt(pcnt), .pend
  );

  assign flush_done = (st_q == S_HDR) && out_free;
  assign out_valid  = ov_q;
  assign out_word   = ow_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q <= S_RUN;
      x_q  <= '0;
      ov_q <= 1'b0;
      ow_q <= '0;
    end else if (start) begin
      st_q <= S_RUN;
      x_q  <= resume ? resume_hdr[23:0] : '0;
      ov_q <= 1'b0;
    end else begin
      if (out_ready) ov_q <= 1'b0;
      case (st_q)
        S_RUN: begin
          if (fire) begin
            x_q <= xn[RANS_SB-1:0];
            if (emit) begin
              ov_q <= 1'b1;
              ow_q <= word;
            end
          end else if (flush && out_free) begin
            st_q <= S_PART;
          end
        end
        S_PART: if (out_free) begin
          ov_q <= 1'b1;
          ow_q <= pend;
          st_q <= S_HDR;
        end
        default: if (out_free) begin   // S_HDR
          ov_q <= 1'b1;
          ow_q <= RANS_WORD'({5'(pcnt), x_q});
          x_q  <= '0;
          st_q <= S_RUN;
        end
      endcase
    end
  end

  a_state_range: assert property (@(posedge clk) disable iff (!rst_n)
    fire |-> xn[RANS_SB]);
endmodule
