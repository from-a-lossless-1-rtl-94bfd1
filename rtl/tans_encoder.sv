// tans_encoder: table-based ANS (tANS) compressor of coding pairs.
//
// Function (from the paper): one coding pair in per clock, codes entropy
// coded with 8-bit normalised probabilities (n_i/256), additional data
// (0..8 bits per code) passed through uncompressed, output in fixed 16-bit
// words as the internal bit buffer fills. The tables are computed off line
// from the probabilities and uploaded.
//
// How it works (standard tANS; the paper gives no internals). The state is
// x in [256, 512), held as x-256. For code s with count n_s and
// k_s = 8 - floor(log2 n_s), the compressor first sheds nb low bits of x
// (nb = k_s, or k_s-1 if x < n_s << k_s) so that x >> nb lies in
// [n_s, 2 n_s), then reads the next state from the 256-entry state table
// at cum_s + (x >> nb) - n_s. The chunk pushed into the bit packer is
// {shed state bits, additional data}, nb + adl_s <= 16 bits.
//
// Because ANS is last-in first-out, a stream is compressed back to front
// and read back starting from its last word. On `flush` (held until
// `flush_done`) the compressor ends the stream with two more words: the
// pending bits right-aligned in one word, then a header word holding
// {pending bit count [11:8], final state [7:0]}. The header format and the
// initial state (x = 256) are this design's choices.
//
// Resuming: if `resume` is high at `start`, the state and the pending bits
// are loaded from a header {r, state} and its partial word (`resume_hdr`,
// `resume_bits`) instead of starting empty, so new pairs continue a stream
// already in memory; the continued stream is written over the old partial
// word. The paper names this need (restoring the compressor's status to
// append data); the mechanism is this design's own.
//
// Interface: cfg (tables U_ADL, U_TANS_ESYM, U_TANS_EST), start (restart
// state), valid/ready pair input, valid/ready 16-bit word output held in a
// register. Throughput one pair per clock; a word appears on the output the
// cycle after the pair that completed it.
module tans_encoder
  import ans_pkg::*;
(
  input  logic                 clk,
  input  logic                 rst_n,
  input  cfg_t                 cfg,
  input  logic                 start,
  input  logic                 resume,
  input  logic [31:0]          resume_hdr,
  input  logic [TANS_WORD-1:0] resume_bits,
  input  logic                 in_valid,
  output logic                 in_ready,
  input  pair_t                in_pair,
  input  logic                 flush,
  output logic                 flush_done,
  output logic                 out_valid,
  input  logic                 out_ready,
  output logic [TANS_WORD-1:0] out_word
);
  localparam int unsigned CW = $clog2(TANS_WORD + TANS_KMAX + 1);

  typedef enum logic [1:0] {S_RUN, S_PART, S_HDR} state_e;

  logic [ADL_W-1:0]  adl_t [NCODES];
  logic [7:0]        n_t   [NCODES];
  logic [3:0]        k_t   [NCODES];
  logic [7:0]        cum_t [NCODES];
  logic [TANS_R-1:0] est_t [TANS_L];

  always_ff @(posedge clk) begin
    if (cfg.we) begin
      case (cfg.unit)
        U_ADL:       adl_t[cfg.addr[CODE_W-1:0]] <= cfg.data[ADL_W-1:0];
        U_TANS_ESYM: begin
          n_t[cfg.addr[CODE_W-1:0]]   <= cfg.data[7:0];
          k_t[cfg.addr[CODE_W-1:0]]   <= cfg.data[11:8];
          cum_t[cfg.addr[CODE_W-1:0]] <= cfg.data[19:12];
        end
        U_TANS_EST:  est_t[cfg.addr] <= cfg.data[TANS_R-1:0];
        default: ;
      endcase
    end
  end

  state_e            st_q;
  logic [TANS_R-1:0] x_q;
  logic              ov_q;
  logic [TANS_WORD-1:0] ow_q;

  logic              out_free, fire;
  logic [CODE_W-1:0] s;
  logic [ADL_W-1:0]  adl;
  logic [TANS_R:0]   x;
  logic [15:0]       thr;
  logic [3:0]        nb;
  logic [TANS_R:0]   sbits, xs;
  logic [7:0]        idx;
  logic [AD_W-1:0]   adv;
  logic [TANS_KMAX-1:0] chunk;
  logic [CW-1:0]     k;
  logic              emit;
  logic [TANS_WORD-1:0] word, pend;
  logic [CW-1:0]     pcnt;

  assign out_free = !ov_q || out_ready;
  assign in_ready = (st_q == S_RUN) && out_free;
  assign fire     = in_valid && in_ready;

  always_comb begin
    s     = in_pair.code;
    adl   = adl_t[s];
    x     = {1'b1, x_q};
    thr   = 16'(n_t[s]) << k_t[s];
    nb    = (16'(x) >= thr) ? k_t[s] : k_t[s] - 4'd1;
    sbits = x & ((9'd1 << nb) - 9'd1);
    xs    = x >> nb;
    idx   = cum_t[s] + xs[7:0] - n_t[s];
    adv   = in_pair.ad >> (4'(AD_W) - adl);
    chunk = (TANS_KMAX'(sbits) << adl) | TANS_KMAX'(adv);
    k     = CW'(nb) + CW'(adl);
  end

  ans_bitpack #(.W(TANS_WORD), .KMAX(TANS_KMAX)) u_pack (
    .clk, .rst_n, .clr(start || (st_q == S_HDR && out_free)),
    .push(fire), .k, .chunk, .load(start && resume),
    .load_cnt(CW'(resume_hdr[11:8])), .load_bits(resume_bits),
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
      x_q  <= resume ? resume_hdr[7:0] : '0;
      ov_q <= 1'b0;
    end else begin
      if (out_ready) ov_q <= 1'b0;
      case (st_q)
        S_RUN: begin
          if (fire) begin
            x_q <= est_t[idx];
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
          ow_q <= TANS_WORD'({4'(pcnt), x_q});
          x_q  <= '0;
          st_q <= S_RUN;
        end
      endcase
    end
  end

  // A new word is only produced when the output register is free.
  a_no_overwrite: assert property (@(posedge clk) disable iff (!rst_n)
    (ov_q && !out_ready) |-> !emit);
endmodule
