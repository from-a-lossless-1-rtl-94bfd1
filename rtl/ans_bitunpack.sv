// ans_bitunpack: bit buffer at the input of an ANS decompressor.
//
// ANS is last-in first-out, so the decompressor reads the compressor's
// words in reverse order and takes bits from the least significant end:
// the bits pushed last come out first. `peek` shows the lowest KMAX bits;
// `pop` removes k of them. A new word is placed above the bits already held
// (`load`), allowed while `can_load` (at most B-W bits held). With
// B >= 2*KMAX + W - 1 a decompressor that pops only when it holds at least
// the bits it needs, and loads whenever it may, never waits for bits while
// words keep arriving: one coding pair per clock. `init` restarts the
// buffer with the low r bits of a word (the partial last word of a stream).
module ans_bitunpack #(
  parameter int unsigned W    = 16,
  parameter int unsigned KMAX = 16,
  parameter int unsigned B    = 2 * KMAX + W,
  localparam int unsigned CW  = $clog2(B + 1)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            init,
  input  logic [CW-1:0]   init_r,
  input  logic            load,
  input  logic [W-1:0]    word,
  input  logic            pop,
  input  logic [CW-1:0]   k,
  output logic            can_load,
  output logic [CW-1:0]   cnt,
  output logic [KMAX-1:0] peek
);
  logic [B-1:0]  sr_q, s1, s2;
  logic [CW-1:0] c1, c2;

  assign peek     = sr_q[KMAX-1:0];
  assign can_load = (cnt <= CW'(B - W));

  always_comb begin
    s1 = pop ? (sr_q >> k) : sr_q;
    c1 = pop ? (cnt - k) : cnt;
    s2 = load ? (s1 | (B'(word) << c1)) : s1;
    c2 = load ? (c1 + CW'(W)) : c1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sr_q <= '0;
      cnt  <= '0;
    end else if (init) begin
      sr_q <= B'(word) & ((B'(1) << init_r) - B'(1));
      cnt  <= init_r;
    end else begin
      sr_q <= s2;
      cnt  <= c2;
    end
  end
endmodule
