// ans_bitpack: bit packer at the output of an ANS compressor.
//
// Each cycle the compressor may push a chunk of k bits (0..KMAX). Chunks
// are appended below the bits already held, so the oldest bit is always the
// most significant one. As soon as W or more bits are held, the top W bits
// leave as one word (`emit`, combinational, same cycle as the push). At
// most W-1 bits stay pending afterwards, so with KMAX <= W at most one word
// is produced per push. `pend` shows the pending bits right-aligned, which
// the compressor uses to write the last, partial word of a stream. `clr`
// empties the packer; `load` (which wins over `clr`) sets it to hold
// `load_cnt` pending bits, right-aligned in `load_bits`, so a compressor
// can continue a stream it had ended.
module ans_bitpack #(
  parameter int unsigned W    = 16,
  parameter int unsigned KMAX = 16,
  localparam int unsigned CW  = $clog2(W + KMAX + 1)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            clr,
  input  logic            push,
  input  logic [CW-1:0]   k,
  input  logic [KMAX-1:0] chunk,
  input  logic            load,
  input  logic [CW-1:0]   load_cnt,
  input  logic [W-1:0]    load_bits,
  output logic            emit,
  output logic [W-1:0]    word,
  output logic [CW-1:0]   cnt,
  output logic [W-1:0]    pend
);
  localparam int unsigned BW = W + KMAX;

  logic [BW-1:0] sr_q, nsr, kmask;
  logic [CW-1:0] ncnt, rcnt;

  always_comb begin
    kmask = (BW'(1) << k) - BW'(1);
    nsr   = (sr_q << k) | (BW'(chunk) & kmask);
    ncnt  = cnt + k;
    emit  = push && (ncnt >= CW'(W));
    rcnt  = ncnt - CW'(W);
    word  = W'(nsr >> rcnt);
  end

  assign pend = sr_q[W-1:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sr_q <= '0;
      cnt  <= '0;
    end else if (load) begin
      sr_q <= BW'(load_bits) & ((BW'(1) << load_cnt) - BW'(1));
      cnt  <= load_cnt;
    end else if (clr) begin
      sr_q <= '0;
      cnt  <= '0;
    end else if (push) begin
      if (emit) begin
        sr_q <= nsr & ((BW'(1) << rcnt) - BW'(1));
        cnt  <= rcnt;
      end else begin
        sr_q <= nsr;
        cnt  <= ncnt;
      end
    end
  end
endmodule
