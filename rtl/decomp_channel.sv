// decomp_channel: one decompression stream, from compressed memory words
// to numbers for the processor (one "FIFO/Cache -> Decompressor" row of the
// paper's Fig. 12, including the number-format glue of Sec. 4.3).
//
// Words fetched by the memory arbiter land in a FIFO. They go to either a
// tANS decompressor (low 16 bits of each word) or a rANS decompressor (full
// 32-bit words); the coding pairs then go to either the floating-point glue
// (fp_expand, bfloat16 out) or the fixed-point glue (fx_expand, int16 out).
// Both choices are per-stream configuration bits, so one channel can read
// any of the paper's formats with either coder; carrying both coders and
// both glues in every channel is this design's choice (the paper discusses
// them as alternatives). A counter set to the stream length lets exactly
// that many numbers out, since an ANS decompressor cannot see the end of
// its stream. `rd_pop` reports each word taken from the FIFO so that the
// arbiter can return a credit.
//
// Configuration: every cfg write with cfg.chan == CHAN reaches the tables
// of this channel. U_CHAN addr 0 selects coder and format, addr 1 the
// number of values, addr 2 starts a stream (empties the FIFO, restarts the
// decompressors); start the channel before its arbiter read channel.
//
// Entry point (random access): a stream can also be entered in the middle.
// The point is given by a memory word address (set in the arbiter), a bit
// pointer r (how many bits of that word belong to the part being entered)
// and the coder state there. U_CHAN addr 3 takes {shift [38:33], enable
// [32], header [31:0]}, the header in the coder's own format ({r, state},
// see the coders). When enabled, start feeds this header to the
// decompressor instead of one read from memory, and the first memory word,
// the one at the entry address, is shifted right by `shift` so that the r
// bits of the entered part become the partial word; the words below follow
// as usual. For a full word shift = W - r (W = 16 tANS, 32 rANS); if the
// entry word is the stream's last, right-aligned partial word of r' bits,
// shift = r' - r. The entry
// state and bit count are those the compressor had at that point, i.e. the
// header it would have written had the stream ended there. The paper says
// only that an entry point needs an address, a bit pointer and the
// decompressor state; this mechanism is this design's own.
//
// Timing: after the two header words, one number per clock while words
// arrive at least as fast as the decompressor needs them.
module decomp_channel
  import ans_pkg::*;
#(
  parameter int unsigned CHAN  = 0,
  parameter int unsigned DEPTH = 16
) (
  input  logic             clk,
  input  logic             rst_n,
  input  cfg_t             cfg,
  input  logic             rd_valid,
  input  logic [MEM_W-1:0] rd_data,
  output logic             rd_pop,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [VAL_W-1:0] out_value,
  output logic             busy
);
  cfg_t    lcfg;
  coder_e  coder_q;
  format_e fmt_q;
  logic [31:0] len_q, left_q;
  logic    start;
  logic        ent_en_q;
  logic [31:0] ent_hdr_q;
  logic [5:0]  ent_sh_q;
  typedef enum logic [1:0] {PH_RUN, PH_INJ, PH_FIRST} phase_e;
  phase_e      ph_q;

  always_comb begin
    lcfg    = cfg;
    lcfg.we = cfg.we && (cfg.chan == 8'(CHAN));
    start   = lcfg.we && lcfg.unit == U_CHAN && lcfg.addr == 8'd2;
  end

  // word FIFO
  logic             f_in_ready, f_out_valid, f_out_ready;
  logic [MEM_W-1:0] f_out_data;
  logic [$clog2(DEPTH):0] f_level;

  stream_fifo #(.W(MEM_W), .DEPTH(DEPTH)) u_fifo (
    .clk, .rst_n, .clr(start),
    .in_valid(rd_valid), .in_ready(f_in_ready), .in_data(rd_data),
    .out_valid(f_out_valid), .out_ready(f_out_ready), .out_data(f_out_data),
    .level(f_level)
  );

  // decompressors
  logic  t_in_ready, r_in_ready, t_out_valid, r_out_valid, p_ready;
  pair_t t_pair, r_pair, pair;
  logic  pair_valid, pair_take;
  logic  d_valid, d_ready;
  logic [MEM_W-1:0] d_word;

  // word to the decompressor: injected header, shifted entry word, or FIFO
  always_comb begin
    d_valid = (ph_q == PH_INJ) || f_out_valid;
    if (ph_q == PH_INJ)        d_word = ent_hdr_q;
    else if (ph_q == PH_FIRST) d_word = (coder_q == CODER_TANS)
                                        ? MEM_W'(f_out_data[TANS_WORD-1:0] >> ent_sh_q)
                                        : f_out_data >> ent_sh_q;
    else                       d_word = f_out_data;
  end

  tans_decoder u_tdec (
    .clk, .rst_n, .cfg(lcfg), .start,
    .in_valid(d_valid && coder_q == CODER_TANS), .in_ready(t_in_ready),
    .in_word(d_word[TANS_WORD-1:0]),
    .out_valid(t_out_valid), .out_ready(coder_q == CODER_TANS && pair_take),
    .out_pair(t_pair)
  );

  rans_decoder u_rdec (
    .clk, .rst_n, .cfg(lcfg), .start,
    .in_valid(d_valid && coder_q == CODER_RANS), .in_ready(r_in_ready),
    .in_word(d_word),
    .out_valid(r_out_valid), .out_ready(coder_q == CODER_RANS && pair_take),
    .out_pair(r_pair)
  );

  assign d_ready     = (coder_q == CODER_TANS) ? t_in_ready : r_in_ready;
  assign f_out_ready = d_ready && (ph_q != PH_INJ);
  assign rd_pop      = f_out_valid && f_out_ready;
  assign pair        = (coder_q == CODER_TANS) ? t_pair : r_pair;
  assign pair_valid  = ((coder_q == CODER_TANS) ? t_out_valid : r_out_valid) && (left_q != 0);
  assign pair_take   = pair_valid && p_ready;

  // number-format glue
  logic fp_in_ready, fx_in_ready, fp_valid, fx_valid;
  logic [VAL_W-1:0] fp_value, fx_value;

  fp_expand u_fp (
    .clk, .rst_n, .cfg(lcfg),
    .in_valid(pair_valid && fmt_q == FMT_FLOAT), .in_ready(fp_in_ready), .in_pair(pair),
    .out_valid(fp_valid), .out_ready(out_ready && fmt_q == FMT_FLOAT), .out_value(fp_value)
  );

  fx_expand u_fx (
    .clk, .rst_n, .cfg(lcfg),
    .in_valid(pair_valid && fmt_q == FMT_FIXED), .in_ready(fx_in_ready), .in_pair(pair),
    .out_valid(fx_valid), .out_ready(out_ready && fmt_q == FMT_FIXED), .out_value(fx_value)
  );

  assign p_ready   = (fmt_q == FMT_FLOAT) ? fp_in_ready : fx_in_ready;
  assign out_valid = (fmt_q == FMT_FLOAT) ? fp_valid : fx_valid;
  assign out_value = (fmt_q == FMT_FLOAT) ? fp_value : fx_value;
  assign busy      = (left_q != 0) || out_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      coder_q <= CODER_TANS;
      fmt_q   <= FMT_FLOAT;
      len_q   <= '0;
      left_q  <= '0;
      ent_en_q  <= 1'b0;
      ent_hdr_q <= '0;
      ent_sh_q  <= '0;
      ph_q      <= PH_RUN;
    end else begin
      if (lcfg.we && lcfg.unit == U_CHAN) begin
        if (lcfg.addr == 8'd0) begin
          coder_q <= coder_e'(lcfg.data[0]);
          fmt_q   <= format_e'(lcfg.data[1]);
        end
        if (lcfg.addr == 8'd1) len_q <= lcfg.data[31:0];
        if (lcfg.addr == 8'd3) begin
          ent_en_q  <= lcfg.data[32];
          ent_hdr_q <= lcfg.data[31:0];
          ent_sh_q  <= lcfg.data[38:33];
        end
      end
      if (start) left_q <= len_q;
      else if (pair_take) left_q <= left_q - 1;
      if (start)                                       ph_q <= ent_en_q ? PH_INJ : PH_RUN;
      else if (ph_q == PH_INJ && d_ready)              ph_q <= PH_FIRST;
      else if (ph_q == PH_FIRST && d_valid && d_ready) ph_q <= PH_RUN;
    end
  end

  // The arbiter only fetches a word when the FIFO has room for it.
  a_fifo_room: assert property (@(posedge clk) disable iff (!rst_n) rd_valid |-> f_in_ready);
endmodule
