// comp_channel: one compression stream, from the processor's numbers to
// compressed memory words (one "Compressor -> FIFO/Cache" row of the
// paper's Fig. 12, including the number-format glue of Sec. 4.3).
//
// Numbers go to either the floating-point glue (fp_reduce, bfloat16 in) or
// the fixed-point glue (fx_reduce, int16 in); the coding pairs go to either
// a tANS compressor (16-bit words, stored zero-extended in 32-bit memory
// words) or a rANS compressor (32-bit words). Both are per-stream
// configuration bits, as in decomp_channel. The channel takes exactly the
// configured number of values; once the last pair has entered the
// compressor it flushes it, which appends the partial word and the header
// word, and raises `done` once the FIFO has
// handed its last word to the arbiter. The words wait in a FIFO for the memory arbiter.
//
// Configuration: cfg writes with cfg.chan == CHAN; U_CHAN addr 0 coder and
// format, addr 1 number of values, addr 2 start, addr 3 {resume [32],
// header [31:0]} and addr 4 partial word [31:0]. With resume set, start
// makes the compressor continue the stream whose closing header and
// partial word are given (appending data, Sec. 4.4); the arbiter's write
// base is then the address of that partial word, which is overwritten.
//
// Timing: one number per clock; the last words leave two clocks after the
// last pair, plus FIFO and arbiter delays.
module comp_channel
  import ans_pkg::*;
#(
  parameter int unsigned CHAN  = 0,
  parameter int unsigned DEPTH = 16
) (
  input  logic             clk,
  input  logic             rst_n,
  input  cfg_t             cfg,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [VAL_W-1:0] in_value,
  output logic             wr_valid,
  input  logic             wr_ready,
  output logic [MEM_W-1:0] wr_data,
  output logic             done
);
  logic    done_q;
  cfg_t    lcfg;
  coder_e  coder_q;
  format_e fmt_q;
  logic [31:0] len_q, in_left_q, enc_left_q;
  logic    start, run_q, flush_q;
  logic        res_en_q;
  logic [31:0] res_hdr_q, res_bits_q;

  always_comb begin
    lcfg    = cfg;
    lcfg.we = cfg.we && (cfg.chan == 8'(CHAN));
    start   = lcfg.we && lcfg.unit == U_CHAN && lcfg.addr == 8'd2;
  end

  // number-format glue
  logic  fp_in_ready, fx_in_ready, fp_valid, fx_valid, acc;
  pair_t fp_pair, fx_pair, pair;
  logic  pair_valid, e_ready, pair_take;

  assign in_ready = (in_left_q != 0) &&
                    ((fmt_q == FMT_FLOAT) ? fp_in_ready : fx_in_ready);
  assign acc      = in_valid && in_ready;

  fp_reduce u_fp (
    .clk, .rst_n, .cfg(lcfg),
    .in_valid(in_valid && in_left_q != 0 && fmt_q == FMT_FLOAT), .in_ready(fp_in_ready),
    .in_value,
    .out_valid(fp_valid), .out_ready(e_ready && fmt_q == FMT_FLOAT), .out_pair(fp_pair)
  );

  fx_reduce u_fx (
    .clk, .rst_n, .cfg(lcfg),
    .in_valid(in_valid && in_left_q != 0 && fmt_q == FMT_FIXED), .in_ready(fx_in_ready),
    .in_value,
    .out_valid(fx_valid), .out_ready(e_ready && fmt_q == FMT_FIXED), .out_pair(fx_pair)
  );

  assign pair       = (fmt_q == FMT_FLOAT) ? fp_pair : fx_pair;
  assign pair_valid = (fmt_q == FMT_FLOAT) ? fp_valid : fx_valid;

  // compressors
  logic t_in_ready, r_in_ready, t_ov, r_ov, t_fd, r_fd, f_in_ready, w_valid, flush_done;
  logic [TANS_WORD-1:0] t_word;
  logic [RANS_WORD-1:0] r_word;
  logic [MEM_W-1:0]     w_data;
  logic [$clog2(DEPTH):0] f_level;

  tans_encoder u_tenc (
    .clk, .rst_n, .cfg(lcfg), .start,
    .resume(res_en_q), .resume_hdr(res_hdr_q), .resume_bits(res_bits_q[TANS_WORD-1:0]),
    .in_valid(pair_valid && coder_q == CODER_TANS), .in_ready(t_in_ready), .in_pair(pair),
    .flush(flush_q && coder_q == CODER_TANS), .flush_done(t_fd),
    .out_valid(t_ov), .out_ready(f_in_ready && coder_q == CODER_TANS), .out_word(t_word)
  );

  rans_encoder u_renc (
    .clk, .rst_n, .cfg(lcfg), .start,
    .resume(res_en_q), .resume_hdr(res_hdr_q), .resume_bits(res_bits_q),
    .in_valid(pair_valid && coder_q == CODER_RANS), .in_ready(r_in_ready), .in_pair(pair),
    .flush(flush_q && coder_q == CODER_RANS), .flush_done(r_fd),
    .out_valid(r_ov), .out_ready(f_in_ready && coder_q == CODER_RANS), .out_word(r_word)
  );

  assign e_ready    = (coder_q == CODER_TANS) ? t_in_ready : r_in_ready;
  assign pair_take  = pair_valid && e_ready;
  assign w_valid    = (coder_q == CODER_TANS) ? t_ov : r_ov;
  assign w_data     = (coder_q == CODER_TANS) ? MEM_W'(t_word) : r_word;
  assign flush_done = flush_q && ((coder_q == CODER_TANS) ? t_fd : r_fd);

  stream_fifo #(.W(MEM_W), .DEPTH(DEPTH)) u_fifo (
    .clk, .rst_n, .clr(start),
    .in_valid(w_valid), .in_ready(f_in_ready), .in_data(w_data),
    .out_valid(wr_valid), .out_ready(wr_ready), .out_data(wr_data),
    .level(f_level)
  );

  // done once the stream is flushed and its last word has gone to memory
  assign done = done_q && !w_valid && (f_level == '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      coder_q    <= CODER_TANS;
      fmt_q      <= FMT_FLOAT;
      len_q      <= '0;
      in_left_q  <= '0;
      enc_left_q <= '0;
      run_q      <= 1'b0;
      flush_q    <= 1'b0;
      done_q     <= 1'b0;
      res_en_q   <= 1'b0;
      res_hdr_q  <= '0;
      res_bits_q <= '0;
    end else begin
      if (lcfg.we && lcfg.unit == U_CHAN) begin
        if (lcfg.addr == 8'd0) begin
          coder_q <= coder_e'(lcfg.data[0]);
          fmt_q   <= format_e'(lcfg.data[1]);
        end
        if (lcfg.addr == 8'd1) len_q <= lcfg.data[31:0];
        if (lcfg.addr == 8'd3) begin
          res_en_q  <= lcfg.data[32];
          res_hdr_q <= lcfg.data[31:0];
        end
        if (lcfg.addr == 8'd4) res_bits_q <= lcfg.data[31:0];
      end
      if (start) begin
        in_left_q  <= len_q;
        enc_left_q <= len_q;
        run_q      <= 1'b1;
        flush_q    <= 1'b0;
        done_q     <= 1'b0;
      end else begin
        if (acc) in_left_q <= in_left_q - 1;
        if (pair_take) enc_left_q <= enc_left_q - 1;
        if (run_q && enc_left_q == 0 && !flush_q) flush_q <= 1'b1;
        if (flush_done) begin
          flush_q <= 1'b0;
          run_q   <= 1'b0;
          done_q  <= 1'b1;
        end
      end
    end
  end
endmodule
