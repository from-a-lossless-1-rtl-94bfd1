// workload_tb: the number formats the paper evaluates on language-model
// weights, run through one compression channel and one decompression
// channel at their default sizes.
//
// Weights are drawn from a normal distribution (standard deviation 0.02,
// a typical scale for a 7B-parameter model's layers; the real weights are
// not available here) and stored as bfloat16. Each workload:
//   * lossless bfloat16 (one code per exponent in use, zero as a direct
//     code, sign + 7 mantissa bits), with tANS and with rANS;
//   * fp12 E8M3 and fp11 E8M2 (same codes, 3 or 2 mantissa bits, rounded);
//   * integers quantised to Nb = 6, 7, 8 bits plus sign, scaled by
//     (2^Nb - 1) / max|w| and rounded, coded by the position of the
//     leading one.
// The tables are built from the workload's own histogram. The values are
// pushed into the compressor last first (ANS is last-in first-out), the
// words it writes are fed back to the decompressor from the last one, and
// every value must come back, in order, equal to the reference
// conversion. The compressor must accept and the decompressor produce one
// value per clock when nothing stalls them. The compressed size must be
// within 2% (plus the two closing words) of the ideal size: the sum over
// all values of -log2 of the coded probability plus the additional-data
// bits. Sizes are printed in bits per weight next to the ideal.
module workload_tb;
  import ans_pkg::*;
  import tb_ans_model::*;

  localparam int N = 4000;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  cfg_t cfg;
  logic             c_in_valid, c_in_ready, c_wr_valid, c_wr_ready, c_done;
  logic [VAL_W-1:0] c_in_value;
  logic [MEM_W-1:0] c_wr_data;
  logic             d_rd_valid, d_rd_pop, d_out_valid, d_out_ready, d_busy;
  logic [MEM_W-1:0] d_rd_data;
  logic [VAL_W-1:0] d_out_value;

  comp_channel u_comp (
    .clk, .rst_n, .cfg, .in_valid(c_in_valid), .in_ready(c_in_ready), .in_value(c_in_value),
    .wr_valid(c_wr_valid), .wr_ready(c_wr_ready), .wr_data(c_wr_data), .done(c_done)
  );
  decomp_channel u_decomp (
    .clk, .rst_n, .cfg, .rd_valid(d_rd_valid), .rd_data(d_rd_data), .rd_pop(d_rd_pop),
    .out_valid(d_out_valid), .out_ready(d_out_ready), .out_value(d_out_value), .busy(d_busy)
  );

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 15) $display("FAIL %s", what);
    end
  endtask

  // words written by the compressor, values returned by the decompressor
  logic [MEM_W-1:0] words[$];
  logic [VAL_W-1:0] outs[$];
  int out_first, out_last, cyc = 0;
  int in_first, in_last, nacc, inflight;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && c_wr_valid && c_wr_ready) words.push_back(c_wr_data);
    if (rst_n && c_in_valid && c_in_ready) begin
      if (in_first < 0) in_first = cyc;
      in_last = cyc;
      nacc++;
    end
    if (rst_n) inflight += int'(d_rd_valid) - int'(d_rd_pop);
    if (rst_n && d_out_valid && d_out_ready) begin
      outs.push_back(d_out_value);
      if (out_first < 0) out_first = cyc;
      out_last = cyc;
    end
  end

  function automatic real gauss();
    real u1, u2;
    u1 = (real'($urandom) + 1.0) / 4294967296.0;
    u2 = real'($urandom) / 4294967296.0;
    return $sqrt(-2.0 * $ln(u1)) * $cos(6.283185307179586 * u2);
  endfunction

  // bfloat16 of a real, by truncation (zero below the normal range)
  function automatic logic [15:0] to_bf16(real r);
    logic [63:0] b;
    int e;
    b = $realtobits(r);
    e = int'(b[62:52]) - 1023 + 127;
    if (e < 1) return 16'h0000;
    return {b[63], 8'(e), b[51:45]};
  endfunction

  task automatic send(cfg_t q[$]);
    foreach (q[k]) begin
      @(negedge clk);
      cfg = q[k];
    end
    @(negedge clk);
    cfg.we = 1'b0;
  endtask

  real wts[N];

  // mode: 0 float (mb mantissa bits), 1 integer (nb bits)
  task automatic run(string name, bit is_int, int prm, bit use_rans);
    NumFormat f;
    TansModel t;
    RansModel r;
    logic [15:0] vals[$];
    tpair_t pr;
    int hist[64];
    int emin, emax, ncyc, wbits;
    real wmax, ideal, p, hw;
    cfg_t q[$];

    f = new(); t = new(); r = new();
    // values in the processor's format
    emin = 255; emax = 0; wmax = 0.0;
    for (int j = 0; j < N; j++) if ((wts[j] < 0 ? -wts[j] : wts[j]) > wmax) wmax = (wts[j] < 0 ? -wts[j] : wts[j]);
    for (int j = 0; j < N; j++) begin
      logic [15:0] v;
      if (is_int) v = 16'($rtoi(wts[j] * real'((1 << prm) - 1) / wmax + (wts[j] < 0 ? -0.5 : 0.5)));
      else begin
        v = to_bf16(wts[j]);
        if (v[14:7] != 0) begin
          if (int'(v[14:7]) < emin) emin = v[14:7];
          if (int'(v[14:7]) > emax) emax = v[14:7];
        end
      end
      vals.push_back(v);
    end
    if (is_int) f.make_int();
    else f.make_bf16(emin, emax + 1, prm);    // one spare code for a rounding carry
    for (int c = 0; c < 64; c++) hist[c] = 0;
    foreach (vals[j]) begin
      pr = f.to_pair(vals[j]);
      hist[pr.code]++;
    end
    if (use_rans) r.from_hist(hist, f.adl); else t.from_hist(hist, f.adl);
    ideal = 0.0;
    for (int c = 0; c < 64; c++)
      if (hist[c] != 0) begin
        p = use_rans ? real'(r.f[c]) / 65536.0 : real'(t.n[c]) / 256.0;
        ideal += real'(hist[c]) * (-$ln(p) / $ln(2.0) + real'(f.adl[c]));
      end

    chan_cfg(0, f, use_rans, t, r, N, q);
    q.push_back(cw(0, U_CHAN, 2, 0));
    send(q);
    words.delete(); outs.delete();
    out_first = -1;

    // compress, last value first, one value offered every clock
    in_first = -1; in_last = 0; nacc = 0;
    while (nacc < N) begin
      @(negedge clk);
      c_in_valid = 1'b1;
      c_in_value = vals[N - 1 - nacc];
    end
    @(negedge clk);
    c_in_valid = 1'b0;
    ncyc = 0;
    while (!c_done && ncyc < 1000) begin @(posedge clk); ncyc++; end
    check(c_done, {name, ": compressor never done"});
    check(in_last - in_first + 1 == N, $sformatf("%s: %0d values took %0d cycles to enter", name, N, in_last - in_first + 1));

    // decompress: words from the last one, at most the FIFO's depth in flight
    begin
      int k;
      k = words.size() - 1;
      inflight = 0;
      while (k >= 0 || outs.size() < N) begin
        @(negedge clk);
        d_rd_valid = (k >= 0) && (inflight < 16);
        d_rd_data  = (k >= 0) ? words[k] : '0;
        @(posedge clk);
        if (d_rd_valid) k--;
        if (cyc > 2000000) break;
      end
      @(negedge clk);
      d_rd_valid = 1'b0;
    end
    check(outs.size() == N, $sformatf("%s: %0d of %0d values decompressed", name, outs.size(), N));
    for (int j = 0; j < N && j < outs.size(); j++)
      check(outs[j] == f.from_pair(f.to_pair(vals[j])),
            $sformatf("%s value %0d: %h expected %h", name, j, outs[j], f.from_pair(f.to_pair(vals[j]))));
    check(out_last - out_first + 1 == N, $sformatf("%s: %0d values took %0d cycles to leave", name, N, out_last - out_first + 1));

    wbits = use_rans ? RANS_WORD : TANS_WORD;
    hw = real'(words.size() * wbits);
    check(hw <= ideal * 1.02 + 2.0 * wbits, $sformatf("%s: %0.0f bits against ideal %0.0f", name, hw, ideal));
    $display("%-24s %6.3f bits/weight (ideal %6.3f), %0d codes", name, hw / N, ideal / N,
             is_int ? prm + 1 : emax - emin + 2);
  endtask

  initial begin
    cfg = '0; c_in_valid = 1'b0; c_in_value = '0; d_rd_valid = 1'b0; d_rd_data = '0;
    d_out_ready = 1'b1; c_wr_ready = 1'b1;
    for (int j = 0; j < N; j++) wts[j] = 0.02 * gauss();
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    run("bfloat16 lossless, tANS", 1'b0, 7, 1'b0);
    run("bfloat16 lossless, rANS", 1'b0, 7, 1'b1);
    run("fp12 E8M3, rANS", 1'b0, 3, 1'b1);
    run("fp11 E8M2, rANS", 1'b0, 2, 1'b1);
    run("integer Nb=6, rANS", 1'b1, 6, 1'b1);
    run("integer Nb=7, tANS", 1'b1, 7, 1'b0);
    run("integer Nb=8, rANS", 1'b1, 8, 1'b1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (500000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
