// rans_decoder_tb: streams produced by the software model
// (tb_ans_model::RansModel) are fed to the rANS decompressor last word
// first; the pairs it returns must be the original ones, in order, with
// the additional data cut to each code's size and left-aligned. Trial 0
// keeps input and output always ready and checks one pair per clock; the
// other trials throttle both sides at random.
module rans_decoder_tb;
  import ans_pkg::*;
  import tb_ans_model::*;

  localparam int NPAIRS = 600;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  cfg_t  cfg;
  logic  start, in_valid, in_ready, out_valid, out_ready;
  logic [RANS_WORD-1:0] in_word;
  pair_t out_pair;

  rans_decoder dut (.*);

  int checks = 0, failures = 0;
  int ready_pct = 100;
  int cyc_first = -1, cyc_last = 0, cyc = 0;
  pair_t got[$];

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && out_valid && out_ready) begin
      got.push_back(out_pair);
      if (cyc_first < 0) cyc_first <= cyc;
      cyc_last <= cyc;
    end
    out_ready <= ($urandom_range(0, 99) < ready_pct);
  end

  task automatic cfg_wr(cfg_unit_e u, int a, longint d);
    cfg.we = 1'b1; cfg.unit = u; cfg.addr = 8'(a); cfg.data = 48'(d); cfg.chan = '0;
    @(posedge clk); #1;
    cfg.we = 1'b0;
  endtask

  task automatic run_trial(int nc, int pct);
    RansModel m;
    tpair_t pairs[$];
    longint unsigned w[$];
    int i;
    m = new();
    m.randomize_freqs(nc);
    for (int s = 0; s < 64; s++) begin
      cfg_wr(U_ADL, s, m.adl[s]);
      cfg_wr(U_RANS_SYM, s, (longint'(m.k[s]) << 32) | (longint'(m.c[s]) << 16) | longint'(m.f[s]));
    end
    for (int j = 0; j < NPAIRS; j++) begin
      tpair_t tp;
      tp.code = 6'(m.draw());
      tp.ad   = 8'($urandom_range(0, 255));
      pairs.push_back(tp);
    end
    m.encode(pairs, w);
    ready_pct = pct;
    got.delete();
    cyc_first = -1;
    start = 1'b1; @(posedge clk); #1; start = 1'b0;
    i = w.size() - 1;
    while (i >= 0) begin
      in_valid = ($urandom_range(0, 99) < pct);
      in_word  = RANS_WORD'(w[i]);
      #1;
      if (in_valid && in_ready) i--;
      @(posedge clk); #1;
    end
    in_valid = 1'b0;
    // a decoder that stops short is reported pair by pair, not by the watchdog
    for (int n = 0; n < 20 * NPAIRS && got.size() < NPAIRS; n++) @(posedge clk);
    #1;
    for (int j = 0; j < NPAIRS; j++) begin
      checks++;
      if (j >= got.size()) begin
        failures++;
        if (failures < 10) $display("nc=%0d pair %0d never decoded", nc, j);
        continue;
      end
      if (got[j].code != pairs[j].code ||
          got[j].ad != ad_trunc(pairs[j].ad, m.adl[pairs[j].code])) begin
        failures++;
        if (failures < 10)
          $display("nc=%0d pair %0d: %0d/%h expected %0d/%h", nc, j, got[j].code, got[j].ad,
                   pairs[j].code, ad_trunc(pairs[j].ad, m.adl[pairs[j].code]));
      end
    end
    if (pct == 100) begin
      checks++;
      if (cyc_last - cyc_first + 1 != NPAIRS) begin
        failures++;
        $display("rate: %0d pairs over %0d cycles", NPAIRS, cyc_last - cyc_first + 1);
      end
    end
  endtask

  initial begin
    cfg = '0; start = 1'b0; in_valid = 1'b0; in_word = '0; out_ready = 1'b1;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    run_trial(64, 100);
    run_trial(20, 60);
    run_trial(2, 80);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
