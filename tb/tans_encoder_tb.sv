// tans_encoder_tb: checks the tANS compressor word for word against a
// software model (tb_ans_model::TansModel) for three code sets (64, 20 and
// 2 codes, random 8-bit counts, random additional-data sizes 0..8) and
// random streams. Trial 0 holds the output always ready and checks the
// rate of one pair per clock; the others throttle the output at random.
module tans_encoder_tb;
  import ans_pkg::*;
  import tb_ans_model::*;

  localparam int NPAIRS = 600;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  cfg_t  cfg;
  logic  start, in_valid, in_ready, flush, flush_done, out_valid, out_ready;
  pair_t in_pair;
  logic [TANS_WORD-1:0] out_word;

  logic resume = 1'b0;                  // resuming is exercised through comp_channel
  logic [31:0] resume_hdr = '0;
  logic [TANS_WORD-1:0] resume_bits = '0;

  tans_encoder dut (.*);

  int checks = 0, failures = 0;
  int ready_pct = 100;
  longint unsigned got[$];

  always @(posedge clk) begin
    if (rst_n && out_valid && out_ready) got.push_back(longint'(out_word));
    out_ready <= ($urandom_range(0, 99) < ready_pct);
  end

  task automatic cfg_wr(cfg_unit_e u, int a, longint d);
    cfg.we = 1'b1; cfg.unit = u; cfg.addr = 8'(a); cfg.data = 48'(d); cfg.chan = '0;
    @(posedge clk); #1;
    cfg.we = 1'b0;
  endtask

  task automatic run_trial(int nc, int pct);
    TansModel m;
    tpair_t pairs[$];
    longint unsigned exp_w[$];
    int i, t0, t1, cyc;
    m = new();
    m.randomize_counts(nc);
    m.build();
    for (int s = 0; s < 64; s++) begin
      cfg_wr(U_ADL, s, m.adl[s]);
      cfg_wr(U_TANS_ESYM, s, (m.cum[s] << 12) | (m.k[s] << 8) | m.n[s]);
    end
    for (int p = 0; p < 256; p++) cfg_wr(U_TANS_EST, p, m.est[p]);
    for (int j = 0; j < NPAIRS; j++) begin
      tpair_t tp;
      tp.code = 6'(m.draw());
      tp.ad   = 8'($urandom_range(0, 255));
      pairs.push_back(tp);
    end
    m.encode(pairs, exp_w);
    ready_pct = pct;
    got.delete();
    start = 1'b1; @(posedge clk); #1; start = 1'b0;
    // compress back to front
    i = NPAIRS - 1;
    cyc = 0;
    while (i >= 0) begin
      in_valid = 1'b1;
      in_pair.code = pairs[i].code;
      in_pair.ad   = pairs[i].ad;
      #1;
      if (in_ready) i--;
      @(posedge clk); #1;
      cyc++;
    end
    in_valid = 1'b0;
    flush = 1'b1;
    while (1) begin
      #1;
      if (flush_done) break;
      @(posedge clk); #1;
    end
    @(posedge clk); #1;
    flush = 1'b0;
    repeat (20) @(posedge clk);
    #1;
    checks++;
    if (got.size() != exp_w.size()) begin
      failures++;
      $display("nc=%0d: %0d words, expected %0d", nc, got.size(), exp_w.size());
    end
    for (int j = 0; j < exp_w.size() && j < got.size(); j++) begin
      checks++;
      if (got[j] != exp_w[j]) begin
        failures++;
        if (failures < 10) $display("nc=%0d word %0d: %h expected %h", nc, j, got[j], exp_w[j]);
      end
    end
    if (pct == 100) begin
      checks++;
      if (cyc != NPAIRS) begin
        failures++;
        $display("rate: %0d pairs took %0d cycles", NPAIRS, cyc);
      end
    end
    t0 = 0; t1 = 0;
  endtask

  initial begin
    cfg = '0; start = 1'b0; in_valid = 1'b0; flush = 1'b0; in_pair = '0; out_ready = 1'b1;
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
