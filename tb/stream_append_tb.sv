// stream_append_tb: continuing a compressed stream that is already in
// memory.
//
// The software model compresses elements N-1 down to k of a bfloat16
// stream (the compressor works back to front), which ends with a partial
// word and a header {r, state}. The compression channel is then resumed
// from that header and partial word (U_CHAN addr 3 and 4) and given
// elements k-1 down to 0. Its words, written over the old partial word,
// must equal the model's compression of the whole stream from that word
// on, so the joined stream decompresses as if it had been written in one
// go. After each append a normal start compresses the whole stream, which
// must match too (resume switched off). Both coders, several split points
// including k = 1 and k = N-1, random output stalls.
module stream_append_tb;
  import ans_pkg::*;
  import tb_ans_model::*;

  localparam int N = 400;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  cfg_t cfg;
  logic             in_valid, in_ready, wr_valid, wr_ready, done;
  logic [VAL_W-1:0] in_value;
  logic [MEM_W-1:0] wr_data;

  comp_channel dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 15) $display("FAIL %s", what);
    end
  endtask

  logic [MEM_W-1:0] got[$];
  int nacc;
  always @(posedge clk) begin
    wr_ready <= ($urandom_range(0, 99) < 75);
    if (rst_n && wr_valid && wr_ready) got.push_back(wr_data);
    if (rst_n && in_valid && in_ready) nacc++;
  end

  task automatic send(cfg_t q[$]);
    foreach (q[k]) begin
      @(negedge clk);
      cfg = q[k];
    end
    @(negedge clk);
    cfg.we = 1'b0;
  endtask

  // push vals[top] down to vals[0], then wait for done
  task automatic compress(logic [15:0] vals[$], int top);
    int n;
    got.delete();
    nacc = 0;
    while (nacc < top + 1) begin
      @(negedge clk);
      in_valid = 1'b1;
      in_value = vals[top - nacc];
    end
    @(negedge clk);
    in_valid = 1'b0;
    n = 0;
    while (!done && n < 2000) begin @(posedge clk); n++; end
    check(done, "compressor never done");
  endtask

  initial begin
    NumFormat f;
    TansModel t;
    RansModel r;
    tpair_t pairs[$], sfx[$];
    logic [15:0] vals[$];
    longint unsigned full[$], part[$];
    cfg_t q[$];
    int hist[64], a, cut[$];
    bit use_rans;

    cfg = '0; in_valid = 1'b0; in_value = '0; wr_ready = 1'b0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;

    for (int trial = 0; trial < 2; trial++) begin
      use_rans = (trial == 1);
      f = new(); t = new(); r = new();
      f.make_bf16(110, 130, 7);
      pairs.delete(); vals.delete();
      for (int c = 0; c < 64; c++) hist[c] = 0;
      for (int j = 0; j < N; j++) begin
        logic [15:0] v;
        v = gen_value(f, 110, 130);
        vals.push_back(f.from_pair(f.to_pair(v)));
        pairs.push_back(f.to_pair(v));
        hist[pairs[j].code]++;
      end
      if (use_rans) r.from_hist(hist, f.adl); else t.from_hist(hist, f.adl);
      full.delete();
      if (use_rans) r.encode(pairs, full); else t.encode(pairs, full);
      chan_cfg(0, f, use_rans, t, r, N, q);
      send(q);
      q.delete();

      cut.delete();
      cut.push_back(1); cut.push_back(N - 1);
      for (int e = 0; e < 4; e++) cut.push_back($urandom_range(2, N - 2));
      foreach (cut[e]) begin
        int k;
        k = cut[e];
        sfx.delete();
        for (int j = k; j < N; j++) sfx.push_back(pairs[j]);
        part.delete();
        if (use_rans) r.encode(sfx, part); else t.encode(sfx, part);
        a = part.size() - 2;
        // resume after elements N-1..k and append k-1..0
        q.push_back(cw(0, U_CHAN, 1, k));
        q.push_back(cw(0, U_CHAN, 3, (longint'(1) << 32) | longint'(part[a + 1])));
        q.push_back(cw(0, U_CHAN, 4, longint'(part[a])));
        q.push_back(cw(0, U_CHAN, 2, 0));
        send(q);
        q.delete();
        compress(vals, k - 1);
        check(got.size() == full.size() - a,
              $sformatf("rans=%0d split %0d: %0d words, expected %0d", use_rans, k, got.size(), full.size() - a));
        for (int j = 0; j < got.size() && a + j < full.size(); j++)
          check(got[j] == MEM_W'(full[a + j]),
                $sformatf("rans=%0d split %0d word %0d: %h expected %h", use_rans, k, a + j, got[j], full[a + j]));
        // whole stream from a normal start
        q.push_back(cw(0, U_CHAN, 1, N));
        q.push_back(cw(0, U_CHAN, 3, 0));
        q.push_back(cw(0, U_CHAN, 2, 0));
        send(q);
        q.delete();
        compress(vals, N - 1);
        check(got.size() == full.size(), $sformatf("whole stream: %0d words, expected %0d", got.size(), full.size()));
        for (int j = 0; j < got.size() && j < full.size(); j++)
          check(got[j] == MEM_W'(full[j]), $sformatf("whole stream word %0d", j));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
