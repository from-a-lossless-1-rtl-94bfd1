// comp_channel_tb: for three stream set-ups (fp12 E8M3 with tANS, the
// integer code with rANS, lossless bfloat16 with rANS) generated numbers
// are pushed into the channel while its word output is throttled at
// random. The words must equal the software model's compression of the
// reference pairs (value -> pair conversion done in plain arithmetic),
// ending with the partial word and the header, and `done` must rise once
// the last word has left.
module comp_channel_tb;
  import ans_pkg::*;
  import tb_ans_model::*;

  localparam int N = 800, DEPTH = 16;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  cfg_t cfg;
  logic in_valid, in_ready, wr_valid, wr_ready, done;
  logic [VAL_W-1:0] in_value;
  logic [MEM_W-1:0] wr_data;

  comp_channel #(.CHAN(3), .DEPTH(DEPTH)) dut (.*);

  int checks = 0, failures = 0;
  longint unsigned got[$];

  always @(posedge clk) begin
    if (rst_n && wr_valid && wr_ready) got.push_back(longint'(wr_data));
    wr_ready <= ($urandom_range(0, 99) < 60);
  end

  task automatic trial(bit fixed, bit use_rans, int mb);
    NumFormat f;
    TansModel t;
    RansModel r;
    logic [15:0] vals[$];
    tpair_t pairs[$];
    longint unsigned w[$];
    cfg_t q[$];
    int hist[64];
    int i, wait_cyc;
    f = new(); t = new(); r = new();
    if (fixed) f.make_int(); else f.make_bf16(100, 131, mb);
    for (int c = 0; c < 64; c++) hist[c] = 0;
    for (int j = 0; j < N; j++) begin
      tpair_t p;
      vals.push_back(gen_value(f, 100, 131));
      p = f.to_pair(vals[j]);
      pairs.push_back(p);
      hist[p.code]++;
    end
    if (use_rans) begin r.from_hist(hist, f.adl); end
    else begin t.from_hist(hist, f.adl); end
    // the channel compresses in arrival order, so the model does the same
    if (use_rans) r.encode(pairs, w); else t.encode(pairs, w);
    chan_cfg(3, f, use_rans, t, r, N, q);
    q.push_back(cw(3, U_CHAN, 2, 0));
    foreach (q[k]) begin
      @(negedge clk);
      cfg = q[k];
    end
    @(negedge clk);
    cfg.we = 1'b0;
    got.delete();
    // values go in last first, so that the model's back-to-front
    // compression of `pairs` is what the channel produces
    i = N - 1;
    while (i >= 0) begin
      @(negedge clk);
      in_valid = ($urandom_range(0, 4) != 0);
      in_value = vals[i];
      #1;
      if (in_valid && in_ready) i--;
    end
    @(negedge clk);
    in_valid = 1'b0;
    wait_cyc = 0;
    while (!done && wait_cyc < 2000) begin
      @(negedge clk);
      wait_cyc++;
    end
    checks++;
    if (!done) begin
      failures++;
      $display("done never rose");
    end
    repeat (2) @(negedge clk);
    checks++;
    if (got.size() != w.size()) begin
      failures++;
      $display("fixed=%0d rans=%0d: %0d words, expected %0d", fixed, use_rans, got.size(), w.size());
    end
    for (int j = 0; j < w.size() && j < got.size(); j++) begin
      checks++;
      if (got[j] != w[j]) begin
        failures++;
        if (failures < 10) $display("word %0d: %h expected %h", j, got[j], w[j]);
      end
    end
  endtask

  initial begin
    cfg = '0; in_valid = 1'b0; in_value = '0; wr_ready = 1'b1;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    trial(0, 0, 3);
    trial(1, 1, 0);
    trial(0, 1, 7);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
