// decomp_channel_tb: for each of three stream set-ups (lossless bfloat16
// with tANS, the integer code with rANS, fp12 E8M3 with rANS), values are
// generated, turned into coding pairs and compressed by the software
// model with probabilities taken from their own histogram. The words are
// offered to the channel last word first, as the memory arbiter would,
// never more than DEPTH ahead of what the channel has popped. Every number
// out must equal the reference conversion of its pair, in order, and no
// more than the configured count may come out.
module decomp_channel_tb;
  import ans_pkg::*;
  import tb_ans_model::*;

  localparam int N = 800, DEPTH = 16;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  cfg_t cfg;
  logic rd_valid, rd_pop, out_valid, out_ready, busy;
  logic [MEM_W-1:0] rd_data;
  logic [VAL_W-1:0] out_value;

  decomp_channel #(.CHAN(0), .DEPTH(DEPTH)) dut (.*);

  int checks = 0, failures = 0, credit = DEPTH;
  logic [15:0] got[$];

  always @(posedge clk) begin
    if (rst_n && out_valid && out_ready) got.push_back(out_value);
    out_ready <= ($urandom_range(0, 99) < 70);
    if (rd_pop) credit++;
  end

  task automatic trial(bit fixed, bit use_rans, int mb);
    NumFormat f;
    TansModel t;
    RansModel r;
    tpair_t pairs[$];
    longint unsigned w[$];
    cfg_t q[$];
    int hist[64];
    int i;
    f = new(); t = new(); r = new();
    if (fixed) f.make_int(); else f.make_bf16(100, 131, mb);
    for (int c = 0; c < 64; c++) hist[c] = 0;
    for (int j = 0; j < N; j++) begin
      tpair_t p;
      p = f.to_pair(gen_value(f, 100, 131));
      pairs.push_back(p);
      hist[p.code]++;
    end
    if (use_rans) begin r.from_hist(hist, f.adl); r.encode(pairs, w); end
    else begin t.from_hist(hist, f.adl); t.encode(pairs, w); end
    chan_cfg(0, f, use_rans, t, r, N, q);
    q.push_back(cw(0, U_CHAN, 2, 0));      // start
    foreach (q[k]) begin
      @(negedge clk);
      cfg = q[k];
    end
    @(negedge clk);
    cfg.we = 1'b0;
    got.delete();
    credit = DEPTH;
    i = w.size() - 1;
    while (i >= 0) begin
      @(negedge clk);
      rd_valid = 1'b0;
      if (credit > 0 && $urandom_range(0, 3) != 0) begin
        rd_valid = 1'b1;
        rd_data = MEM_W'(w[i]);
        credit--;
        i--;
      end
    end
    @(negedge clk);
    rd_valid = 1'b0;
    repeat (200) @(negedge clk);
    checks++;
    if (got.size() != N) begin
      failures++;
      $display("fixed=%0d rans=%0d: %0d values, expected %0d", fixed, use_rans, got.size(), N);
    end
    for (int j = 0; j < N && j < got.size(); j++) begin
      checks++;
      if (got[j] != f.from_pair(pairs[j])) begin
        failures++;
        if (failures < 10) $display("value %0d: %h expected %h", j, got[j], f.from_pair(pairs[j]));
      end
    end
  endtask

  initial begin
    cfg = '0; rd_valid = 1'b0; rd_data = '0; out_ready = 1'b1;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    trial(0, 0, 7);
    trial(1, 1, 0);
    trial(0, 1, 3);
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
