// random_access_tb: entering a compressed stream in the middle.
//
// A stream of N bfloat16 values is compressed by the software model. An
// entry point for element i is what the compressor held after it had
// compressed elements N-1 down to i (it works back to front): the number
// of full words written so far (the entry address a), the bits still
// pending (the bit pointer r, the oldest bits of word a) and the state.
// The model gets these by compressing only elements i..N-1: that stream
// shares its first a words with the whole stream, and its header is
// {r, state}. The decompression channel is given this header and the
// shift that brings the entered bits of word a to the bottom (U_CHAN
// addr 3), the stream length N - i, and then words a, a-1, ..., 0 of the
// whole stream; it must return elements i..N-1 in order. Several entry
// points are tried with both coders, including elements 1 and N-1, and a
// normal start from the header in memory follows each one to check that
// the entry mode switches off. (Element 0 is the stream's own start: its
// word a is the right-aligned partial word, entered through the header in
// memory, not through an entry point.)
module random_access_tb;
  import ans_pkg::*;
  import tb_ans_model::*;

  localparam int N = 400, DEPTH = 16;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  cfg_t cfg;
  logic             rd_valid, rd_pop, out_valid, out_ready, busy;
  logic [MEM_W-1:0] rd_data;
  logic [VAL_W-1:0] out_value;

  decomp_channel #(.CHAN(0), .DEPTH(DEPTH)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 15) $display("FAIL %s", what);
    end
  endtask

  logic [VAL_W-1:0] outs[$];
  int inflight;
  always @(posedge clk) begin
    out_ready <= ($urandom_range(0, 99) < 80);
    if (rst_n && out_valid && out_ready) outs.push_back(out_value);
    if (rst_n) inflight += int'(rd_valid) - int'(rd_pop);
  end

  task automatic send(cfg_t q[$]);
    foreach (q[k]) begin
      @(negedge clk);
      cfg = q[k];
    end
    @(negedge clk);
    cfg.we = 1'b0;
  endtask

  // feed words[top] down to words[0] and collect len values
  task automatic feed(longint unsigned w[$], int top, int len);
    int k;
    outs.delete();
    inflight = 0;
    k = top;
    for (int n = 0; (k >= 0 || outs.size() < len) && n < 50 * N; n++) begin
      @(negedge clk);
      rd_valid = (k >= 0) && (inflight < DEPTH) && ($urandom_range(0, 99) < 70);
      rd_data  = MEM_W'(w[k >= 0 ? k : 0]);
      @(posedge clk);
      if (rd_valid) k--;
    end
    @(negedge clk);
    rd_valid = 1'b0;
    repeat (5) @(posedge clk);
  endtask

  initial begin
    NumFormat f;
    TansModel t;
    RansModel r;
    tpair_t pairs[$], sfx[$];
    logic [15:0] vals[$];
    longint unsigned full[$], part[$];
    cfg_t q[$];
    int hist[64], a, sh, ent[$];
    bit use_rans;

    cfg = '0; rd_valid = 1'b0; rd_data = '0; out_ready = 1'b0;
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
        vals.push_back(v);
        pairs.push_back(f.to_pair(v));
        hist[pairs[j].code]++;
      end
      if (use_rans) r.from_hist(hist, f.adl); else t.from_hist(hist, f.adl);
      full.delete();
      if (use_rans) r.encode(pairs, full); else t.encode(pairs, full);
      chan_cfg(0, f, use_rans, t, r, N, q);
      send(q);
      q.delete();

      ent.delete();
      ent.push_back(1); ent.push_back(N - 1);
      for (int e = 0; e < 4; e++) ent.push_back($urandom_range(1, N - 2));
      foreach (ent[e]) begin
        int i;
        i = ent[e];
        sfx.delete();
        for (int j = i; j < N; j++) sfx.push_back(pairs[j]);
        part.delete();
        if (use_rans) r.encode(sfx, part); else t.encode(sfx, part);
        a = part.size() - 2;
        for (int k = 0; k < a; k++)
          check(part[k] == full[k], "model: suffix stream is not a prefix of the whole stream");
        // enter at element i
        q.push_back(cw(0, U_CHAN, 1, N - i));
        // word a is full (shift W - r) unless it is the whole stream's partial word
        if (a == full.size() - 2)
          sh = int'(full[a + 1] >> (use_rans ? 24 : 8)) - int'(part[a + 1] >> (use_rans ? 24 : 8));
        else
          sh = (use_rans ? RANS_WORD : TANS_WORD) - int'(part[a + 1] >> (use_rans ? 24 : 8));
        q.push_back(cw(0, U_CHAN, 3, (longint'(sh) << 33) | (longint'(1) << 32) | longint'(part[a + 1])));
        q.push_back(cw(0, U_CHAN, 2, 0));
        send(q);
        q.delete();
        feed(full, a, N - i);
        check(outs.size() == N - i, $sformatf("entry %0d: %0d of %0d values", i, outs.size(), N - i));
        for (int j = 0; j < outs.size() && j < N - i; j++)
          check(outs[j] == f.from_pair(pairs[i + j]),
                $sformatf("rans=%0d entry %0d value %0d: %h expected %h", use_rans, i, i + j,
                          outs[j], f.from_pair(pairs[i + j])));
        // normal start from the stream's own header
        q.push_back(cw(0, U_CHAN, 1, N));
        q.push_back(cw(0, U_CHAN, 3, 0));
        q.push_back(cw(0, U_CHAN, 2, 0));
        send(q);
        q.delete();
        feed(full, full.size() - 1, N);
        check(outs.size() == N, $sformatf("whole stream: %0d of %0d values", outs.size(), N));
        for (int j = 0; j < outs.size() && j < N; j++)
          check(outs[j] == f.from_pair(pairs[j]), $sformatf("whole stream value %0d", j));
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
