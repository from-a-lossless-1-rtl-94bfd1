// stream_fifo_tb: random pushes and pops against a queue model, at two
// depths; checks data order, the level output, that a full FIFO refuses
// and an empty one shows no data, the clear input, and that with both
// sides always ready a word passes every clock.
module stream_fifo_tb;
  localparam int W = 32;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  // DEPTH 16
  logic clr, iv, ir, ov, ordy;
  logic [W-1:0] id, od;
  logic [4:0] level;
  stream_fifo #(.W(W), .DEPTH(16)) dut (
    .clk, .rst_n, .clr, .in_valid(iv), .in_ready(ir), .in_data(id),
    .out_valid(ov), .out_ready(ordy), .out_data(od), .level
  );
  // DEPTH 3 (not a power of two)
  logic iv3, ir3, ov3, or3;
  logic [W-1:0] id3, od3;
  logic [2:0] level3;
  stream_fifo #(.W(W), .DEPTH(3)) dut3 (
    .clk, .rst_n, .clr(1'b0), .in_valid(iv3), .in_ready(ir3), .in_data(id3),
    .out_valid(ov3), .out_ready(or3), .out_data(od3), .level(level3)
  );

  logic [W-1:0] q[$], q3[$];

  initial begin
    int in_pct, out_pct, passed;
    clr = 0; iv = 0; ordy = 0; id = '0; iv3 = 0; or3 = 0; id3 = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int phase = 0; phase < 4; phase++) begin
      in_pct  = (phase == 0) ? 90 : (phase == 1) ? 30 : 100;
      out_pct = (phase == 0) ? 30 : (phase == 1) ? 90 : 100;
      passed = 0;
      for (int t = 0; t < 1500; t++) begin
        iv = ($urandom_range(0, 99) < in_pct);   id  = $urandom;
        ordy = ($urandom_range(0, 99) < out_pct);
        iv3 = ($urandom_range(0, 1) == 1);       id3 = $urandom;
        or3 = ($urandom_range(0, 1) == 1);
        #1;
        check(level == 5'(q.size()), "level");
        check(ir == (q.size() < 16), "in_ready vs full");
        check(ov == (q.size() > 0), "out_valid vs empty");
        if (ov) check(od == q[0], "data order");
        check(level3 == 3'(q3.size()), "level depth 3");
        if (ov3) check(od3 == q3[0], "data order depth 3");
        if (ov && ordy) begin
          void'(q.pop_front());
          passed++;
        end
        if (iv && ir) q.push_back(id);
        if (ov3 && or3) void'(q3.pop_front());
        if (iv3 && ir3) q3.push_back(id3);
        @(posedge clk); #1;
      end
      if (phase == 3) check(passed >= 1490, "one word per clock");
    end
    // clear
    iv = 1; ordy = 0;
    repeat (5) @(posedge clk);
    #1 iv = 0; clr = 1;
    @(posedge clk); #1 clr = 0;
    q.delete();
    check(level == 0 && !ov, "clear empties");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
