// fp_reduce_tb: random exponent table (code, 0..7 mantissa bits kept),
// random bfloat16 inputs (one in eight with an all-ones mantissa, to make
// rounding carry into the exponent), random output stalls. The expected
// pair is worked out with integer division: the mantissa rounded half up to
// the kept bits; a result of 1.0 moves to the next exponent's code. Also
// checks one value per clock without stalls.
module fp_reduce_tb;
  import ans_pkg::*;

  localparam int N = 2000;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  cfg_t  cfg;
  logic  in_valid, in_ready, out_valid, out_ready;
  logic [VAL_W-1:0] in_value;
  pair_t out_pair;

  fp_reduce dut (.*);

  int checks = 0, failures = 0, ready_pct = 100, cyc = 0, nout = 0, first = -1, last = 0;
  int          t_code[256];
  int          t_mb  [256];
  logic [13:0] exp_q[$];

  function automatic logic [13:0] ref_pair(logic [15:0] v);
    int e, m, mb, step, rnd;
    logic s;
    s = v[15];
    e = int'(v[14:7]);
    m = int'(v[6:0]);
    mb = t_mb[e];
    if (mb == 7) return {6'(t_code[e]), s, 7'(m)};
    step = 1 << (7 - mb);
    rnd  = ((m + step / 2) / step) * step;
    if (rnd >= 128) return {6'(t_code[(e + 1) % 256]), s, 7'd0};
    return {6'(t_code[e]), s, 7'(rnd)};
  endfunction

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && out_valid && out_ready) begin
      checks++;
      if (exp_q.size() == 0 || out_pair != exp_q[0]) begin
        failures++;
        if (failures < 10) $display("got %h expected %h", out_pair, exp_q.size() ? exp_q[0] : 16'hxxxx);
      end
      if (exp_q.size()) void'(exp_q.pop_front());
      nout++;
      if (first < 0) first = cyc;
      last = cyc;
    end
    out_ready <= ($urandom_range(0, 99) < ready_pct);
  end

  task automatic cfg_wr(cfg_unit_e u, int a, longint d);
    cfg.we = 1'b1; cfg.unit = u; cfg.addr = 8'(a); cfg.data = 48'(d); cfg.chan = '0;
    @(posedge clk); #1;
    cfg.we = 1'b0;
  endtask

  task automatic drive(int n, int pct);
    int i;
    ready_pct = pct;
    i = 0;
    while (i < n) begin
      in_valid = 1'b1;
      in_value = 16'($urandom_range(0, 65535));
      if ($urandom_range(0, 7) == 0) in_value[6:0] = 7'h7f;
      #1;
      if (in_ready) begin
        exp_q.push_back(ref_pair(in_value));
        i++;
      end
      @(posedge clk); #1;
    end
    in_valid = 1'b0;
    repeat (10) @(posedge clk);
    #1;
  endtask

  initial begin
    cfg = '0; in_valid = 1'b0; in_value = '0; out_ready = 1'b1;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int e = 0; e < 256; e++) begin
      t_code[e] = $urandom_range(0, 63);
      t_mb[e]   = $urandom_range(0, 7);
      cfg_wr(U_FPR_LUT, e, (t_mb[e] << 6) | t_code[e]);
    end
    drive(N, 100);
    checks++;
    if (last - first + 1 != N) begin
      failures++;
      $display("rate: %0d values over %0d cycles", N, last - first + 1);
    end
    first = -1;
    drive(N, 50);
    checks++;
    if (nout != 2 * N || exp_q.size() != 0) begin
      failures++;
      $display("count: %0d values out", nout);
    end
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
