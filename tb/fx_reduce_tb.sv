// fx_reduce_tb: random table (code, 0..7 bits kept below the leading one,
// indexed by leading-one position + 1), random int16 inputs of random
// magnitude (zero, -32768 and all-ones patterns included), random output
// stalls. The expected pair is worked out with integer arithmetic: the
// magnitude rounded half up to the kept bits, its new leading one giving the
// code. Also checks one value per clock without stalls.
module fx_reduce_tb;
  import ans_pkg::*;

  localparam int N = 2000;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  cfg_t  cfg;
  logic  in_valid, in_ready, out_valid, out_ready;
  logic [VAL_W-1:0] in_value;
  pair_t out_pair;

  fx_reduce dut (.*);

  int checks = 0, failures = 0, ready_pct = 100, cyc = 0, nout = 0, first = -1, last = 0;
  int          t_code[32];
  int          t_mb  [32];
  logic [13:0] exp_q[$];
  logic [15:0] in_q[$];

  function automatic int lead(longint a);
    int p;
    p = -1;
    while (a != 0) begin
      a = a >> 1;
      p++;
    end
    return p;
  endfunction

  function automatic logic [13:0] ref_pair(logic [15:0] v);
    longint a, step;
    int p, mb, frac;
    logic s;
    s = v[15];
    a = s ? -longint'($signed(v)) : longint'(v);
    if (a == 0) return {6'(t_code[0]), 8'd0};
    p  = lead(a);
    mb = t_mb[p + 1];
    if (p > mb) begin
      step = longint'(1) << (p - mb);
      a = ((a + step / 2) / step) * step;
    end
    p  = lead(a);
    mb = t_mb[p + 1];
    // bits below the leading one, scaled to 7 bits, then the kept ones
    frac = int'(((a - (longint'(1) << p)) << 7) >> p);
    frac = (frac >> (7 - mb)) << (7 - mb);
    return {6'(t_code[p + 1]), s, 7'(frac)};
  endfunction

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && out_valid && out_ready) begin
      checks++;
      if (exp_q.size() == 0 || out_pair != exp_q[0]) begin
        failures++;
        if (failures < 10) $display("in %h: got %h expected %h", in_q[0], out_pair, exp_q[0]);
      end
      if (exp_q.size()) void'(exp_q.pop_front());
      if (in_q.size()) void'(in_q.pop_front());
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
      in_value = 16'($urandom_range(0, 65535)) >> $urandom_range(0, 16);
      if ($urandom_range(0, 1) == 1) in_value = -in_value;
      case ($urandom_range(0, 15))
        0: in_value = 16'h8000;
        1: in_value = 16'h0000;
        2: in_value = 16'hffff >> $urandom_range(0, 15);
        default: ;
      endcase
      #1;
      if (in_ready) begin
        exp_q.push_back(ref_pair(in_value));
        in_q.push_back(in_value);
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
    for (int e = 0; e < 32; e++) begin
      t_code[e] = $urandom_range(0, 63);
      t_mb[e]   = $urandom_range(0, 7);
      cfg_wr(U_FXR_LUT, e, (t_mb[e] << 6) | t_code[e]);
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
