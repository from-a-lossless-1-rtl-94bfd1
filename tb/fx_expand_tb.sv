// fx_expand_tb: random table (shifts -8..+8, 25% of codes direct values),
// random pairs, random output stalls. Each int16 out is compared with
// floor(+-(128 + ad[6:0]) * 2^shift) computed in real arithmetic, cut to 16
// bits, or with the stored value for direct codes. Also checks one value
// per clock without stalls.
module fx_expand_tb;
  import ans_pkg::*;

  localparam int N = 2000;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  cfg_t  cfg;
  logic  in_valid, in_ready, out_valid, out_ready;
  pair_t in_pair;
  logic [VAL_W-1:0] out_value;

  fx_expand dut (.*);

  int checks = 0, failures = 0, ready_pct = 100, cyc = 0, nout = 0, first = -1, last = 0;
  int          t_sh  [64];
  logic        t_dir [64];
  logic [15:0] t_val [64];
  logic [15:0] exp_q[$];

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && out_valid && out_ready) begin
      checks++;
      if (exp_q.size() == 0 || out_value != exp_q[0]) begin
        failures++;
        if (failures < 10) $display("got %h expected %h", out_value, exp_q.size() ? exp_q[0] : 16'hxxxx);
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

  function automatic logic [15:0] ref_val(pair_t p);
    real r;
    longint v;
    r = real'(128 + int'(p.ad[6:0])) * (2.0 ** t_sh[p.code]);
    if (p.ad[7]) r = -r;
    v = longint'($floor(r));
    return 16'(v);
  endfunction

  task automatic drive(int n, int pct);
    int i;
    ready_pct = pct;
    i = 0;
    while (i < n) begin
      in_valid = 1'b1;
      in_pair.code = 6'($urandom_range(0, 63));
      in_pair.ad   = 8'($urandom_range(0, 255));
      #1;
      if (in_ready) begin
        exp_q.push_back(t_dir[in_pair.code] ? t_val[in_pair.code] : ref_val(in_pair));
        i++;
      end
      @(posedge clk); #1;
    end
    in_valid = 1'b0;
    repeat (10) @(posedge clk);
    #1;
  endtask

  initial begin
    cfg = '0; in_valid = 1'b0; in_pair = '0; out_ready = 1'b1;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int s = 0; s < 64; s++) begin
      t_sh[s]  = $urandom_range(0, 16) - 8;
      t_dir[s] = ($urandom_range(0, 3) == 0);
      t_val[s] = 16'($urandom_range(0, 65535));
      cfg_wr(U_FXX_LUT, s, (longint'(t_val[s]) << 7) | (longint'(t_dir[s]) << 6) | longint'(t_sh[s] & 63));
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
