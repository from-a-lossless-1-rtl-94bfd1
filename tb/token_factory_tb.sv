// token_factory_tb: end-to-end run of the token factory at its default size
// (10 processors), against a behavioural external memory.
//
//  1. A weight stream (lossless bfloat16, rANS) is compressed by the
//     software model, back to front, and placed in memory. The shared weight
//     decompressor fetches it and every processor must receive every weight,
//     in order, while each processor takes weights at its own random pace.
//  2. At the same time each processor writes its own activations through
//     its compressor; processors use four different set-ups in turn
//     (lossless bfloat16/tANS, integer code/rANS, fp12 E8M3/rANS, integer
//     code/tANS).
//  3. Each processor's decompressor then reads its stream back from memory;
//     since ANS is last-in first-out the values return in reverse order,
//     each equal to the reference value -> pair -> value conversion.
//
// It also counts how often the design's mechanisms were exercised and
// fails if one never was: broadcast stalls, memory back-pressure, arbiter
// contention, read-credit exhaustion, direct-value codes, rounding carries
// (float and fixed), compressor flushes, and both coders and both formats.
module token_factory_tb;
  import ans_pkg::*;
  import tb_ans_model::*;

  localparam int P = 10, NWT = 1500, NA = 300, IDW = $clog2(P + 1);

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  cfg_t cfg;
  logic             w_valid [P], w_ready [P];
  logic [VAL_W-1:0] w_data  [P];
  logic             a_rd_valid [P], a_rd_ready [P];
  logic [VAL_W-1:0] a_rd_data  [P];
  logic             a_wr_valid [P], a_wr_ready [P];
  logic [VAL_W-1:0] a_wr_data  [P];
  logic             a_wr_done  [P];
  logic [31:0]      a_wr_count [P];
  logic             w_busy;
  logic             mem_req, mem_we, mem_ready, mem_rvalid;
  logic [31:0]      mem_addr;
  logic [MEM_W-1:0] mem_wdata, mem_rdata;
  logic [IDW-1:0]   mem_id, mem_rid;

  token_factory dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 15) $display("FAIL %s", what);
    end
  endtask

  // ---------------- behavioural external memory ----------------
  logic [MEM_W-1:0] mem [1 << 16];
  typedef struct { int due; logic [IDW-1:0] id; logic [MEM_W-1:0] d; } rsp_t;
  rsp_t rq[$];
  int now = 0;
  int n_backpressure = 0, n_contention = 0, n_nocredit = 0, n_bstall = 0;

  always @(posedge clk) begin
    now <= now + 1;
    mem_ready <= ($urandom_range(0, 9) < 8);
    if (rst_n && mem_req && mem_ready) begin
      if (mem_we) mem[mem_addr[15:0]] <= mem_wdata;
      else begin
        rsp_t r;
        r.due = now + $urandom_range(2, 6);
        if (rq.size() && rq[$].due > r.due) r.due = rq[$].due;
        r.id = mem_id;
        r.d = mem[mem_addr[15:0]];
        rq.push_back(r);
      end
    end
    if (rst_n) begin
      if (mem_req && !mem_ready) n_backpressure++;
      if (mem_req && $countones(dut.u_arb.req) > 1) n_contention++;
      for (int i = 0; i <= P; i++)
        if (dut.u_arb.rleft_q[i] != 0 && dut.u_arb.cred_q[i] == 0) n_nocredit++;
      if (dut.wd_valid && !dut.wd_ready) n_bstall++;
    end
  end
  always_comb begin
    mem_rvalid = rq.size() > 0 && rq[0].due <= now;
    mem_rid = mem_rvalid ? rq[0].id : '0;
    mem_rdata = mem_rvalid ? rq[0].d : '0;
  end
  always @(posedge clk) if (mem_rvalid) void'(rq.pop_front());

  // ---------------- stimulus data ----------------
  NumFormat wf, af [P];
  logic [15:0] wexp[$];                 // weights as the processors must see them
  logic [15:0] avals [P][$];            // activations written by processor p
  int wgot [P], asent [P], agot [P];
  int n_direct = 0, n_fcarry = 0, n_icarry = 0;

  // processors: take weights, write activations, read activations back
  always @(posedge clk) begin
    if (rst_n) for (int p = 0; p < P; p++) begin
      if (w_valid[p] && w_ready[p]) begin
        check(wgot[p] < NWT && w_data[p] == wexp[wgot[p]], $sformatf("proc %0d weight %0d", p, wgot[p]));
        wgot[p]++;
      end
      if (a_wr_valid[p] && a_wr_ready[p]) asent[p]++;
      if (a_rd_valid[p] && a_rd_ready[p]) begin
        int j;
        j = NA - 1 - agot[p];   // last written comes back first
        check(agot[p] < NA && a_rd_data[p] == af[p].from_pair(af[p].to_pair(avals[p][j])),
              $sformatf("proc %0d activation %0d: %h for %h", p, j, a_rd_data[p], avals[p][j]));
        agot[p]++;
      end
    end
  end
  logic act_phase = 1'b0;
  always @(negedge clk) begin
    for (int p = 0; p < P; p++) begin
      w_ready[p]    <= ($urandom_range(0, 99) < 60 + 4 * p);
      a_wr_valid[p] <= act_phase && asent[p] < NA && ($urandom_range(0, 99) < 50);
      a_wr_data[p]  <= (asent[p] < NA) ? avals[p][asent[p]] : '0;
      a_rd_ready[p] <= ($urandom_range(0, 99) < 70);
    end
  end

  // position of the leading one of the magnitude of a 16-bit integer
  function automatic int lead(logic [15:0] v);
    logic [15:0] a;
    a = v[15] ? -v : v;
    lead = -1;
    for (int i = 0; i < 16; i++) if (a[i]) lead = i;
  endfunction

  task automatic send_cfg(ref cfg_t q[$]);
    foreach (q[k]) begin
      @(negedge clk);
      cfg = q[k];
    end
    @(negedge clk);
    cfg.we = 1'b0;
    q.delete();
  endtask

  initial begin
    TansModel wt, at [P];
    RansModel wr, ar [P];
    tpair_t wpairs[$];
    longint unsigned ww[$];
    cfg_t q[$];
    int hist[64];
    int t_done;
    bit all;

    cfg = '0;
    for (int p = 0; p < P; p++) begin
      w_ready[p] = 1'b0; a_wr_valid[p] = 1'b0; a_rd_ready[p] = 1'b0; a_wr_data[p] = '0;
      wgot[p] = 0; asent[p] = 0; agot[p] = 0;
    end
    mem_ready = 1'b0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;

    // ---- weights: lossless bfloat16, zero as a direct-value code, rANS
    wf = new(); wt = new(); wr = new();
    wf.make_bf16(100, 131, 7);
    for (int c = 0; c < 64; c++) hist[c] = 0;
    for (int j = 0; j < NWT; j++) begin
      logic [15:0] v;
      tpair_t pr;
      v = gen_value(wf, 100, 131);
      pr = wf.to_pair(v);
      wpairs.push_back(pr);
      wexp.push_back(wf.from_pair(pr));
      hist[pr.code]++;
      if (wf.dir[pr.code]) n_direct++;
    end
    wr.from_hist(hist, wf.adl);
    wr.encode(wpairs, ww);
    for (int k = 0; k < ww.size(); k++) mem[16'(k)] = MEM_W'(ww[k]);
    $display("weights: %0d values in %0d words, %0.2f bits per weight", NWT, ww.size(),
             real'(32 * ww.size()) / NWT);
    chan_cfg(0, wf, 1'b1, wt, wr, NWT, q);
    q.push_back(cw(0, U_CHAN, 2, 0));
    q.push_back(cw(0, U_ARB, 1, ww.size()));
    send_cfg(q);

    // ---- activation compressors, four set-ups in turn
    for (int p = 0; p < P; p++) begin
      int mode;
      bit use_rans;
      mode = p % 4;
      af[p] = new(); at[p] = new(); ar[p] = new();
      if (mode == 1 || mode == 3) af[p].make_int();
      else af[p].make_bf16(100, 131, (mode == 0) ? 7 : 3);
      use_rans = (mode == 1 || mode == 2);
      for (int c = 0; c < 64; c++) hist[c] = 0;
      for (int j = 0; j < NA; j++) begin
        logic [15:0] v;
        tpair_t pr;
        v = gen_value(af[p], 100, 131);
        avals[p].push_back(v);
        pr = af[p].to_pair(v);
        hist[pr.code]++;
        if (!af[p].fixed && af[p].fpr_mb[v[14:7]] < 7 && v[6:0] == 7'h7f) n_fcarry++;
        if (af[p].fixed && lead(af[p].from_pair(pr)) > lead(v)) n_icarry++;
        if (af[p].dir[pr.code]) n_direct++;
      end
      if (use_rans) ar[p].from_hist(hist, af[p].adl); else at[p].from_hist(hist, af[p].adl);
      chan_cfg(P + 1 + p, af[p], use_rans, at[p], ar[p], NA, q);
      chan_cfg(1 + p, af[p], use_rans, at[p], ar[p], NA, q);
      q.push_back(cw(P + 1 + p, U_CHAN, 2, 0));
      q.push_back(cw(P + 1 + p, U_ARB, 0, 16'h4000 + 16'h0400 * p));
      send_cfg(q);
    end

    // ---- go: weights and activation writes run together
    q.push_back(cw(0, U_ARB, 0, ww.size() - 1));
    send_cfg(q);
    act_phase = 1'b1;
    t_done = 0;
    do begin
      @(negedge clk);
      t_done++;
      all = 1;
      for (int p = 0; p < P; p++) if (wgot[p] < NWT || !a_wr_done[p]) all = 0;
    end while (!all && t_done < 60000);
    for (int p = 0; p < P; p++) begin
      check(wgot[p] == NWT, $sformatf("proc %0d got %0d of %0d weights", p, wgot[p], NWT));
      check(a_wr_done[p], $sformatf("proc %0d compressor never done", p));
      $display("proc %0d: %0d activations stored in %0d words", p, NA, a_wr_count[p]);
    end

    // ---- read the activations back
    for (int p = 0; p < P; p++) begin
      q.push_back(cw(1 + p, U_CHAN, 2, 0));
      q.push_back(cw(1 + p, U_ARB, 1, a_wr_count[p]));
      q.push_back(cw(1 + p, U_ARB, 0, 16'h4000 + 16'h0400 * p + a_wr_count[p] - 1));
    end
    send_cfg(q);
    t_done = 0;
    do begin
      @(negedge clk);
      t_done++;
      all = 1;
      for (int p = 0; p < P; p++) if (agot[p] < NA) all = 0;
    end while (!all && t_done < 60000);
    repeat (50) @(negedge clk);
    for (int p = 0; p < P; p++)
      check(agot[p] == NA, $sformatf("proc %0d read back %0d of %0d", p, agot[p], NA));

    // ---- mechanisms exercised
    $display("broadcast stalls %0d, memory back-pressure %0d, contention %0d, credit waits %0d",
             n_bstall, n_backpressure, n_contention, n_nocredit);
    $display("direct-value codes %0d, float rounding carries %0d, fixed rounding carries %0d",
             n_direct, n_fcarry, n_icarry);
    check(n_bstall > 0, "no broadcast stall");
    check(n_backpressure > 0, "no memory back-pressure");
    check(n_contention > 0, "no arbiter contention");
    check(n_nocredit > 0, "no read-credit wait");
    check(n_direct > 0, "no direct-value code");
    check(n_fcarry > 0, "no float rounding carry");
    check(n_icarry > 0, "no fixed rounding carry");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
