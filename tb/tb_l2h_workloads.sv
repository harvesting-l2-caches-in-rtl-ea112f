// tb_l2h_workloads: the harvester at its default size under the two sharing
// situations it is meant for, and under the three load levels of a critical
// task, checking the shares that the load balancer's rules predict.
//
//  A. One application, three lenders: core 0 runs a critical task, cores 1-3
//     are idle. Every live block of core 0 must be written up, the lenders
//     must take turns in round-robin order (1, 2, 3, 1, ...), dead blocks must
//     stay off chip, and when the lenders later evict those lines every one of
//     them must bypass the LLC (a normally filled line must not).
//  B. Two applications, two lenders: core 0 critical, core 1 a background
//     task, cores 2 and 3 idle. For a critical L2 MPKI of 5, 15 and 41 the
//     send-up chance must equal 0.95^MPKI (16-bit table value, checked to +-1
//     against a real-valued reference), the share of background blocks
//     written up must match it within 0.04 over 2000 blocks, all critical
//     blocks must go up, and only cores 2 and 3 may lend.
// No misses are reported, so the bloom filter stays cold and the prediction
// is the MPPP bit alone (the first predictor rule); this is checked too. The
// snoop filter answers "not cached" one cycle after each request; lenders and
// memory accept at once.
module tb_l2h_workloads;
  import l2h_pkg::*;
  localparam int N = NCORES, IW = $clog2(L2_LINES);
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic evict_valid = 0, evict_ready, evict_dirty = 0, evict_mppp_dead = 0;
  logic [BLK_ADDR_W-1:0] evict_addr = '0, miss_addr = '0;
  logic [LINE_W-1:0] evict_data = '0;
  logic [CORE_W-1:0] evict_owner = '0;
  logic miss_valid = 0, miss_ready;
  logic [N-1:0][MPKI_W-1:0] core_mpki = '0;
  logic [N-1:0] idle_set = '0, idle_clr = '0, ctm_wdata = '0;
  logic ctm_we = 0;
  logic sf_req_valid, sf_req_ready = 1, sf_rsp_valid = 0, sf_rsp_present = 0;
  logic [BLK_ADDR_W-1:0] sf_req_addr;
  logic sf_req_wb_clean;
  logic wu_valid, wu_ready = 1, wu_dirty;
  logic [CORE_W-1:0] wu_lender;
  logic [BLK_ADDR_W-1:0] wu_addr, wb_addr;
  logic [LINE_W-1:0] wu_data, wb_data;
  logic wb_valid, wb_ready = 1;
  logic [N-1:0] l2_fill_valid = '0, l2_fill_harvested = '0, l2_evict_valid = '0;
  logic [N-1:0][IW-1:0] l2_fill_idx = '0, l2_evict_idx = '0;
  logic [N-1:0] l2_route_valid, l2_route_bypass_llc;
  logic [N-1:0] icm, ctm;
  logic [MPKI_W-1:0] crit_avg_mpki, busy_avg_mpki;
  logic [$clog2(N+1)-1:0] num_critical;
  logic [LUT_W-1:0] lb_chance;
  hv_stats_t stats;
  logic [31:0] pred_case1, pred_case2, pred_case3, pred_resets;
  logic pred_clearing;
  always #5 clk = ~clk;

  l2_harvester dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // snoop filter: nothing is cached elsewhere
  always @(posedge clk) begin
    sf_rsp_valid <= sf_req_valid && sf_req_ready;
  end

  // record WriteUps
  int n_wu = 0, n_wb = 0;
  logic [CORE_W-1:0] last_lender;
  logic [BLK_ADDR_W-1:0] last_addr;
  int lender_use [N];
  always @(negedge clk) begin
    if (wu_valid && wu_ready) begin
      n_wu++; last_lender = wu_lender; last_addr = wu_addr; lender_use[wu_lender]++;
    end
    if (wb_valid && wb_ready) n_wb++;
  end

  // one eviction, waiting until the harvester is idle again; returns whether
  // it was written up
  task automatic evict_one(logic [BLK_ADDR_W-1:0] a, logic [CORE_W-1:0] owner,
                           bit dead, output bit up);
    int c_wu;
    c_wu = n_wu;
    @(negedge clk);
    evict_valid = 1; evict_addr = a; evict_owner = owner; evict_mppp_dead = dead;
    evict_dirty = 0; evict_data = {16{$urandom}};
    @(posedge clk);
    while (!evict_ready) @(posedge clk);
    #1 evict_valid = 0;
    @(posedge clk);
    while (!evict_ready) @(posedge clk);
    @(negedge clk);
    up = (n_wu == c_wu + 1);
    if (up) check(last_addr == a, "written-up address");
  endtask

  task automatic set_maps(logic [N-1:0] idle, logic [N-1:0] crit);
    @(negedge clk);
    idle_clr = ~idle; idle_set = idle; ctm_we = 1; ctm_wdata = crit;
    @(negedge clk);
    idle_clr = '0; idle_set = '0; ctm_we = 0;
    repeat (3) @(negedge clk);
  endtask

  initial begin
    bit up;
    int exp_l, hv_lines, bypass, nup, ncrit_up;
    real share, want;
    int want_lut;
    repeat (3) @(negedge clk);
    rst_n = 1;
    while (pred_clearing) @(negedge clk);

    // ---------------- A: one application, three lenders ----------------
    set_maps(4'b1110, 4'b0001);
    core_mpki = '{8'd0, 8'd0, 8'd0, 8'd30};
    repeat (3) @(negedge clk);
    check(icm == 4'b1110 && ctm == 4'b0001 && num_critical == 1, "A: maps");
    exp_l = 1;
    hv_lines = 0;
    for (int i = 0; i < 400; i++) begin
      bit dead;
      dead = (i % 4 == 3);
      evict_one(BLK_ADDR_W'(32'h0100000 + i), 2'd0, dead, up);
      if (dead) check(!up, "A: dead block stays off chip");
      else begin
        check(up, "A: live critical block written up");
        check(int'(last_lender) == exp_l, $sformatf("A: lender %0d, round robin expects %0d", last_lender, exp_l));
        exp_l = (exp_l == 3) ? 1 : exp_l + 1;
        // the lender fills the line with its harvest bit set
        @(negedge clk);
        l2_fill_valid[last_lender] = 1; l2_fill_harvested[last_lender] = 1;
        l2_fill_idx[last_lender] = IW'(i);
        @(negedge clk);
        l2_fill_valid = '0;
        hv_lines++;
      end
    end
    check(lender_use[0] == 0 && lender_use[1] == 100 && lender_use[2] == 100 && lender_use[3] == 100,
          $sformatf("A: lender shares %0d/%0d/%0d/%0d", lender_use[0], lender_use[1], lender_use[2], lender_use[3]));
    check(stats.pred_dead == 100, "A: dead predictions counted");
    // the lenders evict what they were lent: every line bypasses the LLC
    bypass = 0;
    for (int i = 0; i < 400; i++) begin
      int c;
      if (i % 4 == 3) continue;
      c = 1 + ((i - i / 4) % 3);
      @(negedge clk);
      l2_evict_valid[c] = 1; l2_evict_idx[c] = IW'(i);
      @(negedge clk);
      l2_evict_valid = '0;
      check(l2_route_valid[c], "A: route answer one cycle after eviction");
      if (l2_route_bypass_llc[c]) bypass++;
    end
    check(bypass == hv_lines, $sformatf("A: %0d of %0d harvested lines bypassed the LLC", bypass, hv_lines));
    // a normal fill of the same line clears the mark
    @(negedge clk);
    l2_fill_valid[1] = 1; l2_fill_harvested[1] = 0; l2_fill_idx[1] = IW'(0);
    @(negedge clk);
    l2_fill_valid = '0; l2_evict_valid[1] = 1; l2_evict_idx[1] = IW'(0);
    @(negedge clk);
    l2_evict_valid = '0;
    check(l2_route_valid[1] && !l2_route_bypass_llc[1], "A: normal line goes back to the LLC");

    // ---------------- B: two applications, two lenders ----------------
    set_maps(4'b1100, 4'b0001);
    check(icm == 4'b1100 && ctm == 4'b0001, "B: maps");
    foreach (lender_use[c]) lender_use[c] = 0;
    foreach (core_mpki[c]) core_mpki[c] = '0;
    for (int r = 0; r < 3; r++) begin
      int m;
      m = (r == 0) ? 5 : (r == 1) ? 15 : 41;
      core_mpki[0] = MPKI_W'(m);
      core_mpki[1] = MPKI_W'(30);
      repeat (3) @(negedge clk);
      want = 0.95 ** m;
      want_lut = int'(65535.0 * want + 0.5);
      check(int'(crit_avg_mpki) == m, $sformatf("B: critical MPKI %0d", crit_avg_mpki));
      check(int'(lb_chance) >= want_lut - 1 && int'(lb_chance) <= want_lut + 1,
            $sformatf("B: chance %0d for MPKI %0d, reference %0d", lb_chance, m, want_lut));
      nup = 0; ncrit_up = 0;
      for (int i = 0; i < 2200; i++) begin
        bit crit;
        crit = (i % 11 == 0);
        evict_one(BLK_ADDR_W'(32'h0200000 + r * 4096 + i), crit ? 2'd0 : 2'd1, 1'b0, up);
        if (up) check(last_lender == 2 || last_lender == 3, "B: only idle cores lend");
        if (crit) ncrit_up += up; else nup += up;
      end
      share = real'(nup) / 2000.0;
      $display("MPKI %0d: background share written up %0.3f, 0.95^MPKI = %0.3f", m, share, want);
      check(ncrit_up == 200, $sformatf("B: %0d of 200 critical blocks written up", ncrit_up));
      check(share > want - 0.04 && share < want + 0.04, $sformatf("B: share %0.3f vs %0.3f", share, want));
    end
    check(lender_use[0] == 0 && lender_use[1] == 0 && lender_use[2] > 0 && lender_use[3] > 0, "B: lenders 2 and 3 both used");
    check(pred_case2 == 0 && pred_case3 == 0 && pred_case1 > 0, "cold filter: MPPP rule only");
    check(n_wb == 0, "clean blocks are never written to memory");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
