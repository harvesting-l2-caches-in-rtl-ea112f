// tb_l2_harvester: end-to-end run of the harvester at its full default size
// (4 cores, 4 x 4096-entry bloom filter, warm-up after 1024 insertions, clear
// after 4096, MPKI threshold 20, 20480-line L2 harvest bits).
//
// The testbench plays the rest of the chip: the LLC (evictions and misses),
// the snoop filter (a set of blocks held by private caches, answering after
// two cycles), the lender L2s (a WriteUp is filled with its harvest bit set and
// later evicted again) and a memory controller with back-pressure. Core 0 runs
// the critical task, core 1 a background task, cores 2 and 3 are idle.
//
// Phases: cold filter (MPPP alone), warm filter under high load (both must
// agree), low load (either suffices), no idle core, re-eviction of blocks that
// are already on chip (snoop hit), enough misses for the periodic clear, and
// eviction of harvested L2 lines (must bypass the LLC). Each eviction's outcome
// is predicted from the rules wherever it is determined (the bloom filter's
// rare false positives and the random draw for background blocks leave some
// outcomes open) and compared; lenders must be idle and, for critical blocks,
// follow the round-robin order. Every mechanism is counted and must occur.
module tb_l2_harvester;
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
  logic sf_req_valid, sf_req_ready = 0, sf_rsp_valid = 0, sf_rsp_present = 0;
  logic [BLK_ADDR_W-1:0] sf_req_addr;
  logic sf_req_wb_clean;
  logic wu_valid, wu_ready = 0, wu_dirty;
  logic [CORE_W-1:0] wu_lender;
  logic [BLK_ADDR_W-1:0] wu_addr, wb_addr;
  logic [LINE_W-1:0] wu_data, wb_data;
  logic wb_valid, wb_ready = 0;
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
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- environment models ----------------
  bit onchip [logic [BLK_ADDR_W-1:0]];      // blocks held by some private L2
  bit inserted [logic [BLK_ADDR_W-1:0]];    // misses learnt since the last clear
  int ins_count = 0;
  int sf_wait = -1;
  bit sf_pending_present;
  int stall_cycles = 0;

  always @(negedge clk) begin
    sf_req_ready   = $urandom_range(0, 3) != 0;
    wu_ready       = $urandom_range(0, 2) != 0;
    wb_ready       = $urandom_range(0, 2) != 0;
    sf_rsp_valid   = (sf_wait == 0);
    sf_rsp_present = sf_pending_present;
    if (sf_wait >= 0) sf_wait--;
  end

  // harvested L2 lines: (core, idx) of every WriteUp fill
  int hv_core [$];
  int hv_idx [$];
  int n_wu = 0, n_wb = 0;
  logic [CORE_W-1:0] last_lender;
  logic [BLK_ADDR_W-1:0] last_addr;
  int lender_use [N];

  always @(posedge clk) if (rst_n) begin
    l2_fill_valid <= '0;
    if (sf_req_valid && sf_req_ready) begin
      sf_wait <= 2;
      sf_pending_present <= onchip.exists(sf_req_addr);
      check(sf_req_wb_clean == evict_dirty, "snoop request type follows the dirty bit");
    end
    if ((wu_valid && !wu_ready) || (wb_valid && !wb_ready)) stall_cycles++;
    if (wu_valid && wu_ready) begin
      n_wu++;
      last_lender = wu_lender; last_addr = wu_addr;
      lender_use[wu_lender]++;
      onchip[wu_addr] = 1;
      // the lender fills the line and marks it harvested
      l2_fill_valid[wu_lender]     <= 1'b1;
      l2_fill_idx[wu_lender]       <= IW'(wu_addr % L2_LINES);
      l2_fill_harvested[wu_lender] <= 1'b1;
      hv_core.push_back(int'(wu_lender));
      hv_idx.push_back(int'(32'(wu_addr) % L2_LINES));
    end
    if (wb_valid && wb_ready) begin n_wb++; last_addr = wb_addr; end
  end

  task automatic learn_miss(logic [BLK_ADDR_W-1:0] a);
    @(negedge clk);
    miss_valid = 1; miss_addr = a;
    @(posedge clk);
    while (!miss_ready) @(posedge clk);
    #1 miss_valid = 0;
    ins_count++;
    inserted[a] = 1;
    if (ins_count == RESET_INTERVAL) begin
      ins_count = 0;
      inserted.delete();
      repeat (2) @(posedge clk);
    end
  endtask

  // reference round-robin pointer for critical blocks
  int rr_ptr = 0;
  int ambiguous = 0, dram_up_noncrit = 0;

  // phase: 0 cold, 1 high load, 2 low load
  task automatic evict_one(logic [BLK_ADDR_W-1:0] a, bit dirty, bit mppp_dead,
                           logic [CORE_W-1:0] owner, int phase, bit idle_avail);
    int c_wu, c_wb;
    bit alive, known, to_up, up_known, crit;
    c_wu = n_wu; c_wb = n_wb;
    crit = ctm[owner];
    // predictor verdict
    known = 1;
    if (phase == 0) alive = !mppp_dead;
    else if (phase == 1) begin
      alive = inserted.exists(a) && !mppp_dead;
      if (!inserted.exists(a) && !mppp_dead) known = 0;   // a false positive is possible
    end else begin
      alive = inserted.exists(a) || !mppp_dead;
      if (!inserted.exists(a) && mppp_dead) known = 0;
    end
    // load balancer
    up_known = 1;
    if (!idle_avail) to_up = 0;
    else if (!known) begin to_up = 0; up_known = 0; end
    else if (!alive) to_up = 0;
    else if (crit) to_up = !onchip.exists(a);
    else begin to_up = 0; up_known = 0; end
    @(negedge clk);
    evict_valid = 1; evict_addr = a; evict_dirty = dirty; evict_mppp_dead = mppp_dead;
    evict_owner = owner; evict_data = {16{$urandom}};
    @(posedge clk);
    while (!evict_ready) @(posedge clk);
    #1 evict_valid = 0;
    @(posedge clk);
    while (!evict_ready) @(posedge clk);
    #1;
    if (up_known) begin
      if (to_up) begin
        int exp_l;
        exp_l = rr_ptr;
        for (int i = N - 1; i >= 0; i--) if (icm[(rr_ptr + i) % N]) exp_l = (rr_ptr + i) % N;
        check(n_wu == c_wu + 1 && last_addr == a, $sformatf("block %h written up", a));
        check(int'(last_lender) == exp_l, $sformatf("round-robin lender %0d exp %0d", last_lender, exp_l));
        rr_ptr = (exp_l + 1) % N;
      end else begin
        check(n_wu == c_wu, $sformatf("block %h not written up", a));
        check(n_wb == c_wb + (dirty ? 1 : 0), $sformatf("block %h write-back iff dirty", a));
        // a live critical block that met a snoop hit still advanced the pointer
        if (idle_avail && known && alive && crit) begin
          int exp_l;
          exp_l = rr_ptr;
          for (int i = N - 1; i >= 0; i--) if (icm[(rr_ptr + i) % N]) exp_l = (rr_ptr + i) % N;
          rr_ptr = (exp_l + 1) % N;
        end
      end
    end else begin
      ambiguous++;
      check(n_wu + n_wb <= c_wu + c_wb + 1, "at most one transfer");
      if (n_wu == c_wu + 1) begin
        check(icm[last_lender], "lender is idle");
        // the round-robin pointer moved past this lender
        rr_ptr = (int'(last_lender) + 1) % N;
      end else if (idle_avail && alive && known && !crit) dram_up_noncrit++;
      // an undetermined block may have moved the pointer without a WriteUp
      // (a snoop hit); keep the reference in step with the design's pointer
      if (n_wu == c_wu) rr_ptr = int'(dut.u_icm.rr_ptr);
    end
  endtask

  initial begin
    logic [BLK_ADDR_W-1:0] a;
    logic [BLK_ADDR_W-1:0] learnt [$];
    logic [BLK_ADDR_W-1:0] upped [$];
    static int bypass_seen = 0, llc_seen = 0;
    int base_wb, base_drop;
    for (int c = 0; c < N; c++) lender_use[c] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    idle_set = 4'b1100;            // cores 2 and 3 lend their L2
    ctm_we = 1; ctm_wdata = 4'b0001; // core 0 runs the critical task
    core_mpki[0] = 8'd30; core_mpki[1] = 8'd40;
    @(negedge clk);
    idle_set = '0; ctm_we = 0;
    repeat (3) @(posedge clk);
    #1;
    check(icm == 4'b1100 && ctm == 4'b0001 && num_critical == 1, "maps written");
    check(crit_avg_mpki == 30 && busy_avg_mpki == 35, "MPKI averages");

    // ---- phase 0: cold filter, MPPP alone ----
    for (int i = 0; i < 60; i++)
      evict_one(BLK_ADDR_W'($urandom), 1'($urandom_range(0, 1)), 1'($urandom_range(0, 1)), CORE_W'(i % 2), 0, 1);
    check(pred_case1 == 60 && pred_case2 == 0 && pred_case3 == 0, "cold rule used");

    // ---- warm up the filter ----
    for (int i = 0; i < 1100; i++) begin
      a = BLK_ADDR_W'($urandom);
      learnt.push_back(a);
      learn_miss(a);
    end

    // ---- phase 1: high load (busy mean 35 > 20) ----
    for (int i = 0; i < 120; i++) begin
      a = (i % 2 != 0) ? learnt[$urandom_range(0, learnt.size() - 1)] : BLK_ADDR_W'($urandom);
      evict_one(a, 1'($urandom_range(0, 1)), $urandom_range(0, 2) == 0, CORE_W'((i / 2) % 2), 1, 1);
    end
    check(pred_case2 == 120, "high-load rule used");

    // ---- phase 2: low load (busy mean 7), critical MPKI 5 -> chance 0.77 ----
    @(negedge clk);
    core_mpki[0] = 8'd5; core_mpki[1] = 8'd10;
    repeat (3) @(posedge clk);
    #1 check(busy_avg_mpki == 7 && crit_avg_mpki == 5, "MPKI averages after change");
    for (int i = 0; i < 160; i++) begin
      a = (i % 3 == 0) ? learnt[$urandom_range(0, learnt.size() - 1)] : BLK_ADDR_W'($urandom);
      evict_one(a, 1'($urandom_range(0, 1)), 1'($urandom_range(0, 1)), CORE_W'((i / 3) % 2), 2, 1);
    end
    check(pred_case3 == 160, "low-load rule used");

    // ---- snoop hits: evict again blocks that were written up ----
    foreach (onchip[k]) upped.push_back(k);
    for (int i = 0; i < 10 && i < upped.size(); i++)
      evict_one(upped[i], 1, 0, 0, 2, 1);

    // ---- no idle core ----
    @(negedge clk); idle_clr = 4'b1100; @(negedge clk); idle_clr = '0;
    repeat (2) @(posedge clk);
    for (int i = 0; i < 20; i++)
      evict_one(BLK_ADDR_W'($urandom), 1, 0, 0, 2, 0);
    @(negedge clk); idle_set = 4'b1100; @(negedge clk); idle_set = '0;
    repeat (2) @(posedge clk);

    // ---- periodic clear: fill the filter to its reset interval ----
    while (pred_resets == 0) learn_miss(BLK_ADDR_W'($urandom));
    check(pred_resets == 1, "bloom filter cleared once");
    evict_one(learnt[0], 0, 1, 0, 0, 1);   // cold again: MPPP alone says dead
    check(pred_case1 == 61, "cold rule after the clear");

    // ---- L2 evictions: harvested lines bypass the LLC ----
    repeat (3) @(posedge clk);
    for (int i = 0; i < hv_core.size() && i < 40; i++) begin
      @(negedge clk);
      l2_evict_valid = '0;
      l2_evict_valid[hv_core[i]] = 1'b1;
      l2_evict_idx[hv_core[i]] = IW'(hv_idx[i]);
      @(negedge clk);
      l2_evict_valid = '0;
      check(l2_route_valid[hv_core[i]] && l2_route_bypass_llc[hv_core[i]], "harvested line goes to memory");
      if (l2_route_bypass_llc[hv_core[i]]) bypass_seen++;
    end
    // a line filled normally goes back to the LLC
    @(negedge clk);
    l2_fill_valid[0] = 1; l2_fill_idx[0] = 15'd77; l2_fill_harvested[0] = 0;
    @(negedge clk);
    l2_fill_valid[0] = 0; l2_evict_valid[0] = 1; l2_evict_idx[0] = 15'd77;
    @(negedge clk);
    l2_evict_valid[0] = 0;
    check(l2_route_valid[0] && !l2_route_bypass_llc[0], "normal line goes to the LLC");
    if (!l2_route_bypass_llc[0]) llc_seen++;

    // ---- bookkeeping and mechanism coverage ----
    check(stats.evictions == stats.pred_dead + stats.no_idle + stats.up_critical
                           + stats.up_chance + stats.chance_lost, "every eviction classified");
    check(stats.writeups + stats.snoop_present == stats.up_critical + stats.up_chance, "send-ups accounted");
    check(stats.writeups == 32'(n_wu) && stats.writebacks == 32'(n_wb), "transfers counted");
    $display("mechanisms: case1=%0d case2=%0d case3=%0d clears=%0d dead=%0d no_idle=%0d up_crit=%0d up_chance=%0d chance_lost=%0d snoop_hit=%0d writeups=%0d writebacks=%0d clean_drops=%0d bypass=%0d llc=%0d stalls=%0d lenders=%0d/%0d ambiguous=%0d",
             pred_case1, pred_case2, pred_case3, pred_resets, stats.pred_dead, stats.no_idle,
             stats.up_critical, stats.up_chance, stats.chance_lost, stats.snoop_present,
             stats.writeups, stats.writebacks, stats.clean_drops, bypass_seen, llc_seen,
             stall_cycles, lender_use[2], lender_use[3], ambiguous);
    check(pred_case1 > 0, "mechanism: cold-filter rule");
    check(pred_case2 > 0, "mechanism: both-agree rule");
    check(pred_case3 > 0, "mechanism: either rule");
    check(pred_resets > 0, "mechanism: periodic filter clear");
    check(stats.pred_dead > 0, "mechanism: dead block to DRAM");
    check(stats.no_idle > 0, "mechanism: no idle core");
    check(stats.up_critical > 0, "mechanism: critical block sent up");
    check(stats.up_chance > 0, "mechanism: background block sent up by chance");
    check(stats.chance_lost > 0, "mechanism: background block kept in DRAM by chance");
    check(stats.snoop_present > 0, "mechanism: snoop hit cancels WriteUp");
    check(stats.writebacks > 0 && stats.clean_drops > 0, "mechanism: write-back and clean drop");
    check(bypass_seen > 0 && llc_seen > 0, "mechanism: circular-harvesting bypass");
    check(stall_cycles > 0, "mechanism: back-pressure stall");
    check(lender_use[2] > 0 && lender_use[3] > 0 && lender_use[0] == 0 && lender_use[1] == 0,
          "mechanism: round-robin over idle lenders only");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
