// tb_harvest_ctrl: the sequencer with its neighbours replaced by simple models.
// For each eviction the testbench draws a plan: the predictor's verdict, the
// load balancer's answer for a live block, and the snoop filter's answer, and
// it puts random delays and back-pressure on every handshake. The expected
// outcome follows from the plan: dead, kept in DRAM by the balancer, or
// already on chip -> write-back if dirty, nothing if clean; otherwise a WriteUp
// to the planned lender. Addresses, data, lender, the snoop check, the
// rr_advance/rand_step pulses and all statistics counters are checked.
module tb_harvest_ctrl;
  import l2h_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic evict_valid = 0, evict_ready;
  evict_t evict = '0;
  logic pred_req_valid, pred_req_ready = 0, pred_req_mppp_dead;
  logic [BLK_ADDR_W-1:0] pred_req_key;
  logic pred_rsp_valid = 0, pred_rsp_alive = 0;
  logic lb_dead, lb_send_up, lb_uses_rand;
  logic [CORE_W-1:0] lb_owner, lb_lender;
  lb_reason_e lb_reason;
  logic decide, rr_advance, rand_step;
  logic sf_req_valid, sf_req_ready = 0, sf_rsp_valid = 0, sf_rsp_present = 0;
  logic [BLK_ADDR_W-1:0] sf_req_addr;
  logic sf_req_wb_clean;
  logic wu_valid, wu_ready = 0, wu_dirty;
  logic [CORE_W-1:0] wu_lender;
  logic [BLK_ADDR_W-1:0] wu_addr, wb_addr;
  logic [LINE_W-1:0] wu_data, wb_data;
  logic wb_valid, wb_ready = 0;
  hv_stats_t stats;
  always #5 clk = ~clk;

  harvest_ctrl dut (.*);

  // plan for the eviction in flight
  bit plan_alive, plan_up, plan_rand, plan_present;
  logic [CORE_W-1:0] plan_lender;
  assign lb_send_up   = !lb_dead && plan_up;
  assign lb_lender    = plan_lender;
  assign lb_uses_rand = !lb_dead && plan_rand;
  assign lb_reason    = lb_dead ? LB_DRAM_DEAD :
                        (plan_up ? (plan_rand ? LB_UP_CHANCE : LB_UP_CRIT)
                                 : (plan_rand ? LB_DRAM_CHANCE : LB_DRAM_NOIDLE));

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // environment: random readiness and response delays
  int pred_wait = -1, sf_wait = -1;
  always @(negedge clk) begin
    pred_req_ready = 1'($urandom_range(0, 1));
    sf_req_ready   = 1'($urandom_range(0, 1));
    wu_ready       = $urandom_range(0, 2) != 0;
    wb_ready       = $urandom_range(0, 2) != 0;
    pred_rsp_valid = (pred_wait == 0);
    pred_rsp_alive = plan_alive;
    sf_rsp_valid   = (sf_wait == 0);
    sf_rsp_present = plan_present;
    if (pred_wait >= 0) pred_wait--;
    if (sf_wait >= 0) sf_wait--;
  end

  // monitor
  int n_wu, n_wb, n_sf, n_rr, n_rs, n_pred;
  logic [BLK_ADDR_W-1:0] got_addr;
  logic [LINE_W-1:0] got_data;
  logic [CORE_W-1:0] got_lender;
  logic got_mppp;
  always @(posedge clk) if (rst_n) begin
    if (pred_req_valid && pred_req_ready) begin
      n_pred++; pred_wait = $urandom_range(0, 4); got_mppp = pred_req_mppp_dead;
    end
    if (sf_req_valid && sf_req_ready) begin
      n_sf++; sf_wait = $urandom_range(0, 4);
      check(sf_req_addr == evict.addr, "snoop address");
      check(sf_req_wb_clean == evict.dirty, "snoop request type");
    end
    if (wu_valid && wu_ready) begin n_wu++; got_addr = wu_addr; got_data = wu_data; got_lender = wu_lender; end
    if (wb_valid && wb_ready) begin n_wb++; got_addr = wb_addr; got_data = wb_data; end
    if (rr_advance) n_rr++;
    if (rand_step) n_rs++;
  end

  initial begin
    int e_wu, e_wb, e_dead, e_noidle, e_crit, e_chance, e_lost, e_present, e_drop, e_rr, e_rs;
    bit to_mem;
    e_wu = 0; e_wb = 0; e_dead = 0; e_noidle = 0; e_crit = 0; e_chance = 0; e_lost = 0;
    e_present = 0; e_drop = 0; e_rr = 0; e_rs = 0;
    n_wu = 0; n_wb = 0; n_sf = 0; n_rr = 0; n_rs = 0; n_pred = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 600; i++) begin
      int c_wu, c_wb, c_sf, c_pred;
      c_wu = n_wu; c_wb = n_wb; c_sf = n_sf; c_pred = n_pred;
      @(negedge clk);
      plan_alive = 1'($urandom_range(0, 1)); plan_up = 1'($urandom_range(0, 1));
      plan_rand = 1'($urandom_range(0, 1)); plan_present = $urandom_range(0, 3) == 0;
      plan_lender = CORE_W'($urandom);
      evict.addr = BLK_ADDR_W'($urandom); evict.data = {16{$urandom}};
      evict.dirty = 1'($urandom_range(0, 1)); evict.owner = CORE_W'($urandom);
      evict.mppp_dead = !plan_alive;
      evict_valid = 1;
      @(posedge clk);
      while (!evict_ready) @(posedge clk);
      #1 evict_valid = 0;
      // wait until the controller is idle again
      @(posedge clk);
      while (!evict_ready) @(posedge clk);
      #1;
      // expected outcome
      to_mem = 1;
      if (!plan_alive) e_dead++;
      else if (!plan_up) begin if (plan_rand) e_lost++; else e_noidle++; end
      else begin
        if (plan_rand) e_chance++; else e_crit++;
        e_rr++;
        if (plan_present) e_present++; else to_mem = 0;
      end
      if (plan_alive && plan_rand) e_rs++;
      check(n_pred == c_pred + 1, "one prediction per eviction");
      check(got_mppp == evict.mppp_dead, "MPPP bit forwarded");
      check(n_sf == c_sf + ((plan_alive && plan_up) ? 1 : 0), "snoop check only before a WriteUp");
      if (!to_mem) begin
        e_wu++;
        check(n_wu == c_wu + 1 && n_wb == c_wb, "WriteUp issued");
        check(got_addr == evict.addr && got_data == evict.data && got_lender == plan_lender, "WriteUp payload");
      end else if (evict.dirty) begin
        e_wb++;
        check(n_wb == c_wb + 1 && n_wu == c_wu, "write-back issued");
        check(got_addr == evict.addr && got_data == evict.data, "write-back payload");
      end else begin
        e_drop++;
        check(n_wb == c_wb && n_wu == c_wu, "clean block dropped");
      end
    end
    check(stats.evictions == 600, "stat evictions");
    check(stats.pred_dead == 32'(e_dead) && stats.no_idle == 32'(e_noidle), "stat dead/no_idle");
    check(stats.up_critical == 32'(e_crit) && stats.up_chance == 32'(e_chance), "stat sent-up");
    check(stats.chance_lost == 32'(e_lost) && stats.snoop_present == 32'(e_present), "stat lost/present");
    check(stats.writeups == 32'(e_wu) && stats.writebacks == 32'(e_wb) && stats.clean_drops == 32'(e_drop), "stat outcomes");
    check(n_rr == e_rr && n_rs == e_rs, "rr_advance and rand_step pulses");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
