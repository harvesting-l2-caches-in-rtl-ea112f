// l2_harvester: the L2 Harvester, placed between the shared LLC and the memory
// controller of a multi-core processor.
//
// Idle cores leave their private L2 caches unused. The harvester opens a path
// from LLC evictions up into those caches: an evicted block that is predicted
// to be reused, and for which an idle core can lend its L2, is written up to
// that lender instead of being written back to memory. Later misses then find
// it on chip through the normal coherence path (the snoop filter points at the
// lender), saving an off-chip access.
//
// Blocks inside:
//  * harvest_ctrl      - per-eviction sequencer (predict, balance, snoop, send);
//  * l2h_predictor     - bloom filter of LLC miss addresses, Reset Counter, and
//                        the rule that combines it with the LLC's MPPP bit;
//  * mpki_monitor      - averages of the per-core L2 MPKI reports;
//  * idle_core_map     - Idle Core Map with round-robin First Idle;
//  * critical_task_map - Critical Task Map written by system software;
//  * load_balancer     - DRAM or lender, with the 0.95^MPKI send-up chance
//                        (sendup_lut) and a random draw (lfsr_rand);
//  * harvest_bit_store - one per L2: the extra tag bit that sends an evicted,
//                        already harvested block straight to memory.
// The MPPP predictor, the snoop filter, the bus, the caches and the memory
// controller are outside; their signals are this module's ports.
//
// Ports, by group (valid/ready pairs transfer when both are high):
//  * evict_*  : LLC eviction: block address, line data, dirty, owner core and
//               the MPPP dead-block bit.
//  * miss_*   : block addresses that missed in the LLC (learnt by the filter).
//  * core_mpki: each core's L2 MPKI; idle_set/idle_clr: per-core ICM updates;
//               ctm_we/ctm_wdata: software write of the Critical Task Map.
//  * sf_*     : snoop filter check before a WriteUp; sf_req_wb_clean selects
//               WritebackClean (1) or CleanEvict (0).
//  * wu_*     : WriteUp to L2 wu_lender; the lender fills the line with its
//               harvest bit set (l2_fill_harvested).
//  * wb_*     : write-back to the memory controller.
//  * l2_fill_* / l2_evict_* / l2_route_*: per-L2 harvest bit traffic; on
//               l2_route_valid, l2_route_bypass_llc = 1 sends the evicted
//               line to memory instead of the LLC.
//  * stats, pred_case*, pred_resets, pred_clearing, icm, ctm, num_critical, *_avg_mpki,
//               lb_chance (current send-up chance): observation.
// The core count comes from l2h_pkg::NCORES (4).
module l2_harvester
  import l2h_pkg::*;
#(
  parameter int unsigned BF_ENTRIES_P     = l2h_pkg::BF_ENTRIES,
  parameter int unsigned WARMUP_TH_P      = l2h_pkg::WARMUP_TH,
  parameter int unsigned RESET_INTERVAL_P = l2h_pkg::RESET_INTERVAL,
  parameter int unsigned MPKI_TH_P        = l2h_pkg::MPKI_TH,
  parameter int unsigned L2_LINES_P       = l2h_pkg::L2_LINES,
  localparam int unsigned L2_IDX_W = $clog2(L2_LINES_P),
  localparam int unsigned CNT_W    = $clog2(NCORES + 1)
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // LLC eviction
  input  logic                          evict_valid,
  output logic                          evict_ready,
  input  logic [BLK_ADDR_W-1:0]         evict_addr,
  input  logic [LINE_W-1:0]             evict_data,
  input  logic                          evict_dirty,
  input  logic [CORE_W-1:0]             evict_owner,
  input  logic                          evict_mppp_dead,
  // LLC misses
  input  logic                          miss_valid,
  output logic                          miss_ready,
  input  logic [BLK_ADDR_W-1:0]         miss_addr,
  // system state
  input  logic [NCORES-1:0][MPKI_W-1:0] core_mpki,
  input  logic [NCORES-1:0]             idle_set,
  input  logic [NCORES-1:0]             idle_clr,
  input  logic                          ctm_we,
  input  logic [NCORES-1:0]             ctm_wdata,
  // snoop filter
  output logic                          sf_req_valid,
  input  logic                          sf_req_ready,
  output logic [BLK_ADDR_W-1:0]         sf_req_addr,
  output logic                          sf_req_wb_clean,
  input  logic                          sf_rsp_valid,
  input  logic                          sf_rsp_present,
  // WriteUp
  output logic                          wu_valid,
  input  logic                          wu_ready,
  output logic [CORE_W-1:0]             wu_lender,
  output logic [BLK_ADDR_W-1:0]         wu_addr,
  output logic [LINE_W-1:0]             wu_data,
  output logic                          wu_dirty,
  // write-back to memory
  output logic                          wb_valid,
  input  logic                          wb_ready,
  output logic [BLK_ADDR_W-1:0]         wb_addr,
  output logic [LINE_W-1:0]             wb_data,
  // private L2 harvest bits
  input  logic [NCORES-1:0]               l2_fill_valid,
  input  logic [NCORES-1:0][L2_IDX_W-1:0] l2_fill_idx,
  input  logic [NCORES-1:0]               l2_fill_harvested,
  input  logic [NCORES-1:0]               l2_evict_valid,
  input  logic [NCORES-1:0][L2_IDX_W-1:0] l2_evict_idx,
  output logic [NCORES-1:0]               l2_route_valid,
  output logic [NCORES-1:0]               l2_route_bypass_llc,
  // observation
  output logic [NCORES-1:0]             icm,
  output logic [NCORES-1:0]             ctm,
  output logic [MPKI_W-1:0]             crit_avg_mpki,
  output logic [MPKI_W-1:0]             busy_avg_mpki,
  output logic [CNT_W-1:0]              num_critical,
  output logic [LUT_W-1:0]              lb_chance,
  output hv_stats_t                     stats,
  output logic [31:0]                   pred_case1,
  output logic [31:0]                   pred_case2,
  output logic [31:0]                   pred_case3,
  output logic [31:0]                   pred_resets,
  output logic                          pred_clearing
);

  evict_t                 evict;
  logic                   pred_req_valid, pred_req_ready, pred_req_mppp_dead;
  logic [BLK_ADDR_W-1:0]  pred_req_key;
  logic                   pred_rsp_valid, pred_rsp_alive;
  logic                   lb_dead, lb_send_up, lb_uses_rand, lb_critical;
  logic [CORE_W-1:0]      lb_owner, lb_lender, first_idle;
  lb_reason_e             lb_reason;
  logic                   rr_advance, rand_step;
  logic                   unused_decide;        // per-decision strobe, not needed here
  pred_case_e             unused_rsp_case;      // counted inside the predictor instead
  logic [CNT_W-1:0]       num_idle;
  logic [RAND_W-1:0]      rnd;

  assign evict = '{addr: evict_addr, data: evict_data, dirty: evict_dirty,
                   owner: evict_owner, mppp_dead: evict_mppp_dead};

  harvest_ctrl u_ctrl (
    .clk, .rst_n,
    .evict_valid, .evict_ready, .evict,
    .pred_req_valid, .pred_req_ready, .pred_req_key, .pred_req_mppp_dead,
    .pred_rsp_valid, .pred_rsp_alive,
    .lb_dead, .lb_owner, .lb_send_up, .lb_lender, .lb_reason, .lb_uses_rand,
    .decide (unused_decide), .rr_advance, .rand_step,
    .sf_req_valid, .sf_req_ready, .sf_req_addr, .sf_req_wb_clean, .sf_rsp_valid, .sf_rsp_present,
    .wu_valid, .wu_ready, .wu_lender, .wu_addr, .wu_data, .wu_dirty,
    .wb_valid, .wb_ready, .wb_addr, .wb_data,
    .stats
  );

  l2h_predictor #(
    .ENTRIES(BF_ENTRIES_P), .WARMUP_TH(WARMUP_TH_P),
    .RESET_INTERVAL(RESET_INTERVAL_P), .MPKI_TH(MPKI_TH_P)
  ) u_pred (
    .clk, .rst_n,
    .ins_valid (miss_valid), .ins_ready (miss_ready), .ins_key (miss_addr),
    .req_valid (pred_req_valid), .req_ready (pred_req_ready),
    .req_key (pred_req_key), .req_mppp_dead (pred_req_mppp_dead),
    .avg_mpki (busy_avg_mpki),
    .rsp_valid (pred_rsp_valid), .rsp_alive (pred_rsp_alive), .rsp_case (unused_rsp_case),
    .cnt_case1 (pred_case1), .cnt_case2 (pred_case2), .cnt_case3 (pred_case3),
    .cnt_resets (pred_resets), .clearing (pred_clearing)
  );

  mpki_monitor #(.NCORES(NCORES)) u_mpki (
    .clk, .rst_n, .core_mpki, .ctm, .icm, .crit_avg_mpki, .busy_avg_mpki
  );

  idle_core_map #(.NCORES(NCORES)) u_icm (
    .clk, .rst_n, .idle_set, .idle_clr, .advance (rr_advance),
    .icm, .num_idle, .first_idle
  );

  critical_task_map #(.NCORES(NCORES)) u_ctm (
    .clk, .rst_n, .we (ctm_we), .wdata (ctm_wdata), .owner (lb_owner),
    .ctm, .critical (lb_critical), .num_critical
  );

  load_balancer #(.NCORES(NCORES)) u_lb (
    .dead (lb_dead), .critical (lb_critical), .num_idle, .first_idle,
    .crit_mpki (crit_avg_mpki), .rnd,
    .send_up (lb_send_up), .lender (lb_lender), .reason (lb_reason),
    .uses_rand (lb_uses_rand), .chance (lb_chance)
  );

  lfsr_rand u_rand (.clk, .rst_n, .step (rand_step), .rnd);

  for (genvar c = 0; c < int'(NCORES); c++) begin : g_l2
    harvest_bit_store #(.LINES(L2_LINES_P)) u_hbits (
      .clk, .rst_n,
      .fill_valid (l2_fill_valid[c]), .fill_idx (l2_fill_idx[c]),
      .fill_harvested (l2_fill_harvested[c]),
      .evict_valid (l2_evict_valid[c]), .evict_idx (l2_evict_idx[c]),
      .route_valid (l2_route_valid[c]), .route_bypass_llc (l2_route_bypass_llc[c])
    );
  end

endmodule
