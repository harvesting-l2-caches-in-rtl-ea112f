// harvest_ctrl: the sequencer that takes each LLC eviction through the harvester.
//
// The harvester replaces the plain LLC-to-memory write-back path. For every
// eviction it accepts, this controller
//   1. asks the predictor whether the block is still alive (bloom filter plus
//      the MPPP bit that came with the eviction);
//   2. hands the verdict to the load balancer, which picks DRAM or a lender L2;
//   3. for a write-up, first checks the snoop filter so that a block already
//      held by some private cache is not copied again;
//   4. issues the WriteUp to the lender over the bus, or the write-back to the
//      memory controller. A clean block that is not written up is dropped,
//      since memory already holds it.
// One eviction is handled at a time. Steps 1, 2 and the snoop check are the
// design's; the drop of clean blocks, the cancel-on-snoop-hit rule (the block
// then takes the memory path) and the one-at-a-time sequencing are own choices.
//
// Interface (all valid/ready pairs transfer on an edge where both are high; a
// valid, once raised, stays high with its payload until it transfers):
//  * evict_*       : eviction from the LLC (evict_t).
//  * pred_req_* / pred_rsp_* : predictor request and its one-cycle response.
//  * lb_dead, lb_owner go to the load balancer / Critical Task Map; lb_* come
//    back combinationally. decide pulses for one cycle when the decision is
//    taken; rr_advance (First Idle was chosen) and rand_step (the random
//    draw was used) pulse with it.
//  * sf_req_* / sf_rsp_*: snoop filter check; sf_rsp_present = some private
//    cache already holds the block.
//    sf_req_wb_clean gives the snoop request's type: 1 = WritebackClean,
//    0 = CleanEvict. The design says the type depends on the block's status;
//    taking it from the dirty bit is this design's reading.
//  * wu_*          : WriteUp to L2 wu_lender; wb_*: write-back to memory.
// Timing for one eviction with ready sinks: accept (1 edge), predictor request
// (1) and lookup (NUM_HASH + 1), decide (1), then snoop request/response and
// WriteUp, or write-back, each at least one edge.
module harvest_ctrl
  import l2h_pkg::*;
(
  input  logic                  clk,
  input  logic                  rst_n,
  // LLC eviction
  input  logic                  evict_valid,
  output logic                  evict_ready,
  input  evict_t                evict,
  // predictor
  output logic                  pred_req_valid,
  input  logic                  pred_req_ready,
  output logic [BLK_ADDR_W-1:0] pred_req_key,
  output logic                  pred_req_mppp_dead,
  input  logic                  pred_rsp_valid,
  input  logic                  pred_rsp_alive,
  // load balancer
  output logic                  lb_dead,
  output logic [CORE_W-1:0]     lb_owner,
  input  logic                  lb_send_up,
  input  logic [CORE_W-1:0]     lb_lender,
  input  lb_reason_e            lb_reason,
  input  logic                  lb_uses_rand,
  output logic                  decide,
  output logic                  rr_advance,
  output logic                  rand_step,
  // snoop filter check
  output logic                  sf_req_valid,
  input  logic                  sf_req_ready,
  output logic [BLK_ADDR_W-1:0] sf_req_addr,
  output logic                  sf_req_wb_clean,
  input  logic                  sf_rsp_valid,
  input  logic                  sf_rsp_present,
  // WriteUp to a lender L2
  output logic                  wu_valid,
  input  logic                  wu_ready,
  output logic [CORE_W-1:0]     wu_lender,
  output logic [BLK_ADDR_W-1:0] wu_addr,
  output logic [LINE_W-1:0]     wu_data,
  output logic                  wu_dirty,
  // write-back to the memory controller
  output logic                  wb_valid,
  input  logic                  wb_ready,
  output logic [BLK_ADDR_W-1:0] wb_addr,
  output logic [LINE_W-1:0]     wb_data,
  // statistics
  output hv_stats_t             stats
);

  typedef enum logic [2:0] {
    S_IDLE, S_PREQ, S_PWAIT, S_DECIDE, S_SREQ, S_SWAIT, S_WU, S_WB
  } state_e;

  state_e            state;
  evict_t            ev_q;
  logic              alive_q;
  logic [CORE_W-1:0] lender_q;

  // Where a block goes when it is not written up.
  function automatic state_e mem_path(logic dirty);
    return dirty ? S_WB : S_IDLE;
  endfunction

  assign evict_ready        = (state == S_IDLE);
  assign pred_req_valid     = (state == S_PREQ);
  assign pred_req_key       = ev_q.addr;
  assign pred_req_mppp_dead = ev_q.mppp_dead;
  assign lb_dead            = !alive_q;
  assign lb_owner           = ev_q.owner;
  assign decide             = (state == S_DECIDE);
  assign rr_advance         = decide && lb_send_up;
  assign rand_step          = decide && lb_uses_rand;
  assign sf_req_valid       = (state == S_SREQ);
  assign sf_req_addr        = ev_q.addr;
  assign sf_req_wb_clean    = ev_q.dirty;
  assign wu_valid           = (state == S_WU);
  assign wu_lender          = lender_q;
  assign wu_addr            = ev_q.addr;
  assign wu_data            = ev_q.data;
  assign wu_dirty           = ev_q.dirty;
  assign wb_valid           = (state == S_WB);
  assign wb_addr            = ev_q.addr;
  assign wb_data            = ev_q.data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      ev_q     <= '0;
      alive_q  <= 1'b0;
      lender_q <= '0;
      stats    <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (evict_valid) begin
          ev_q            <= evict;
          state           <= S_PREQ;
          stats.evictions <= stats.evictions + 1;
        end
        S_PREQ: if (pred_req_ready) state <= S_PWAIT;
        S_PWAIT: if (pred_rsp_valid) begin
          alive_q <= pred_rsp_alive;
          state   <= S_DECIDE;
        end
        S_DECIDE: begin
          lender_q <= lb_lender;
          unique case (lb_reason)
            LB_DRAM_DEAD:   stats.pred_dead   <= stats.pred_dead + 1;
            LB_DRAM_NOIDLE: stats.no_idle     <= stats.no_idle + 1;
            LB_UP_CRIT:     stats.up_critical <= stats.up_critical + 1;
            LB_UP_CHANCE:   stats.up_chance   <= stats.up_chance + 1;
            LB_DRAM_CHANCE: stats.chance_lost <= stats.chance_lost + 1;
            default: ;
          endcase
          if (lb_send_up) state <= S_SREQ;
          else begin
            state <= mem_path(ev_q.dirty);
            if (!ev_q.dirty) stats.clean_drops <= stats.clean_drops + 1;
          end
        end
        S_SREQ: if (sf_req_ready) state <= S_SWAIT;
        S_SWAIT: if (sf_rsp_valid) begin
          if (sf_rsp_present) begin
            stats.snoop_present <= stats.snoop_present + 1;
            state <= mem_path(ev_q.dirty);
            if (!ev_q.dirty) stats.clean_drops <= stats.clean_drops + 1;
          end else begin
            state <= S_WU;
          end
        end
        S_WU: if (wu_ready) begin
          stats.writeups <= stats.writeups + 1;
          state          <= S_IDLE;
        end
        S_WB: if (wb_ready) begin
          stats.writebacks <= stats.writebacks + 1;
          state            <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // Output handshakes hold until they transfer. The checks start one cycle
  // after reset is released.
  logic chk_on;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) chk_on <= 1'b0;
    else        chk_on <= 1'b1;
  end
  a_wu_hold: assert property (@(posedge clk) disable iff (!chk_on)
    wu_valid && !wu_ready |=> wu_valid && $stable(wu_addr) && $stable(wu_lender));
  a_wb_hold: assert property (@(posedge clk) disable iff (!chk_on)
    wb_valid && !wb_ready |=> wb_valid && $stable(wb_addr));
  a_sf_hold: assert property (@(posedge clk) disable iff (!chk_on)
    sf_req_valid && !sf_req_ready |=> sf_req_valid && $stable(sf_req_addr) && $stable(sf_req_wb_clean));

endmodule
