// l2h_predictor: decides whether an evicted LLC block is still alive.
//
// Two predictors are combined. A bloom filter (bloom_filter) learns the block
// addresses that missed in the LLC; a block whose address it has seen was
// evicted too early and is likely to be referenced again. The LLC's own
// perceptron dead-block predictor (MPPP) arrives as one bit with each request.
// A Reset Counter (RC) counts insertions into the filter since it was last
// cleared. The combining rule is the design's:
//   RC <  WARMUP_TH                 : alive = !MPPP_Dead              (case 1)
//   else, avg L2 MPKI >  MPKI_TH    : alive = Seen & !MPPP_Dead       (case 2)
//   else                            : alive = Seen | !MPPP_Dead       (case 3)
// The filter is cleared periodically to keep its false-positive rate low; here
// that happens when RC reaches RESET_INTERVAL, which also restarts the warm-up.
// Counting insertions (rather than cycles), and the values of WARMUP_TH,
// RESET_INTERVAL and MPKI_TH, are this design's own choices.
//
// Interface and timing:
//  * ins_valid/ins_ready/ins_key: LLC miss addresses to learn.
//  * req_valid/req_ready/req_key/req_mppp_dead: a prediction request. The
//    warm-up state and avg_mpki are sampled when it is accepted.
//  * rsp_valid pulses NUM_HASH + 1 cycles after acceptance with rsp_alive and
//    rsp_case (which rule applied).
//  * clearing: the filter is being emptied (after reset and after each
//    periodic clear); requests wait meanwhile.
//  * cnt_case1..3: how often each rule has been used (statistics).
module l2h_predictor #(
  parameter int unsigned KEY_W          = l2h_pkg::BLK_ADDR_W,
  parameter int unsigned NUM_HASH       = l2h_pkg::BF_HASHES,
  parameter int unsigned ENTRIES        = l2h_pkg::BF_ENTRIES,
  parameter int unsigned WARMUP_TH      = l2h_pkg::WARMUP_TH,
  parameter int unsigned RESET_INTERVAL = l2h_pkg::RESET_INTERVAL,
  parameter int unsigned MPKI_TH        = l2h_pkg::MPKI_TH,
  parameter int unsigned MPKI_W         = l2h_pkg::MPKI_W
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              ins_valid,
  output logic              ins_ready,
  input  logic [KEY_W-1:0]  ins_key,
  input  logic              req_valid,
  output logic              req_ready,
  input  logic [KEY_W-1:0]  req_key,
  input  logic              req_mppp_dead,
  input  logic [MPKI_W-1:0] avg_mpki,
  output logic              rsp_valid,
  output logic              rsp_alive,
  output l2h_pkg::pred_case_e rsp_case,
  output logic [31:0]       cnt_case1,
  output logic [31:0]       cnt_case2,
  output logic [31:0]       cnt_case3,
  output logic [31:0]       cnt_resets,
  output logic              clearing
);

  import l2h_pkg::*;

  localparam int unsigned RC_W = $clog2(RESET_INTERVAL + 1);

  logic [RC_W-1:0] rc;
  logic            bf_clear;
  logic            bf_ins_ready;
  logic            lk_done, lk_seen;
  logic            mppp_dead_q;
  pred_case_e      case_q;
  logic            ins_fire, req_fire;

  assign bf_clear  = (rc >= RC_W'(RESET_INTERVAL));
  assign ins_ready = bf_ins_ready;
  assign ins_fire  = ins_valid && ins_ready;
  assign req_fire  = req_valid && req_ready;

  bloom_filter #(.KEY_W(KEY_W), .NUM_HASH(NUM_HASH), .ENTRIES(ENTRIES)) u_bf (
    .clk, .rst_n,
    .clear     (bf_clear),
    .clearing  (clearing),
    .ins_valid (ins_valid),
    .ins_ready (bf_ins_ready),
    .ins_key   (ins_key),
    .lk_valid  (req_valid),
    .lk_ready  (req_ready),
    .lk_key    (req_key),
    .lk_done   (lk_done),
    .lk_seen   (lk_seen)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rc          <= '0;
      mppp_dead_q <= 1'b0;
      case_q      <= PC_NONE;
      cnt_case1   <= '0;
      cnt_case2   <= '0;
      cnt_case3   <= '0;
      cnt_resets  <= '0;
    end else begin
      if (bf_clear) begin
        rc         <= '0;
        cnt_resets <= cnt_resets + 1;
      end else if (ins_fire) begin
        rc <= rc + 1'b1;
      end
      if (req_fire) begin
        mppp_dead_q <= req_mppp_dead;
        if (rc < RC_W'(WARMUP_TH)) begin
          case_q    <= PC_MPPP_ONLY;
          cnt_case1 <= cnt_case1 + 1;
        end else if (avg_mpki > MPKI_W'(MPKI_TH)) begin
          case_q    <= PC_BOTH_AGREE;
          cnt_case2 <= cnt_case2 + 1;
        end else begin
          case_q    <= PC_EITHER;
          cnt_case3 <= cnt_case3 + 1;
        end
      end
    end
  end

  assign rsp_valid = lk_done;
  assign rsp_case  = case_q;

  always_comb begin
    unique case (case_q)
      PC_MPPP_ONLY:  rsp_alive = !mppp_dead_q;
      PC_BOTH_AGREE: rsp_alive = lk_seen && !mppp_dead_q;
      PC_EITHER:     rsp_alive = lk_seen || !mppp_dead_q;
      default:       rsp_alive = 1'b0;
    endcase
  end

endmodule
