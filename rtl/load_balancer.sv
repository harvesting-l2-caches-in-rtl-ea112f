// load_balancer: chooses where a surviving LLC eviction goes.
//
// The rule is the design's:
//   if no core is idle, or the block is predicted dead : write it to DRAM
//   else if the block's core runs a critical task      : send it to First Idle
//   else, with probability Chance = 0.95^(critical MPKI): send it to First Idle
//   otherwise                                          : write it to DRAM
// Critical (user-facing) tasks thus get all the spare L2 capacity they can use,
// and background tasks get a share that shrinks as the critical tasks' miss
// rate grows. The chance comes from sendup_lut; the random draw rnd is a value
// in (0, 1] scaled by 2^16 - 1, and the block goes up when rnd <= chance.
// (The load balancer figure prints the test as "Chance < Rand"; the text and
// its worked examples, e.g. 0.95^5 = 0.77 of alive blocks sent up, describe
// sending with probability Chance, which is what is built.)
// Purely combinational: send_up, lender and reason follow the inputs in the
// same cycle. `uses_rand` tells the caller that the draw was consumed.
module load_balancer #(
  parameter int unsigned NCORES = l2h_pkg::NCORES,
  parameter int unsigned MPKI_W = l2h_pkg::MPKI_W,
  parameter int unsigned RAND_W = l2h_pkg::LUT_W,
  localparam int unsigned CORE_W = (NCORES > 1) ? $clog2(NCORES) : 1,
  localparam int unsigned CNT_W  = $clog2(NCORES + 1)
) (
  input  logic              dead,
  input  logic              critical,
  input  logic [CNT_W-1:0]  num_idle,
  input  logic [CORE_W-1:0] first_idle,
  input  logic [MPKI_W-1:0] crit_mpki,
  input  logic [RAND_W-1:0] rnd,
  output logic              send_up,
  output logic [CORE_W-1:0] lender,
  output l2h_pkg::lb_reason_e reason,
  output logic              uses_rand,
  output logic [RAND_W-1:0] chance
);

  import l2h_pkg::*;

  sendup_lut #(.W(RAND_W), .MPKI_W(MPKI_W)) u_lut (.mpki(crit_mpki), .chance(chance));

  assign lender = first_idle;

  always_comb begin
    uses_rand = 1'b0;
    if (num_idle == '0) begin
      send_up = 1'b0;
      reason  = LB_DRAM_NOIDLE;
    end else if (dead) begin
      send_up = 1'b0;
      reason  = LB_DRAM_DEAD;
    end else if (critical) begin
      send_up = 1'b1;
      reason  = LB_UP_CRIT;
    end else begin
      uses_rand = 1'b1;
      if (rnd <= chance) begin
        send_up = 1'b1;
        reason  = LB_UP_CHANCE;
      end else begin
        send_up = 1'b0;
        reason  = LB_DRAM_CHANCE;
      end
    end
  end

endmodule
