// mpki_monitor: the harvester's view of system load.
//
// Every core reports its L2 misses per kilo-instruction (MPKI) as an unsigned
// integer. The monitor registers the reports and forms two averages, both
// registered (one cycle after the inputs change):
//  * crit_avg_mpki: the mean MPKI of the cores running critical (user-facing)
//    tasks, as marked in the Critical Task Map; 0 when none is critical. The
//    load balancer uses it to set the send-up chance of non-critical blocks.
//  * busy_avg_mpki: the mean MPKI of the cores that are not idle in the Idle
//    Core Map; 0 when all are idle. The predictor compares it with MPKI_TH.
// Which cores enter the predictor's average is not fixed by the design; taking
// the busy cores is this design's choice. Means are truncated integer divisions.
module mpki_monitor #(
  parameter int unsigned NCORES = l2h_pkg::NCORES,
  parameter int unsigned MPKI_W = l2h_pkg::MPKI_W
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic [NCORES-1:0][MPKI_W-1:0] core_mpki,
  input  logic [NCORES-1:0]             ctm,
  input  logic [NCORES-1:0]             icm,
  output logic [MPKI_W-1:0]             crit_avg_mpki,
  output logic [MPKI_W-1:0]             busy_avg_mpki
);

  localparam int unsigned CNT_W = $clog2(NCORES + 1);
  localparam int unsigned SUM_W = MPKI_W + CNT_W;

  logic [NCORES-1:0][MPKI_W-1:0] mpki_q;
  logic [SUM_W-1:0] crit_sum, busy_sum;
  logic [CNT_W-1:0] crit_n, busy_n;
  logic [MPKI_W-1:0] crit_avg, busy_avg;   // an average never exceeds its largest input

  always_comb begin
    crit_sum = '0; busy_sum = '0; crit_n = '0; busy_n = '0;
    for (int c = 0; c < int'(NCORES); c++) begin
      if (ctm[c]) begin
        crit_sum = crit_sum + SUM_W'(mpki_q[c]);
        crit_n   = crit_n + 1'b1;
      end
      if (!icm[c]) begin
        busy_sum = busy_sum + SUM_W'(mpki_q[c]);
        busy_n   = busy_n + 1'b1;
      end
    end
    crit_avg = (crit_n == 0) ? '0 : MPKI_W'(crit_sum / SUM_W'(crit_n));
    busy_avg = (busy_n == 0) ? '0 : MPKI_W'(busy_sum / SUM_W'(busy_n));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mpki_q        <= '0;
      crit_avg_mpki <= '0;
      busy_avg_mpki <= '0;
    end else begin
      mpki_q        <= core_mpki;
      crit_avg_mpki <= crit_avg;
      busy_avg_mpki <= busy_avg;
    end
  end

endmodule
