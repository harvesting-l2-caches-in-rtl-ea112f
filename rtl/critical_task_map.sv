// critical_task_map: the Critical Task Map (CTM).
//
// One bit per core; 1 means the application on that core is critical
// (user-facing). System software writes the whole map (we/wdata) whenever it
// assigns a new application to a core; it resets to all 0. For the eviction
// being handled the map says whether its owner core is critical (critical,
// combinational from owner), and it gives the number of critical tasks
// (num_critical), which the MPKI monitor divides by. The map follows the
// design; the whole-map write port and the reset value are own choices.
module critical_task_map #(
  parameter int unsigned NCORES = l2h_pkg::NCORES,
  localparam int unsigned CORE_W = (NCORES > 1) ? $clog2(NCORES) : 1,
  localparam int unsigned CNT_W  = $clog2(NCORES + 1)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              we,
  input  logic [NCORES-1:0] wdata,
  input  logic [CORE_W-1:0] owner,
  output logic [NCORES-1:0] ctm,
  output logic              critical,
  output logic [CNT_W-1:0]  num_critical
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  ctm <= '0;
    else if (we) ctm <= wdata;
  end

  assign critical = ctm[owner];

  always_comb begin
    num_critical = '0;
    for (int c = 0; c < int'(NCORES); c++) num_critical = num_critical + CNT_W'(ctm[c]);
  end

endmodule
