// idle_core_map: the Idle Core Map (ICM) and its round-robin lender choice.
//
// One bit per core says that the core has nothing to run and can lend its
// private L2. A core sets its bit (idle_set) when it runs out of work and clears
// it (idle_clr) when it is given work again; clear wins if both are high. All
// bits reset to 0 (no lender). The map gives the load balancer two numbers:
//  * num_idle: how many cores are idle (combinational popcount);
//  * first_idle: the first idle core found scanning circularly from a
//    round-robin pointer (combinational); valid only when num_idle > 0.
// When the load balancer picks first_idle as the lender, `advance` pulses and
// the pointer moves to the core after it, so write-ups spread over the lenders.
// The map and the round-robin choice follow the design; the set/clear port
// shape and the reset value are this design's own.
module idle_core_map #(
  parameter int unsigned NCORES = l2h_pkg::NCORES,
  localparam int unsigned CORE_W = (NCORES > 1) ? $clog2(NCORES) : 1,
  localparam int unsigned CNT_W  = $clog2(NCORES + 1)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [NCORES-1:0] idle_set,
  input  logic [NCORES-1:0] idle_clr,
  input  logic              advance,
  output logic [NCORES-1:0] icm,
  output logic [CNT_W-1:0]  num_idle,
  output logic [CORE_W-1:0] first_idle
);

  logic [CORE_W-1:0] rr_ptr;

  always_comb begin
    num_idle = '0;
    for (int c = 0; c < int'(NCORES); c++) num_idle = num_idle + CNT_W'(icm[c]);
  end

  // Scan NCORES positions starting at rr_ptr; keep the first idle one.
  always_comb begin
    logic found;
    int   cand;
    found      = 1'b0;
    first_idle = rr_ptr;
    for (int i = 0; i < int'(NCORES); i++) begin
      cand = int'(rr_ptr) + i;
      if (cand >= int'(NCORES)) cand = cand - int'(NCORES);
      if (!found && icm[cand]) begin
        found      = 1'b1;
        first_idle = CORE_W'(cand);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      icm    <= '0;
      rr_ptr <= '0;
    end else begin
      icm <= (icm | idle_set) & ~idle_clr;
      if (advance)
        rr_ptr <= (int'(first_idle) == int'(NCORES) - 1) ? '0 : first_idle + 1'b1;
    end
  end

endmodule
