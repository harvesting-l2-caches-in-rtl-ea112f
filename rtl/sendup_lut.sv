// sendup_lut: send-up likelihood of a non-critical block, Chance = 0.95^MPKI.
//
// The chance falls exponentially as the critical tasks' L2 MPKI grows, so that
// background jobs get spare L2 capacity only while the user-facing jobs do not
// need it. As in the design, it is stored as a table of 100 two-byte entries
// (MPKI 0..99) instead of being computed. Entry m holds round(65535 * 0.95^m)
// in unsigned 0.16 fixed point (65535 stands for 1.0). The table is computed
// at elaboration by repeated multiplication by 95/100 in 44.20 fixed point, so
// an entry may differ from the exact rounding by one unit. An MPKI of 100 or
// more reads the last entry (0.95^99, about 0.6 %); this clamp is own choice.
// Combinational.
module sendup_lut #(
  parameter int unsigned ENTRIES = l2h_pkg::LUT_ENTRIES,
  parameter int unsigned W       = l2h_pkg::LUT_W,
  parameter int unsigned MPKI_W  = l2h_pkg::MPKI_W
) (
  input  logic [MPKI_W-1:0] mpki,
  output logic [W-1:0]      chance
);

  typedef logic [ENTRIES-1:0][W-1:0] table_t;

  function automatic table_t gen_table();
    table_t      t;
    logic [63:0] v;
    logic [63:0] one;
    one = (64'd1 << W) - 64'd1;
    v   = one << 20;
    for (int m = 0; m < int'(ENTRIES); m++) begin
      t[m] = W'((v + (64'd1 << 19)) >> 20);
      v    = (v * 64'd95) / 64'd100;
    end
    return t;
  endfunction

  localparam table_t TABLE = gen_table();

  always_comb begin
    if (int'(mpki) >= int'(ENTRIES)) chance = TABLE[ENTRIES-1];
    else                             chance = TABLE[mpki];
  end

endmodule
