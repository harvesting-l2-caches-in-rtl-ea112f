// harvest_bit_store: the extra L2 tag bit that stops circular harvesting.
//
// A block written up into a lender's L2 could be evicted back into the LLC,
// predicted alive again and written up again, forever. To prevent that, each
// L2 line carries one extra bit saying the block arrived by a write-up. When
// such a line is evicted it has had its second chance: it bypasses the LLC and
// goes straight to memory. This module is that column of bits for one L2,
// indexed by the L2's flat line number (set * ways + way); LINES = 1.25 MB / 64 B.
// It is a 1-bit-wide RAM with one write port (fills) and one read port
// (evictions), like the tag array it extends.
//
// Interface and timing:
//  * fill_valid/fill_idx/fill_harvested: a line is (re)filled; its bit takes
//    fill_harvested (1 for a write-up, 0 for a normal fill).
//  * evict_valid/evict_idx: a line is evicted. One cycle later route_valid is
//    high with route_bypass_llc = the line's bit (1: write to memory, skipping
//    the LLC; 0: the normal write-back into the LLC). A fill and an eviction of
//    the same line in one cycle: the eviction reads the old bit.
// The array is not reset: every line is filled, which writes its bit, before
// it can be evicted. The bit and its use follow the design; the flat index and
// the timing are own choices.
module harvest_bit_store #(
  parameter int unsigned LINES = l2h_pkg::L2_LINES,
  localparam int unsigned IDX_W = $clog2(LINES)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             fill_valid,
  input  logic [IDX_W-1:0] fill_idx,
  input  logic             fill_harvested,
  input  logic             evict_valid,
  input  logic [IDX_W-1:0] evict_idx,
  output logic             route_valid,
  output logic             route_bypass_llc
);

  logic hbit [LINES];
  logic rd_bit;

  always_ff @(posedge clk) begin
    if (fill_valid) hbit[fill_idx] <= fill_harvested;
  end

  always_ff @(posedge clk) begin
    rd_bit <= hbit[evict_idx];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) route_valid <= 1'b0;
    else        route_valid <= evict_valid;
  end

  assign route_bypass_llc = route_valid && rd_bit;

endmodule
