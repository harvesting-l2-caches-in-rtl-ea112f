// lfsr_rand: the Rand(0,1) source of the load balancer.
//
// A W-bit maximal-length Galois LFSR (W = 8, 16, 24 or 32); for the default
// W = 16 the polynomial is x^16 + x^14 + x^13 + x^11 + 1 (feedback mask 0xB400),
// period 65535. The value
// is read as a fraction rnd / (2^W - 1) in (0, 1]; it is never 0. It advances by
// one step on every cycle where `step` is high, and resets to SEED (forced to 1
// if SEED is 0). The generator and its width are this design's own; the design
// only asks for a uniform random draw.
module lfsr_rand #(
  parameter int unsigned W    = l2h_pkg::RAND_W,
  parameter logic [W-1:0] SEED = W'(16'hACE1)
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         step,
  output logic [W-1:0] rnd
);

  localparam logic [31:0] TAPS32 = (W == 8)  ? 32'h0000_00B8 :
                                   (W == 24) ? 32'h00E1_0000 :
                                   (W == 32) ? 32'hA300_0000 : 32'h0000_B400;
  localparam logic [W-1:0] TAPS = W'(TAPS32);
  localparam logic [W-1:0] INIT = (SEED == '0) ? W'(1) : SEED;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    rnd <= INIT;
    else if (step) rnd <= rnd[0] ? ((rnd >> 1) ^ TAPS) : (rnd >> 1);
  end

endmodule
