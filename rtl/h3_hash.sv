// h3_hash: one member of the H3 family of universal hash functions.
//
// H3 hashes a key by XOR-ing together the rows of a fixed random bit matrix Q
// that are selected by the key's set bits: hash = XOR_i (key[i] ? Q[i] : 0).
// The bloom filter of the harvester uses H3 hashes, as the design calls for;
// the matrix itself is this design's own: each row is drawn from a 32-bit
// xorshift generator (x ^= x<<13; x ^= x>>17; x ^= x<<5) started from
// SEED * 0x9E3779B9 + 1, one draw per row, keeping the low OUT_W bits.
// Different SEED values give independent functions. Purely combinational.
module h3_hash #(
  parameter int unsigned IN_W  = l2h_pkg::BLK_ADDR_W,
  parameter int unsigned OUT_W = 12,       // 4096-entry table
  parameter int unsigned SEED  = 1
) (
  input  logic [IN_W-1:0]  key,
  output logic [OUT_W-1:0] hash
);

  typedef logic [IN_W-1:0][OUT_W-1:0] qmat_t;

  function automatic qmat_t gen_q(int unsigned seed);
    qmat_t       q;
    logic [31:0] s;
    s = seed * 32'h9E37_79B9 + 32'd1;
    for (int i = 0; i < int'(IN_W); i++) begin
      s = s ^ (s << 13);
      s = s ^ (s >> 17);
      s = s ^ (s << 5);
      q[i] = s[OUT_W-1:0];
    end
    return q;
  endfunction

  localparam qmat_t Q = gen_q(SEED);

  always_comb begin
    hash = '0;
    for (int i = 0; i < int'(IN_W); i++)
      if (key[i]) hash = hash ^ Q[i];
  end

endmodule
