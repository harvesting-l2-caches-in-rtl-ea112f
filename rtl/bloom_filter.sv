// bloom_filter: the harvester's record of recently missed block addresses.
//
// A block address is inserted by setting one bit in each of NUM_HASH tables of
// ENTRIES bits, at the index given by that table's own H3 hash of the address.
// A lookup answers "seen" when all NUM_HASH bits are set. As the design asks,
// the storage is one single-port RAM rather than parallel tables: the tables
// are stacked in one array of WORD_W-bit words, and one word is read or
// written per cycle. The filter is emptied on request by writing zero words,
// one per cycle; the decision of when to clear belongs to the predictor.
//
// Operation and timing (one operation at a time):
//  * lookup: reads the word of table 0, 1, ... in consecutive cycles; lk_done is
//    high for one cycle NUM_HASH + 1 cycles after the request was accepted
//    (sampled at that edge), with lk_seen.
//  * insert: read, then write back with the bit set, for each table: the port
//    is busy for 2 * NUM_HASH cycles after acceptance.
//  * clear: a one-cycle pulse on `clear` (or reset) starts a sweep of all
//    NUM_HASH * ENTRIES / WORD_W words; `clearing` is high while it runs (one
//    cycle longer than the sweep, for the hand-over from idle) and no
//    request is accepted. A clear requested during an operation starts when
//    that operation ends.
//  * lk_valid/lk_ready/lk_key and ins_valid/ins_ready/ins_key: requests are
//    accepted on an edge where valid and ready are both high. Lookups take
//    priority over inserts.
// The sizes follow the design (4 hashes, 4096 entries each); the word width,
// the handshake, the lookup priority, the clear sweep and the clear after
// reset are this design's own choices.
module bloom_filter #(
  parameter int unsigned KEY_W    = l2h_pkg::BLK_ADDR_W,
  parameter int unsigned NUM_HASH = l2h_pkg::BF_HASHES,
  parameter int unsigned ENTRIES  = l2h_pkg::BF_ENTRIES,
  parameter int unsigned WORD_W   = 64
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clear,
  output logic             clearing,
  input  logic             ins_valid,
  output logic             ins_ready,
  input  logic [KEY_W-1:0] ins_key,
  input  logic             lk_valid,
  output logic             lk_ready,
  input  logic [KEY_W-1:0] lk_key,
  output logic             lk_done,
  output logic             lk_seen
);

  localparam int unsigned IDX_W   = $clog2(ENTRIES);
  localparam int unsigned BIT_W   = $clog2(WORD_W);
  localparam int unsigned TWORDS  = ENTRIES / WORD_W;       // words per table
  localparam int unsigned WORDS   = NUM_HASH * TWORDS;
  localparam int unsigned ADDR_W  = $clog2(WORDS);
  localparam int unsigned K_W     = $clog2(NUM_HASH + 1);
  localparam int unsigned H_W     = (NUM_HASH > 1) ? $clog2(NUM_HASH) : 1;

  typedef enum logic [2:0] {S_IDLE, S_LOOKUP, S_INS_RD, S_INS_WR, S_CLEAR} state_e;

  state_e             state;
  logic [K_W-1:0]     k;            // table being addressed
  logic [KEY_W-1:0]   key_q;
  logic               acc;          // AND of the bits read so far
  logic               rd_pending;   // a lookup read is returning this cycle
  logic [BIT_W-1:0]   rd_bit_q;     // bit position of that read
  logic               clr_pending;
  logic [ADDR_W-1:0]  clr_addr;
  logic [IDX_W-1:0]   idx [NUM_HASH];
  logic [IDX_W-1:0]   cur_idx;
  logic [ADDR_W-1:0]  cur_addr;

  // single-port RAM
  logic [WORD_W-1:0]  mem [WORDS];
  logic               ram_en, ram_we;
  logic [ADDR_W-1:0]  ram_addr;
  logic [WORD_W-1:0]  ram_wdata, ram_rdata;

  for (genvar h = 0; h < int'(NUM_HASH); h++) begin : g_hash
    h3_hash #(.IN_W(KEY_W), .OUT_W(IDX_W), .SEED(h + 1)) u_h3 (.key(key_q), .hash(idx[h]));
  end

  assign cur_idx  = (int'(k) < int'(NUM_HASH)) ? idx[H_W'(k)] : '0;
  assign cur_addr = ADDR_W'(int'(k) * int'(TWORDS) + int'(cur_idx[IDX_W-1:BIT_W]));

  always_ff @(posedge clk) begin
    if (ram_en) begin
      if (ram_we) mem[ram_addr] <= ram_wdata;
      else        ram_rdata     <= mem[ram_addr];
    end
  end

  always_comb begin
    ram_en    = 1'b0;
    ram_we    = 1'b0;
    ram_addr  = cur_addr;
    ram_wdata = ram_rdata | (WORD_W'(1) << cur_idx[BIT_W-1:0]);
    unique case (state)
      S_LOOKUP: ram_en = (int'(k) < int'(NUM_HASH));
      S_INS_RD: ram_en = 1'b1;
      S_INS_WR: begin ram_en = 1'b1; ram_we = 1'b1; end
      S_CLEAR:  begin ram_en = 1'b1; ram_we = 1'b1; ram_addr = clr_addr; ram_wdata = '0; end
      default: ;
    endcase
  end

  assign clearing  = (state == S_CLEAR) || clr_pending;
  assign lk_ready  = (state == S_IDLE) && !clr_pending && !clear;
  assign ins_ready = lk_ready && !lk_valid;

  assign lk_done = (state == S_LOOKUP) && (int'(k) == int'(NUM_HASH));
  assign lk_seen = acc && ram_rdata[rd_bit_q];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= S_CLEAR;
      k           <= '0;
      key_q       <= '0;
      acc         <= 1'b0;
      rd_pending  <= 1'b0;
      rd_bit_q    <= '0;
      clr_pending <= 1'b0;
      clr_addr    <= '0;
    end else begin
      if (clear) clr_pending <= 1'b1;
      unique case (state)
        S_IDLE: begin
          k          <= '0;
          acc        <= 1'b1;
          rd_pending <= 1'b0;
          if (clr_pending) begin
            clr_pending <= 1'b0;
            clr_addr    <= '0;
            state       <= S_CLEAR;
          end else if (lk_valid && lk_ready) begin
            key_q <= lk_key;
            state <= S_LOOKUP;
          end else if (ins_valid && ins_ready) begin
            key_q <= ins_key;
            state <= S_INS_RD;
          end
        end
        S_LOOKUP: begin
          // one read issued per cycle; the previous one returns now
          if (rd_pending) acc <= acc && ram_rdata[rd_bit_q];
          rd_pending <= 1'b1;
          rd_bit_q   <= cur_idx[BIT_W-1:0];
          k          <= k + 1'b1;
          if (int'(k) == int'(NUM_HASH)) state <= S_IDLE;
        end
        S_INS_RD: state <= S_INS_WR;
        S_INS_WR: begin
          k <= k + 1'b1;
          state <= (int'(k) == int'(NUM_HASH) - 1) ? S_IDLE : S_INS_RD;
        end
        S_CLEAR: begin
          clr_addr <= clr_addr + 1'b1;
          if (int'(clr_addr) == int'(WORDS) - 1) state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
