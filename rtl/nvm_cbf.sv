// nvm_cbf: the NVM counting Bloom filter array of the associativity approximation logic.
//
// N_CBF filters (128), each a row of CBF_LEN 2-bit counters (64), tell the tag polling logic
// which groups of STT-MRAM tag entries may hold a line. N_HASH hash functions (3) turn a line
// address into counter positions; the same positions are used in every filter, so one test
// reads the same three counters of all filters at once and returns one "positive" bit per
// filter (the paper's X-decoder activating the hashed rows of the 2-D MTJ array). A filter is
// positive when none of its three counters is zero. Increment and decrement act on one filter
// (the paper's Y-decoder selecting the column of a CBF ID): +1 / -1 on each hashed counter;
// both may be given in the same cycle, which replaces one member of the filter by another.
// Timing: test_pos is combinational from test_laddr (the paper's test fits in one STT-MRAM
// read); an update is applied at the clock edge.
// From the paper: 128 filters, 64 two-bit counters each (the count given in the evaluation; the overview says 16), 3 hashes, the test/increment/decrement
// operations. This design's own choices: the hash functions (multiplicative hashes of the line
// address with three odd constants, top bits kept) and overflow handling: a counter that reaches 3 stays at 3, so
// the filter can only err towards "positive" and never hides a line.
module nvm_cbf
  import fuse_pkg::*;
#(
  parameter int unsigned N_CBF   = 128,
  parameter int unsigned CBF_LEN = 64,
  parameter int unsigned N_HASH  = 3
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  laddr_t                   test_laddr,
  output logic [N_CBF-1:0]         test_pos,
  input  logic [$clog2(N_CBF)-1:0] upd_cbf,    // filter to update
  input  logic                     inc_en,     // increment for inc_laddr
  input  laddr_t                   inc_laddr,
  input  logic                     dec_en,     // decrement for dec_laddr
  input  laddr_t                   dec_laddr
);
  localparam int unsigned KEY_W = $clog2(CBF_LEN);
  localparam int unsigned PAD_W = ((LADDR_W + KEY_W - 1) / KEY_W) * KEY_W;
  localparam logic [1:0]  CMAX  = 2'd3;

  typedef logic [KEY_W-1:0] key_t;

  logic [1:0] cnt [N_CBF][CBF_LEN];

  // Hash k: multiply the line address by an odd constant (mod 2^25) and keep the top KEY_W
  // bits of the product (multiplicative hashing; three different constants).
  localparam logic [LADDR_W-1:0] HMUL [3] = '{25'h1E3779B, 25'h15A4E35, 25'h0C2B2AF};
  function automatic key_t hash(laddr_t a, int unsigned k);
    logic [LADDR_W-1:0] p;
    p = LADDR_W'(a * HMUL[k % 3] + LADDR_W'(k));
    return p[LADDR_W-1 -: KEY_W];
  endfunction

  key_t tkey [N_HASH];
  key_t ikey [N_HASH];
  key_t dkey [N_HASH];
  always_comb begin
    for (int unsigned k = 0; k < N_HASH; k++) begin
      tkey[k] = hash(test_laddr, k);
      ikey[k] = hash(inc_laddr, k);
      dkey[k] = hash(dec_laddr, k);
    end
  end

  always_comb begin
    for (int unsigned c = 0; c < N_CBF; c++) begin
      test_pos[c] = 1'b1;
      for (int unsigned k = 0; k < N_HASH; k++)
        if (cnt[c][tkey[k]] == 2'd0) test_pos[c] = 1'b0;
    end
  end

  // Net change of counter j of the selected filter: +1 per increment hash landing on it,
  // -1 per decrement hash. A saturated counter (3) never goes down.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int unsigned c = 0; c < N_CBF; c++)
        for (int unsigned j = 0; j < CBF_LEN; j++) cnt[c][j] <= '0;
    end else if (inc_en || dec_en) begin
      for (int unsigned j = 0; j < CBF_LEN; j++) begin
        logic signed [4:0] v;
        v = signed'({3'b000, cnt[upd_cbf][j]});
        for (int unsigned k = 0; k < N_HASH; k++) begin
          if (inc_en && ikey[k] == key_t'(j)) v = v + 5'sd1;
          if (dec_en && dkey[k] == key_t'(j) && cnt[upd_cbf][j] != CMAX) v = v - 5'sd1;
        end
        if (v > 5'sd3)      cnt[upd_cbf][j] <= CMAX;
        else if (v < 5'sd0) cnt[upd_cbf][j] <= 2'd0;
        else                cnt[upd_cbf][j] <= v[1:0];
      end
    end
  end

endmodule
