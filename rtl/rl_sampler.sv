// rl_sampler: memory request sampler of the read-level predictor.
//
// The sampler watches the requests of a few representative warps and learns, per PC, whether
// the lines a PC brings in are touched again. It is a small set-associative tag store of SETS
// sets x WAYS entries (4 x 8); each entry holds V (valid), U (used), RP (3-bit LRU age), a
// 15-bit partial line address (tag) and a 9-bit partial PC (signature). Only warps whose number
// is a multiple of WARPS/SETS (0, 12, 24, 36 of 48) are sampled, and warp/(WARPS/SETS) picks
// the set. On a sampled access:
//   hit  -> U := 1, the entry becomes most recent, and a hit event carrying the entry's stored
//           signature and the access type (read/write) goes to the history table; the entry then
//           records the signature of the hitting PC;
//   miss -> the access is written into an invalid entry or the LRU entry with U := 0; if the
//           entry it replaces was valid with U = 0, an "unused eviction" event carrying the old
//           signature goes to the history table.
// Events are registered: they appear in the cycle after acc_valid. One access per cycle.
// From the paper: geometry, field widths, the four sampled warps, the U-bit rules and LRU.
// This design's choices: which warps are representative, which address/PC bits form tag and
// signature, and updating the signature on a hit.
module rl_sampler
  import fuse_pkg::*;
#(
  parameter int unsigned SETS  = 4,
  parameter int unsigned WAYS  = 8,
  parameter int unsigned TAG_W = 15,
  parameter int unsigned WARPS = 48
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                acc_valid,
  input  logic [WARP_W-1:0]   acc_warp,
  input  laddr_t              acc_laddr,
  input  sig_t                acc_sig,
  input  logic                acc_write,
  output logic                hit_ev,       // decrement hit_sig's counter
  output sig_t                hit_sig,
  output logic                hit_write,
  output logic                evict_ev,     // unused entry evicted: increment evict_sig's counter
  output sig_t                evict_sig
);
  localparam int unsigned STRIDE = WARPS / SETS;
  localparam int unsigned SET_W  = (SETS > 1) ? $clog2(SETS) : 1;
  localparam int unsigned WAY_W  = $clog2(WAYS);

  typedef struct packed {
    logic             v;
    logic             u;
    logic [WAY_W-1:0] rp;
    logic [TAG_W-1:0] tag;
    sig_t             sig;
  } sentry_t;

  sentry_t ent [SETS][WAYS];

  logic             sampled;
  logic [SET_W-1:0] set_i;
  logic [TAG_W-1:0] tag_i;
  logic             hit;
  logic [WAY_W-1:0] hway, vway;
  logic             inv_found;

  always_comb begin
    sampled = acc_valid && (int'(acc_warp) % STRIDE == 0) && (int'(acc_warp) / STRIDE < SETS);
    set_i   = SET_W'(int'(acc_warp) / STRIDE);
    tag_i   = acc_laddr[TAG_W-1:0];
    hit     = 1'b0;
    hway    = '0;
    for (int w = 0; w < WAYS; w++)
      if (ent[set_i][w].v && ent[set_i][w].tag == tag_i) begin
        hit  = 1'b1;
        hway = WAY_W'(w);
      end
    vway      = '0;
    inv_found = 1'b0;
    for (int w = 0; w < WAYS; w++)
      if (!inv_found && !ent[set_i][w].v) begin
        vway      = WAY_W'(w);
        inv_found = 1'b1;
      end
    if (!inv_found)
      for (int w = 0; w < WAYS; w++)
        if (ent[set_i][w].rp == WAY_W'(WAYS-1)) vway = WAY_W'(w);
  end

  logic [WAY_W-1:0] uway;
  assign uway = hit ? hway : vway;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < SETS; s++)
        for (int w = 0; w < WAYS; w++) ent[s][w] <= '{v: 1'b0, u: 1'b0, rp: WAY_W'(w), tag: '0, sig: '0};
      hit_ev    <= 1'b0;
      evict_ev  <= 1'b0;
      hit_sig   <= '0;
      hit_write <= 1'b0;
      evict_sig <= '0;
    end else begin
      hit_ev   <= sampled && hit;
      evict_ev <= sampled && !hit && ent[set_i][vway].v && !ent[set_i][vway].u;
      hit_sig   <= ent[set_i][hway].sig;
      hit_write <= acc_write;
      evict_sig <= ent[set_i][vway].sig;
      if (sampled) begin
        // LRU: the used entry becomes age 0, younger ones age by one
        for (int w = 0; w < WAYS; w++)
          if (WAY_W'(w) != uway && ent[set_i][w].rp < ent[set_i][uway].rp)
            ent[set_i][w].rp <= ent[set_i][w].rp + 1'b1;
        ent[set_i][uway].rp  <= '0;
        ent[set_i][uway].sig <= acc_sig;
        if (hit) begin
          ent[set_i][uway].u <= 1'b1;
        end else begin
          ent[set_i][uway].v   <= 1'b1;
          ent[set_i][uway].u   <= 1'b0;
          ent[set_i][uway].tag <= tag_i;
        end
      end
    end
  end

endmodule
