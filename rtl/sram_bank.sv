// sram_bank: the SRAM part of the FUSE hybrid L1D cache, a set-associative write-back bank.
//
// It holds SETS x WAYS lines of 128 bytes (64 sets x 2 ways = 16 KB, the paper's Dy-FUSE
// split). Each way of a set has a tag entry {valid, dirty, tag, PC signature} and a data line.
// Lookup is combinational on lk_laddr (the caller registers the request, so the bank answers in
// the cycle after the request is accepted: one-cycle read, one-cycle write as in the paper).
// Writes (wr_en) update a line found by a lookup and set its dirty bit. A fill (fill_en)
// installs a line in an invalid way or else the least recently used way; the line it displaces
// is shown on the vic_* outputs, computed from fill_laddr in the same cycle, so the caller can
// send it to STT-MRAM or L2 before asserting fill_en. Reads that hit (touch_en) and writes
// refresh the LRU order.
// The size comes from the paper; LRU, storing the PC signature with each line (so the
// read-level predictor can be asked about a victim) and whole-line writes are this design's
// choices.
module sram_bank
  import fuse_pkg::*;
#(
  parameter int unsigned SETS = 64,
  parameter int unsigned WAYS = 2
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // lookup
  input  laddr_t                  lk_laddr,
  output logic                    lk_hit,
  output logic [$clog2(WAYS)-1:0] lk_way,
  output line_t                   lk_rdata,
  output logic                    lk_dirty,
  // LRU refresh on a read hit
  input  logic                    touch_en,
  input  laddr_t                  touch_laddr,
  input  logic [$clog2(WAYS)-1:0] touch_way,
  // write of a line that hit
  input  logic                    wr_en,
  input  laddr_t                  wr_laddr,
  input  logic [$clog2(WAYS)-1:0] wr_way,
  input  line_t                   wr_data,
  input  sig_t                    wr_sig,
  // fill (allocation) and the victim it displaces
  input  logic                    fill_en,
  input  laddr_t                  fill_laddr,
  input  line_t                   fill_data,
  input  logic                    fill_dirty,
  input  sig_t                    fill_sig,
  output logic                    vic_valid,
  output laddr_t                  vic_laddr,
  output line_t                   vic_data,
  output logic                    vic_dirty,
  output sig_t                    vic_sig
);
  localparam int unsigned IDX_W = $clog2(SETS);
  localparam int unsigned WAY_W = $clog2(WAYS);
  localparam int unsigned TAG_W = LADDR_W - IDX_W;
  localparam int unsigned N     = SETS * WAYS;

  typedef struct packed {
    logic             valid;
    logic             dirty;
    logic [TAG_W-1:0] tag;
    sig_t             sig;
  } tag_entry_t;

  tag_entry_t       tags [N];
  line_t            data [N];
  logic [WAY_W-1:0] age  [N];   // 0 = most recently used

  function automatic logic [IDX_W-1:0] idx_of(laddr_t a);
    return a[IDX_W-1:0];
  endfunction
  function automatic logic [TAG_W-1:0] tag_of(laddr_t a);
    return a[LADDR_W-1:IDX_W];
  endfunction

  // ---------------- lookup ----------------
  always_comb begin
    lk_hit   = 1'b0;
    lk_way   = '0;
    for (int w = 0; w < WAYS; w++) begin
      if (tags[idx_of(lk_laddr)*WAYS+w].valid && tags[idx_of(lk_laddr)*WAYS+w].tag == tag_of(lk_laddr)) begin
        lk_hit = 1'b1;
        lk_way = WAY_W'(w);
      end
    end
    lk_rdata = data[idx_of(lk_laddr)*WAYS+lk_way];
    lk_dirty = tags[idx_of(lk_laddr)*WAYS+lk_way].dirty;
  end

  // ---------------- victim selection for a fill ----------------
  logic [WAY_W-1:0] vway;
  logic             found_inv;
  always_comb begin
    vway      = '0;
    found_inv = 1'b0;
    for (int w = 0; w < WAYS; w++) begin
      if (!found_inv && !tags[idx_of(fill_laddr)*WAYS+w].valid) begin
        vway      = WAY_W'(w);
        found_inv = 1'b1;
      end
    end
    if (!found_inv) begin
      for (int w = 0; w < WAYS; w++)
        if (age[idx_of(fill_laddr)*WAYS+w] == WAY_W'(WAYS-1)) vway = WAY_W'(w);
    end
    vic_valid = tags[idx_of(fill_laddr)*WAYS+vway].valid;
    vic_dirty = tags[idx_of(fill_laddr)*WAYS+vway].dirty;
    vic_sig   = tags[idx_of(fill_laddr)*WAYS+vway].sig;
    vic_laddr = {tags[idx_of(fill_laddr)*WAYS+vway].tag, idx_of(fill_laddr)};
    vic_data  = data[idx_of(fill_laddr)*WAYS+vway];
  end

  // Move way `u` of set `s` to most recently used.
  task automatic make_mru(input logic [IDX_W-1:0] s, input logic [WAY_W-1:0] u);
    for (int w = 0; w < WAYS; w++) begin
      if (WAY_W'(w) == u)                   age[s*WAYS+w] <= '0;
      else if (age[s*WAYS+w] < age[s*WAYS+u]) age[s*WAYS+w] <= age[s*WAYS+w] + 1'b1;
    end
  endtask

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < N; i++) begin
        tags[i] <= '0;
        age[i]  <= WAY_W'(i % WAYS);
      end
    end else begin
      if (fill_en) begin
        tags[idx_of(fill_laddr)*WAYS+vway] <= '{valid: 1'b1, dirty: fill_dirty,
                                                tag: tag_of(fill_laddr), sig: fill_sig};
        make_mru(idx_of(fill_laddr), vway);
      end else if (wr_en) begin
        tags[idx_of(wr_laddr)*WAYS+wr_way].dirty <= 1'b1;
        tags[idx_of(wr_laddr)*WAYS+wr_way].sig   <= wr_sig;
        make_mru(idx_of(wr_laddr), wr_way);
      end else if (touch_en) begin
        make_mru(idx_of(touch_laddr), touch_way);
      end
    end
  end

  // Data array: no reset, written only with valid lines.
  always_ff @(posedge clk) begin
    if (fill_en)     data[idx_of(fill_laddr)*WAYS+vway] <= fill_data;
    else if (wr_en)  data[idx_of(wr_laddr)*WAYS+wr_way] <= wr_data;
  end

endmodule
