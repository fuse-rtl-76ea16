// mshr: miss status holding registers of the FUSE L1D, with the bank ID in the destination bits.
//
// Each of ENTRIES entries tracks one line being fetched from L2: valid bit, block (line)
// address, destination bits and up to MERGE request IDs waiting for it. The destination bits
// say which bank the fill goes to (SRAM or STT-MRAM), decided by the read-level prediction when
// the miss is recorded; the returning line then goes straight to its bank.
//   lookup:  two combinational comparator ports (front end and STT-MRAM side) of lk_laddr against all valid entries (lk_hit, lk_idx);
//            lk_landing says the line has already returned and is on its way into STT-MRAM;
//            lk_can_merge says another request may be attached.
//   alloc:   alloc_en writes a new entry in the lowest free slot (alloc_idx, valid while !full).
//   merge:   merge_en adds merge_rid to entry merge_idx.
//   L2 side: every new entry is offered once on l2_req_* (valid/ready), lowest entry first.
//   fill:    the controller reads an entry through rd_idx; land_en marks it landing; rel_en
//            and rel2_en free entries. free_cnt counts free entries.
// From the paper: valid bits, block address, destination bits extended with internal bank IDs,
// comparator, merging of secondary misses. Entry count (32), merge depth (8), the landing state
// and the L2 handshake are this design's choices.
module mshr
  import fuse_pkg::*;
#(
  parameter int unsigned ENTRIES = 32,
  parameter int unsigned MERGE   = 8
) (
  input  logic                       clk,
  input  logic                       rst_n,
  // lookup
  input  laddr_t                     lk_laddr,
  output logic                       lk_hit,
  output logic [$clog2(ENTRIES)-1:0] lk_idx,
  output logic                       lk_landing,
  output logic                       lk_can_merge,
  input  laddr_t                     lk2_laddr,
  output logic                       lk2_hit,
  output logic [$clog2(ENTRIES)-1:0] lk2_idx,
  output logic                       lk2_landing,
  output logic                       lk2_can_merge,
  // allocate
  output logic                       full,
  output logic                       empty,
  output logic [$clog2(ENTRIES):0]   free_cnt,
  output logic [$clog2(ENTRIES)-1:0] alloc_idx,
  input  logic                       alloc_en,
  input  laddr_t                     alloc_laddr,
  input  bank_e                      alloc_dst,
  input  rid_t                       alloc_rid,
  input  sig_t                       alloc_sig,
  // merge
  input  logic                       merge_en,
  input  logic [$clog2(ENTRIES)-1:0] merge_idx,
  input  rid_t                       merge_rid,
  // request to L2
  output logic                       l2_req_valid,
  input  logic                       l2_req_ready,
  output laddr_t                     l2_req_laddr,
  output logic [$clog2(ENTRIES)-1:0] l2_req_id,
  // read an entry, mark landing, release
  input  logic [$clog2(ENTRIES)-1:0] rd_idx,
  output laddr_t                     rd_laddr,
  output bank_e                      rd_dst,
  output sig_t                       rd_sig,
  output logic [$clog2(MERGE):0]     rd_nrid,
  output rid_t                       rd_rid [MERGE],
  input  logic                       land_en,
  input  logic [$clog2(ENTRIES)-1:0] land_idx,
  input  logic                       rel_en,
  input  logic [$clog2(ENTRIES)-1:0] rel_idx,
  input  logic                       rel2_en,
  input  logic [$clog2(ENTRIES)-1:0] rel2_idx
);
  localparam int unsigned IW = $clog2(ENTRIES);
  localparam int unsigned MW = $clog2(MERGE) + 1;

  typedef struct packed {
    logic    valid;
    logic    issued;
    logic    landing;
    laddr_t  laddr;
    bank_e   dst;
    sig_t    sig;
    logic [MW-1:0] nrid;
  } mentry_t;

  mentry_t e    [ENTRIES];
  rid_t    rids [ENTRIES][MERGE];

  always_comb begin
    lk_hit = 1'b0;
    lk_idx = '0;
    for (int i = 0; i < ENTRIES; i++)
      if (e[i].valid && e[i].laddr == lk_laddr) begin
        lk_hit = 1'b1;
        lk_idx = IW'(i);
      end
    lk_landing   = lk_hit && e[lk_idx].landing;
    lk_can_merge = lk_hit && !e[lk_idx].landing && (e[lk_idx].nrid < MW'(MERGE));
    lk2_hit = 1'b0;
    lk2_idx = '0;
    for (int i = 0; i < ENTRIES; i++)
      if (e[i].valid && e[i].laddr == lk2_laddr) begin
        lk2_hit = 1'b1;
        lk2_idx = IW'(i);
      end
    lk2_landing   = lk2_hit && e[lk2_idx].landing;
    lk2_can_merge = lk2_hit && !e[lk2_idx].landing && (e[lk2_idx].nrid < MW'(MERGE));

    full      = 1'b1;
    empty     = 1'b1;
    alloc_idx = '0;
    for (int i = ENTRIES - 1; i >= 0; i--)
      if (!e[i].valid) begin
        full      = 1'b0;
        alloc_idx = IW'(i);
      end
    free_cnt  = '0;
    for (int i = 0; i < ENTRIES; i++) begin
      if (e[i].valid) empty = 1'b0;
      else            free_cnt = free_cnt + 1'b1;
    end

    l2_req_valid = 1'b0;
    l2_req_id    = '0;
    for (int i = ENTRIES - 1; i >= 0; i--)
      if (e[i].valid && !e[i].issued) begin
        l2_req_valid = 1'b1;
        l2_req_id    = IW'(i);
      end
    l2_req_laddr = e[l2_req_id].laddr;

    rd_laddr = e[rd_idx].laddr;
    rd_dst   = e[rd_idx].dst;
    rd_sig   = e[rd_idx].sig;
    rd_nrid  = e[rd_idx].nrid;
    for (int m = 0; m < MERGE; m++) rd_rid[m] = rids[rd_idx][m];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < ENTRIES; i++) e[i] <= '0;
    end else begin
      if (l2_req_valid && l2_req_ready) e[l2_req_id].issued <= 1'b1;
      if (land_en) e[land_idx].landing <= 1'b1;
      if (rel_en)  e[rel_idx].valid    <= 1'b0;
      if (rel2_en) e[rel2_idx].valid   <= 1'b0;
      if (merge_en) e[merge_idx].nrid  <= e[merge_idx].nrid + 1'b1;
      if (alloc_en && !full)
        e[alloc_idx] <= '{valid: 1'b1, issued: 1'b0, landing: 1'b0, laddr: alloc_laddr,
                          dst: alloc_dst, sig: alloc_sig, nrid: MW'(1)};
    end
  end

  always_ff @(posedge clk) begin
    if (alloc_en && !full) rids[alloc_idx][0] <= alloc_rid;
    if (merge_en) rids[merge_idx][e[merge_idx].nrid[MW-2:0]] <= merge_rid;
  end

  a_alloc_not_full: assert property (@(posedge clk) disable iff (!rst_n) alloc_en |-> !full)
    else $error("mshr: allocation while full");
  a_merge_room: assert property (@(posedge clk) disable iff (!rst_n)
                                 merge_en |-> e[merge_idx].valid && e[merge_idx].nrid < MW'(MERGE))
    else $error("mshr: merge into a full or free entry");

endmodule
