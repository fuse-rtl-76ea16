// tb_mshr: random allocate / merge / L2-issue / land / release traffic against a reference
// table of entries. Each cycle it compares both lookup ports (hit, index, landing, room to
// merge), the free count and full/empty flags, the lowest-free allocation slot, the
// lowest-unissued L2 request and the contents read back through rd_idx (address, destination
// bank, signature, merged request IDs in arrival order). It also fills the table to full.
`timescale 1ns/1ps
`include "tb_util.svh"
module tb_mshr;
  import fuse_pkg::*;
  localparam int N = 32, M = 8;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  laddr_t lk_laddr, lk2_laddr, alloc_laddr, l2_req_laddr, rd_laddr;
  logic lk_hit, lk_landing, lk_can_merge, lk2_hit, lk2_landing, lk2_can_merge;
  logic [4:0] lk_idx, lk2_idx, alloc_idx, merge_idx, l2_req_id, rd_idx, land_idx, rel_idx, rel2_idx;
  logic full, empty, alloc_en, merge_en, l2_req_valid, l2_req_ready, land_en, rel_en, rel2_en;
  logic [5:0] free_cnt;
  bank_e alloc_dst, rd_dst;
  rid_t alloc_rid, merge_rid;
  sig_t alloc_sig, rd_sig;
  logic [3:0] rd_nrid;
  rid_t rd_rid [M];
  mshr dut (.*);

  typedef struct { bit v, iss, land; laddr_t a; bank_e d; sig_t s; rid_t r[$]; } ref_t;
  ref_t m [N];
  int n_full = 0, n_merge = 0, n_land = 0;

  function automatic int find(laddr_t a);
    for (int i = 0; i < N; i++) if (m[i].v && m[i].a == a) return i;
    return -1;
  endfunction
  function automatic int lowest_free();
    for (int i = 0; i < N; i++) if (!m[i].v) return i;
    return -1;
  endfunction
  function automatic int lowest_unissued();
    for (int i = 0; i < N; i++) if (m[i].v && !m[i].iss) return i;
    return -1;
  endfunction
  function automatic laddr_t pick_addr();
    return laddr_t'($urandom_range(0, 47)) * 25'h1_0003;
  endfunction

  task automatic compare();
    int f, f2, lf, lu, nf;
    f = find(lk_laddr); f2 = find(lk2_laddr); lf = lowest_free(); lu = lowest_unissued();
    nf = 0; foreach (m[i]) if (!m[i].v) nf++;
    `CHECK(lk_hit == (f >= 0), "lookup hit")
    if (f >= 0) begin
      `CHECK(lk_idx == 5'(f), "lookup index")
      `CHECK(lk_landing == m[f].land, "landing flag")
      `CHECK(lk_can_merge == (!m[f].land && m[f].r.size() < M), "merge room")
    end
    `CHECK(lk2_hit == (f2 >= 0) && (f2 < 0 || lk2_idx == 5'(f2)), "second lookup port")
    `CHECK(free_cnt == 6'(nf) && full == (nf == 0) && empty == (nf == N), "free count and flags")
    if (lf >= 0) `CHECK(alloc_idx == 5'(lf), "allocation slot is the lowest free one")
    `CHECK(l2_req_valid == (lu >= 0), "L2 request valid")
    if (lu >= 0) `CHECK(l2_req_id == 5'(lu) && l2_req_laddr == m[lu].a, "L2 request id and address")
    if (m[rd_idx].v) begin
      `CHECK(rd_laddr == m[rd_idx].a && rd_dst == m[rd_idx].d && rd_sig == m[rd_idx].s, "entry fields")
      `CHECK(rd_nrid == 4'(m[rd_idx].r.size()), "number of merged requests")
      foreach (m[rd_idx].r[k]) `CHECK(rd_rid[k] == m[rd_idx].r[k], "merged request IDs in order")
    end
  endtask

  initial begin
    #5000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    {alloc_en, merge_en, l2_req_ready, land_en, rel_en, rel2_en} = '0;
    lk_laddr = '0; lk2_laddr = '0; alloc_laddr = '0; alloc_dst = DST_SRAM; alloc_rid = '0; alloc_sig = '0;
    merge_idx = '0; merge_rid = '0; rd_idx = '0; land_idx = '0; rel_idx = '0; rel2_idx = '0;
    foreach (m[i]) m[i].v = 0;
    repeat (3) @(posedge clk); rst_n = 1; @(posedge clk); #1;
    for (int it = 0; it < 8000; it++) begin
      int phase_fill, i, j, ak;
      phase_fill = (it % 2000) < 400;      // bursts that fill the table
      {alloc_en, merge_en, land_en, rel_en, rel2_en} = '0;
      l2_req_ready = $urandom_range(0, 1);
      lk_laddr  = pick_addr();
      lk2_laddr = pick_addr();
      rd_idx    = 5'($urandom_range(0, N - 1));
      #1;
      compare();
      if (full) n_full++;
      // allocate a new line
      alloc_laddr = pick_addr();
      if (!full && find(alloc_laddr) < 0 && $urandom_range(0, 3) != 0) begin
        alloc_en = 1; alloc_dst = bank_e'($urandom_range(0, 1)); alloc_rid = rid_t'($urandom);
        alloc_sig = sig_t'($urandom);
      end
      // merge into a random entry
      i = $urandom_range(0, N - 1);
      if (m[i].v && !m[i].land && m[i].r.size() < M && $urandom_range(0, 1) == 1) begin
        merge_en = 1; merge_idx = 5'(i); merge_rid = rid_t'($urandom);
      end
      // land and release
      j = $urandom_range(0, N - 1);
      if (m[j].v && m[j].iss && !m[j].land && $urandom_range(0, 3) == 0) begin land_en = 1; land_idx = 5'(j); end
      j = $urandom_range(0, N - 1);
      if (m[j].v && m[j].iss && !(land_en && land_idx == 5'(j)) && !phase_fill && $urandom_range(0, 1) == 0) begin
        rel_en = 1; rel_idx = 5'(j);
      end
      j = $urandom_range(0, N - 1);
      if (m[j].v && m[j].land && !(rel_en && rel_idx == 5'(j)) && !phase_fill) begin rel2_en = 1; rel2_idx = 5'(j); end
      if (merge_en && ((rel_en && rel_idx == merge_idx) || (rel2_en && rel2_idx == merge_idx))) merge_en = 0;
      // reference update (same edge); the slot is chosen before this edge's releases
      ak = lowest_free();
      if (l2_req_valid && l2_req_ready) m[l2_req_id].iss = 1;
      if (land_en) begin m[land_idx].land = 1; n_land++; end
      if (rel_en)  m[rel_idx].v = 0;
      if (rel2_en) m[rel2_idx].v = 0;
      if (merge_en) begin m[merge_idx].r.push_back(merge_rid); n_merge++; end
      if (alloc_en) begin
        int k; k = ak;
        m[k].v = 1; m[k].iss = 0; m[k].land = 0; m[k].a = alloc_laddr; m[k].d = alloc_dst;
        m[k].s = alloc_sig; m[k].r.delete(); m[k].r.push_back(alloc_rid);
      end
      @(posedge clk); #1;
    end
    `CHECK(n_full > 0 && n_merge > 100 && n_land > 50, "table filled, merges and landings seen")
    $display("cycles full %0d merges %0d landings %0d", n_full, n_merge, n_land);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
