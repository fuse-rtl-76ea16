// tb_sram_bank: self-checking test of the SRAM bank: hit/miss, data, LRU victim choice,
// dirty tracking on writes and fills, victim address/data/signature.
`timescale 1ns/1ps
`include "tb_util.svh"
module tb_sram_bank;
  import fuse_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  laddr_t lk_laddr, touch_laddr, wr_laddr, fill_laddr, vic_laddr;
  logic lk_hit, lk_dirty, touch_en, wr_en, fill_en, fill_dirty, vic_valid, vic_dirty;
  logic [0:0] lk_way, touch_way, wr_way;
  line_t lk_rdata, wr_data, fill_data, vic_data;
  sig_t wr_sig, fill_sig, vic_sig;

  sram_bank dut (.*);

  function automatic line_t pat(laddr_t a); return {32{a ^ 32'h5a5a_0000, 7'h11}}; endfunction
  // line address with set s and tag t (64 sets)
  function automatic laddr_t la(int t, int s); return laddr_t'((t << 6) | s); endfunction

  task automatic do_fill(laddr_t a, logic d, sig_t sg);
    fill_laddr = a; fill_data = pat(a); fill_dirty = d; fill_sig = sg; fill_en = 1;
    @(posedge clk); #1 fill_en = 0;
  endtask

  initial begin
    #200000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    {touch_en, wr_en, fill_en} = 0; lk_laddr = 0; touch_laddr = 0; touch_way = 0; wr_laddr = 0;
    wr_way = 0; wr_data = 0; wr_sig = 0; fill_laddr = 0; fill_data = 0; fill_dirty = 0; fill_sig = 0;
    repeat (3) @(posedge clk); rst_n = 1; @(posedge clk); #1;
    lk_laddr = la(1, 5); #1 `CHECK(!lk_hit, "empty bank misses")
    fill_laddr = la(1, 5); #1 `CHECK(!vic_valid, "no victim in empty set")
    do_fill(la(1, 5), 0, 9'd3);
    lk_laddr = la(1, 5); #1 `CHECK(lk_hit && lk_rdata == pat(la(1, 5)) && !lk_dirty, "hit after fill, data")
    do_fill(la(2, 5), 1, 9'd4);
    lk_laddr = la(2, 5); #1 `CHECK(lk_hit && lk_rdata == pat(la(2, 5)) && lk_dirty, "second way, dirty fill")
    lk_laddr = la(1, 6); #1 `CHECK(!lk_hit, "other set misses")
    // LRU: line 1 is older -> victim
    fill_laddr = la(3, 5); #1
    `CHECK(vic_valid && vic_laddr == la(1, 5) && vic_data == pat(la(1, 5)) && !vic_dirty && vic_sig == 9'd3, "LRU victim is oldest")
    // touch line 1, now line 2 is LRU
    lk_laddr = la(1, 5); #1 touch_laddr = la(1, 5); touch_way = lk_way; touch_en = 1;
    @(posedge clk); #1 touch_en = 0;
    fill_laddr = la(3, 5); #1
    `CHECK(vic_valid && vic_laddr == la(2, 5) && vic_dirty && vic_sig == 9'd4, "touch changes LRU victim")
    // write line 1: dirty, new data, new signature, becomes MRU
    lk_laddr = la(1, 5); #1 wr_laddr = la(1, 5); wr_way = lk_way; wr_data = ~pat(la(1, 5)); wr_sig = 9'd77; wr_en = 1;
    @(posedge clk); #1 wr_en = 0;
    lk_laddr = la(1, 5); #1 `CHECK(lk_hit && lk_dirty && lk_rdata == ~pat(la(1, 5)), "write hit updates data and dirty")
    do_fill(la(3, 5), 0, 9'd5);
    lk_laddr = la(2, 5); #1 `CHECK(!lk_hit, "victim replaced")
    lk_laddr = la(3, 5); #1 `CHECK(lk_hit && lk_rdata == pat(la(3, 5)), "new line present")
    fill_laddr = la(4, 5); #1 `CHECK(vic_laddr == la(1, 5) && vic_sig == 9'd77 && vic_dirty, "written line is LRU after fill of another")
    // fill all 64 sets x 2 ways, read back
    for (int s = 0; s < 64; s++) for (int t = 10; t < 12; t++) do_fill(la(t, s), 0, 9'(s));
    for (int s = 0; s < 64; s++) for (int t = 10; t < 12; t++) begin
      lk_laddr = la(t, s); #1 `CHECK(lk_hit && lk_rdata == pat(la(t, s)), "full bank readback")
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
