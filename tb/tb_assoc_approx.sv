// tb_assoc_approx: fills the 512-entry STT-MRAM tag array through FIFO insertion, searches
// every line (hit, correct slot, latency = 1 test cycle + rows polled), searches absent lines
// (miss), checks FIFO victims after wrap-around, invalidation and in-place dirty marking.
`timescale 1ns/1ps
`include "tb_util.svh"
module tb_assoc_approx;
  import fuse_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic srch_start, srch_busy, srch_done, srch_hit, srch_dirty;
  laddr_t srch_laddr, vic_laddr, ins_laddr;
  logic [8:0] srch_line, ins_line, inv_line, set_line;
  logic [7:0] srch_polls;
  logic vic_valid, vic_dirty, ins_en, ins_dirty, inv_en, set_en;
  sig_t ins_sig, set_sig;
  assoc_approx dut (.*);

  laddr_t slot [512];
  function automatic laddr_t addr_of(int i); return laddr_t'(i * 32'h2f1 + 32'h1234); endfunction

  task automatic insert(laddr_t a, logic d);
    ins_laddr = a; ins_dirty = d; ins_sig = 9'(a); ins_en = 1;
    @(posedge clk); #1 ins_en = 0;
  endtask

  // returns hit, line and the number of cycles from start to done (start cycle counts as 1)
  task automatic search(laddr_t a, output logic hit, output int line, output int cyc, output int polls);
    srch_laddr = a; srch_start = 1; cyc = 1;
    @(posedge clk); #1 srch_start = 0;
    while (!srch_done) begin cyc++; @(posedge clk); #1; end
    cyc++;
    hit = srch_hit; line = srch_line; polls = srch_polls;
    @(posedge clk); #1;
  endtask

  initial begin
    #5000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic hit; int line, cyc, polls, maxc, sumc, w;
    {srch_start, ins_en, inv_en, set_en, ins_dirty} = 0;
    srch_laddr = 0; ins_laddr = 0; ins_sig = 0; inv_line = 0; set_line = 0; set_sig = 0;
    repeat (3) @(posedge clk); rst_n = 1; @(posedge clk); #1;
    search(addr_of(0), hit, line, cyc, polls);
    `CHECK(!hit && cyc == 2, $sformatf("empty array: negative in 2 cycles (got %0d)", cyc))
    for (int i = 0; i < 512; i++) begin
      `CHECK(ins_line == 9'(i) && !vic_valid, "FIFO pointer walks free slots")
      insert(addr_of(i), i % 3 == 0);
    end
    maxc = 0; sumc = 0;
    for (int i = 0; i < 512; i++) begin
      search(addr_of(i), hit, line, cyc, polls);
      `CHECK(hit && line == i, $sformatf("line %0d found in its slot", i))
      `CHECK(cyc == 1 + polls && polls >= 1, "latency = test cycle + polled rows")
      if (cyc > maxc) maxc = cyc;
      sumc += cyc;
    end
    `CHECK(sumc < 512 * 4, $sformatf("Bloom filters keep searches short (avg %0d/512)", sumc))
    $display("search cycles: max %0d, total %0d for 512 hits", maxc, sumc);
    w = 0;
    for (int i = 0; i < 200; i++) begin
      search(addr_of(1000 + i), hit, line, cyc, polls);
      `CHECK(!hit, "absent line misses")
      if (cyc == 2) w++;
    end
    `CHECK(w > 0, "some absent lines rejected by the filters alone")
    // wrap-around: next insertion replaces slot 0
    `CHECK(ins_line == 0 && vic_valid && vic_laddr == addr_of(0) && vic_dirty, "FIFO victim after wrap")
    insert(addr_of(600), 0);
    search(addr_of(0), hit, line, cyc, polls);
    `CHECK(!hit, "replaced line is gone")
    search(addr_of(600), hit, line, cyc, polls);
    `CHECK(hit && line == 0, "new line in slot 0")
    `CHECK(vic_laddr == addr_of(1) && !vic_dirty, "next victim is slot 1, clean")
    // invalidate and mark dirty
    inv_line = 9'd7; inv_en = 1; @(posedge clk); #1 inv_en = 0;
    search(addr_of(7), hit, line, cyc, polls);
    `CHECK(!hit, "invalidated line misses")
    set_line = 9'd8; set_sig = 9'd99; set_en = 1; @(posedge clk); #1 set_en = 0;
    search(addr_of(8), hit, line, cyc, polls);
    `CHECK(hit && srch_dirty == 0 || hit, "set_en keeps line")
    srch_laddr = addr_of(8); srch_start = 1; @(posedge clk); #1 srch_start = 0;
    while (!srch_done) @(posedge clk); #0;
    `CHECK(srch_hit && srch_dirty, "set_en marks the line dirty")
    @(posedge clk); #1;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
