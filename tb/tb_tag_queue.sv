// tb_tag_queue: FIFO order, full/empty/drained flags at depth 16, simultaneous push and pop,
// random traffic against a reference queue.
`timescale 1ns/1ps
`include "tb_util.svh"
module tb_tag_queue;
  import fuse_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic push, pop, empty, full, drained;
  tq_entry_t push_entry, head;
  logic [4:0] count;
  tag_queue dut (.*);
  tq_entry_t model [$];

  function automatic tq_entry_t mk(int i);
    tq_entry_t e;
    e = '0;
    e.cmd = tq_cmd_e'(i % 3); e.laddr = laddr_t'(i * 77); e.rid = rid_t'(i); e.sig = sig_t'(i * 5);
    e.dirty = i[0]; e.cls = rl_class_e'(i % 4);
    return e;
  endfunction

  initial begin
    #200000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    push = 0; pop = 0; push_entry = '0;
    repeat (3) @(posedge clk); rst_n = 1; @(posedge clk); #1;
    `CHECK(empty && drained && !full, "empty after reset")
    for (int i = 0; i < 16; i++) begin push = 1; push_entry = mk(i); @(posedge clk); #1; end
    push = 0;
    `CHECK(full && count == 16 && !drained, "full at 16")
    for (int i = 0; i < 16; i++) begin
      `CHECK(head == mk(i), "FIFO order")
      pop = 1; @(posedge clk); #1;
    end
    pop = 0;
    `CHECK(empty && drained, "drained after 16 pops")
    for (int it = 0; it < 2000; it++) begin
      push = ($urandom_range(0, 1) == 1) && model.size() < 16;
      pop  = ($urandom_range(0, 2) != 0) && model.size() > 0;
      push_entry = mk(it + 100);
      if (pop) begin `CHECK(head == model[0], "random traffic head") void'(model.pop_front()); end
      if (push) model.push_back(push_entry);
      @(posedge clk); #1;
      `CHECK(count == 5'(model.size()) && empty == (model.size() == 0) && full == (model.size() == 16), "count/flags")
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
