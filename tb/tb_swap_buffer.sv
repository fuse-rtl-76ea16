// tb_swap_buffer: three 128-byte registers in FIFO order, full after three lines, random
// push/pop traffic against a reference queue; every cycle a random line address is matched
// against the addresses of the lines still waiting.
`timescale 1ns/1ps
`include "tb_util.svh"
module tb_swap_buffer;
  import fuse_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic push, pop, empty, full;
  line_t push_data, head;
  laddr_t push_laddr, match_laddr;
  logic match_hit;
  laddr_t mtags [$];
  int n_match = 0;
  swap_buffer dut (.*);
  line_t model [$];
  function automatic line_t pat(int i); return {32{32'(i) * 32'h01000193 + 32'h811c9dc5}}; endfunction

  initial begin
    #200000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    push = 0; pop = 0; push_data = '0; push_laddr = '0; match_laddr = '0;
    repeat (3) @(posedge clk); rst_n = 1; @(posedge clk); #1;
    `CHECK(empty && !full, "empty after reset")
    for (int i = 0; i < 3; i++) begin push = 1; push_data = pat(i); @(posedge clk); #1; end
    push = 0;
    `CHECK(full, "full after three lines")
    for (int i = 0; i < 3; i++) begin `CHECK(head == pat(i), "oldest line first") pop = 1; @(posedge clk); #1; end
    pop = 0;
    `CHECK(empty, "empty again")
    for (int it = 0; it < 1000; it++) begin
      push = ($urandom_range(0, 1) == 1) && model.size() < 3;
      pop  = ($urandom_range(0, 1) == 1) && model.size() > 0;
      push_data = pat(it + 10);
      push_laddr = laddr_t'($urandom_range(0, 7));
      match_laddr = laddr_t'($urandom_range(0, 7));
      #1;
      begin
        bit m; m = 0;
        foreach (mtags[k]) if (mtags[k] == match_laddr) m = 1;
        `CHECK(match_hit == m, "address match over waiting lines only")
        if (m) n_match++;
      end
      if (pop) begin `CHECK(head == model[0], "random traffic head") void'(model.pop_front()); void'(mtags.pop_front()); end
      if (push) begin model.push_back(push_data); mtags.push_back(push_laddr); end
      @(posedge clk); #1;
      `CHECK(full == (model.size() == 3) && empty == (model.size() == 0), "flags")
    end
    `CHECK(n_match > 50, "matches seen")
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
