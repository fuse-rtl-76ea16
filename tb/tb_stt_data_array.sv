// tb_stt_data_array: write/read of the STT-MRAM data array, 5-cycle write busy window,
// 1-cycle read latency, data visible only after the write completes.
`timescale 1ns/1ps
`include "tb_util.svh"
module tb_stt_data_array;
  import fuse_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic rd_en, wr_en, busy;
  logic [8:0] rd_line, wr_line;
  line_t rdata, wr_data;
  stt_data_array dut (.*);

  function automatic line_t pat(int i); return {32{32'(i) * 32'h9e3779b9}}; endfunction

  initial begin
    #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int n;
    rd_en = 0; wr_en = 0; rd_line = 0; wr_line = 0; wr_data = 0;
    repeat (3) @(posedge clk); rst_n = 1; @(posedge clk); #1;
    for (int i = 0; i < 40; i++) begin
      wr_line = 9'(i * 13); wr_data = pat(i); wr_en = 1;
      @(posedge clk); #1 wr_en = 0;
      n = 0;
      while (busy) begin n++; @(posedge clk); #1; end
      `CHECK(n == 5, $sformatf("write busy for 5 cycles (got %0d)", n))
    end
    for (int i = 0; i < 40; i++) begin
      rd_line = 9'(i * 13); rd_en = 1; @(posedge clk); #1 rd_en = 0;
      `CHECK(rdata == pat(i), "read data after one cycle")
    end
    // old data still visible during a write, new after
    wr_line = 9'd0; wr_data = ~pat(0); wr_en = 1; @(posedge clk); #1 wr_en = 0;
    `CHECK(busy, "busy right after write")
    while (busy) @(posedge clk); #1;
    rd_line = 0; rd_en = 1; @(posedge clk); #1 rd_en = 0;
    `CHECK(rdata == ~pat(0), "overwrite visible after completion")
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
