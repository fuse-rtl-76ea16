// tb_arbitrator: walks every combination of the inputs of the three decision points (front end,
// STT-MRAM side, SRAM victim) and of the data-bus requests and compares the chosen action with
// a reference written as a priority list from the rules of the cache; then checks that the
// status registers follow hit / miss / busy one cycle after an event and record request IDs.
`timescale 1ns/1ps
`include "tb_util.svh"
module tb_arbitrator;
  import fuse_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic fe_valid, fe_write, fe_sram_hit, fe_mshr_hit, fe_mshr_can_merge, fe_tq_full, fe_tq_drained, fe_mshr_empty;
  rid_t fe_rid, be_rid, sram_rid, stt_rid;
  action_e fe_act, be_act;
  logic be_valid, be_hit, be_mshr_hit, be_mshr_landing, be_mshr_can_merge, be_mshr_full, be_approx_busy;
  tq_cmd_e be_cmd;
  rl_class_e be_cls, vic_cls;
  bank_e be_dst;
  logic vic_valid, vic_dirty;
  vic_action_e vic_act;
  logic fe_bus_req, be_bus_req, fe_bus_gnt, be_bus_gnt;
  status_e sram_status, stt_status, approx_status;
  arbitrator dut (.*);

  function automatic action_e ref_fe();
    if (!fe_valid) return A_NONE;
    if (fe_sram_hit) return fe_write ? A_SRAM_WRITE : A_SRAM_READ;
    if (fe_write) return (fe_tq_drained && fe_mshr_empty) ? A_QUEUE_W : A_STALL;
    if (fe_mshr_hit) return fe_mshr_can_merge ? A_MERGE : A_STALL;
    if (fe_tq_full) return A_STALL;
    return A_QUEUE_R;
  endfunction

  function automatic action_e ref_be();
    if (!be_valid || be_cmd == TQ_F) return A_NONE;
    if (be_cmd == TQ_W) begin
      if (be_hit) return (be_cls == RL_WM) ? A_MIGRATE : A_STT_WRITE;
      return (be_cls == RL_WORM) ? A_ALLOC_STT : A_ALLOC_SRAM;
    end
    if (be_hit) return A_STT_READ;
    if (be_mshr_hit) return be_mshr_can_merge ? A_MERGE : A_REPLAY;
    if (be_mshr_landing) return A_REPLAY;
    if (be_mshr_full) return A_STALL;
    return A_MISS_L2;
  endfunction

  initial begin
    #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [7:0] f;
    logic [9:0] b;
    {fe_valid, fe_write, fe_sram_hit, fe_mshr_hit, fe_mshr_can_merge, fe_tq_full, fe_tq_drained, fe_mshr_empty} = '0;
    {be_valid, be_hit, be_mshr_hit, be_mshr_landing, be_mshr_can_merge, be_mshr_full, be_approx_busy} = '0;
    be_cmd = TQ_R; be_cls = RL_NEUTRAL; vic_cls = RL_NEUTRAL; vic_valid = 0; vic_dirty = 0;
    fe_bus_req = 0; be_bus_req = 0; fe_rid = '0; be_rid = '0;
    repeat (3) @(posedge clk); rst_n = 1; @(posedge clk); #1;
    `CHECK(sram_status == ST_IDLE && stt_status == ST_IDLE && approx_status == ST_IDLE, "status idle after reset")
    for (int i = 0; i < 256; i++) begin
      f = 8'(i);
      {fe_valid, fe_write, fe_sram_hit, fe_mshr_hit, fe_mshr_can_merge, fe_tq_full, fe_tq_drained, fe_mshr_empty} = f;
      #1;
      `CHECK(fe_act == ref_fe(), "front-end decision")
    end
    fe_valid = 0;
    for (int c = 0; c < 3; c++)
      for (int k = 0; k < 4; k++)
        for (int i = 0; i < 64; i++) begin
          be_cmd = tq_cmd_e'(c); be_cls = rl_class_e'(k);
          {be_valid, be_hit, be_mshr_hit, be_mshr_landing, be_mshr_can_merge, be_mshr_full} = 6'(i);
          #1;
          `CHECK(be_act == ref_be(), "STT-MRAM-side decision")
          `CHECK(be_dst == ((be_cls == RL_WORM) ? DST_STT : DST_SRAM), "destination bank from the read level")
        end
    for (int i = 0; i < 16; i++) begin
      {vic_valid, vic_dirty, vic_cls} = 4'(i);
      #1;
      if (!vic_valid) `CHECK(vic_act == V_DROP, "no victim: nothing to do")
      else if (vic_cls == RL_WORO) `CHECK(vic_act == (vic_dirty ? V_L2 : V_DROP), "WORO victim leaves for L2")
      else `CHECK(vic_act == V_STT, "other victims go to STT-MRAM")
    end
    for (int i = 0; i < 4; i++) begin
      {fe_bus_req, be_bus_req} = 2'(i);
      #1;
      `CHECK(fe_bus_gnt == fe_bus_req && be_bus_gnt == (be_bus_req && !fe_bus_req), "SRAM path has bus priority")
    end
    // status registers
    {be_valid, be_hit, be_mshr_hit, be_mshr_landing, be_mshr_can_merge, be_mshr_full} = '0;
    fe_bus_req = 0; be_bus_req = 0;
    @(posedge clk); #1;
    fe_valid = 1; fe_sram_hit = 1; fe_rid = 8'h3c; be_valid = 1; be_hit = 0; be_rid = 8'h5a; be_cmd = TQ_R;
    @(posedge clk); #1;
    `CHECK(sram_status == ST_HIT && sram_rid == 8'h3c, "SRAM status hit with its request ID")
    `CHECK(stt_status == ST_MISS && stt_rid == 8'h5a && approx_status == ST_MISS, "STT-MRAM status miss")
    fe_sram_hit = 0; be_valid = 0; be_approx_busy = 1; fe_bus_req = 1; be_bus_req = 1;
    @(posedge clk); #1;
    `CHECK(sram_status == ST_MISS && approx_status == ST_BUSY && stt_status == ST_BUSY, "miss / busy status")
    fe_valid = 0; be_approx_busy = 0; fe_bus_req = 0; be_bus_req = 0;
    @(posedge clk); #1;
    `CHECK(sram_status == ST_IDLE && stt_status == ST_IDLE && approx_status == ST_IDLE, "status back to idle")
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
