// tb_rl_history_table: random hit/eviction events against a reference array of counters and
// R/W bits; every cycle both query ports are compared with the class rules (counter above 14:
// WORO; counter 0: WORM after a read hit, WM after a write hit; else neutral). Also checks the
// reset state (counter 8, neutral for every signature) and the saturation at 0 and 15.
`timescale 1ns/1ps
`include "tb_util.svh"
module tb_rl_history_table;
  import fuse_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic hit_ev, hit_write, evict_ev;
  sig_t hit_sig, evict_sig, q0_sig, q1_sig;
  rl_class_e q0_class, q1_class;
  rl_history_table dut (.*);

  int cnt [512];
  bit rw [512];
  int seen [4];

  function automatic rl_class_e cls(int s);
    if (cnt[s] > 14) return RL_WORO;
    if (cnt[s] < 1)  return rw[s] ? RL_WM : RL_WORM;
    return RL_NEUTRAL;
  endfunction

  initial begin
    #3000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    hit_ev = 0; evict_ev = 0; hit_sig = '0; evict_sig = '0; hit_write = 0; q0_sig = '0; q1_sig = '0;
    foreach (cnt[i]) begin cnt[i] = 8; rw[i] = 0; end
    repeat (3) @(posedge clk); rst_n = 1; @(posedge clk); #1;
    for (int s = 0; s < 512; s += 2) begin
      q0_sig = sig_t'(s); q1_sig = sig_t'(s + 1); #1;
      `CHECK(q0_class == RL_NEUTRAL && q1_class == RL_NEUTRAL, "neutral after reset")
    end
    // Drive a few signatures to the extremes first.
    for (int i = 0; i < 20; i++) begin
      hit_ev = 1; hit_sig = 9'd5; hit_write = 0; evict_ev = 1; evict_sig = 9'd6;
      @(posedge clk); #1;
      hit_ev = 1; hit_sig = 9'd7; hit_write = 1; evict_ev = 0;
      @(posedge clk); #1;
    end
    hit_ev = 0; evict_ev = 0;
    q0_sig = 9'd5; q1_sig = 9'd6; #1;
    `CHECK(q0_class == RL_WORM, "read-reused PC becomes WORM")
    `CHECK(q1_class == RL_WORO, "never-reused PC becomes WORO")
    q0_sig = 9'd7; #1;
    `CHECK(q0_class == RL_WM, "write-reused PC becomes WM")
    cnt[5] = 0; cnt[6] = 15; cnt[7] = 0; rw[7] = 1;
    // Random traffic over a small signature range so that counters move far.
    for (int it = 0; it < 20000; it++) begin
      hit_ev    = $urandom_range(0, 1);
      hit_sig   = sig_t'($urandom_range(0, 15));
      hit_write = $urandom_range(0, 1);
      evict_ev  = $urandom_range(0, 1);
      evict_sig = sig_t'($urandom_range(0, 15));
      q0_sig    = sig_t'($urandom_range(0, 15));
      q1_sig    = sig_t'($urandom_range(0, 511));
      #1;
      `CHECK(q0_class == cls(q0_sig) && q1_class == cls(q1_sig), "class of queried signatures")
      seen[q0_class]++;
      if (hit_ev && evict_ev && hit_sig == evict_sig) begin
        rw[hit_sig] = hit_write;
      end else begin
        if (hit_ev) begin rw[hit_sig] = hit_write; if (cnt[hit_sig] > 0) cnt[hit_sig]--; end
        if (evict_ev && cnt[evict_sig] < 15) cnt[evict_sig]++;
      end
      @(posedge clk); #1;
    end
    `CHECK(seen[RL_WORM] > 0 && seen[RL_WM] > 0 && seen[RL_WORO] > 0 && seen[RL_NEUTRAL] > 0,
           "all four classes seen in random traffic")
    $display("classes seen: neutral %0d worm %0d wm %0d woro %0d", seen[0], seen[1], seen[2], seen[3]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
