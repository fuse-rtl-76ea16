// tb_rl_sampler: random accesses from all 48 warps against a reference model of the sampler
// written as one recency-ordered list per set (front = most recent). Checks that only warps
// 0, 12, 24 and 36 are sampled, that a hit reports the stored signature and the access type,
// that an unused (U = 0) LRU entry evicted from a full set reports its signature, that a used
// entry leaves silently, and that events come one cycle after the access.
`timescale 1ns/1ps
`include "tb_util.svh"
module tb_rl_sampler;
  import fuse_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic acc_valid, acc_write, hit_ev, hit_write, evict_ev;
  logic [WARP_W-1:0] acc_warp;
  laddr_t acc_laddr;
  sig_t acc_sig, hit_sig, evict_sig;
  rl_sampler dut (.*);

  typedef struct { logic [14:0] tag; sig_t sig; bit u; } ment_t;
  ment_t model [4][$];
  int n_hit = 0, n_evict = 0, n_silent = 0;

  initial begin
    #2000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    acc_valid = 0; acc_write = 0; acc_warp = '0; acc_laddr = '0; acc_sig = '0;
    repeat (3) @(posedge clk); rst_n = 1; @(posedge clk); #1;
    for (int it = 0; it < 6000; it++) begin
      bit exp_hit, exp_ev; sig_t exp_hsig, exp_esig; bit exp_w;
      int w, s, f;
      ment_t ne;
      w = $urandom_range(0, 47);
      acc_valid = ($urandom_range(0, 7) != 0);
      acc_warp  = WARP_W'(w);
      // upper bits vary too: only the low 15 bits form the tag
      acc_laddr = {10'($urandom), 15'($urandom_range(0, 13))};
      acc_sig   = sig_t'($urandom);
      acc_write = $urandom_range(0, 1);
      exp_hit = 0; exp_ev = 0; exp_hsig = '0; exp_esig = '0; exp_w = acc_write;
      if (acc_valid && (w % 12 == 0)) begin
        s = w / 12;
        f = -1;
        foreach (model[s][i]) if (model[s][i].tag == acc_laddr[14:0]) f = i;
        if (f >= 0) begin
          exp_hit = 1; exp_hsig = model[s][f].sig;
          ne = model[s][f]; ne.sig = acc_sig; ne.u = 1;
          model[s].delete(f);
          model[s].push_front(ne);
        end else begin
          if (model[s].size() == 8) begin
            ment_t v;
            v = model[s].pop_back();
            if (!v.u) begin exp_ev = 1; exp_esig = v.sig; end else n_silent++;
          end
          ne.tag = acc_laddr[14:0]; ne.sig = acc_sig; ne.u = 0;
          model[s].push_front(ne);
        end
      end
      @(posedge clk); #1;
      `CHECK(hit_ev == exp_hit, "hit event")
      if (exp_hit) begin
        n_hit++;
        `CHECK(hit_sig == exp_hsig, "hit carries the stored signature")
        `CHECK(hit_write == exp_w, "hit carries the access type")
      end
      `CHECK(evict_ev == exp_ev, "unused-eviction event")
      if (exp_ev) begin n_evict++; `CHECK(evict_sig == exp_esig, "eviction carries the old signature") end
    end
    acc_valid = 0;
    @(posedge clk); #1;
    `CHECK(!hit_ev && !evict_ev, "no events without an access")
    `CHECK(n_hit > 100 && n_evict > 20 && n_silent > 20, "hits, unused and used evictions all seen")
    $display("hits %0d unused evictions %0d used evictions %0d", n_hit, n_evict, n_silent);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
