// tb_nvm_cbf: random increment/decrement/replace traffic on the counting Bloom filter array,
// compared with a reference model of the counters (same hash formula written out bit by bit,
// saturating 2-bit counters). Also checks that a member is never reported negative.
`timescale 1ns/1ps
`include "tb_util.svh"
module tb_nvm_cbf;
  import fuse_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  laddr_t test_laddr, inc_laddr, dec_laddr;
  logic [127:0] test_pos;
  logic [6:0] upd_cbf;
  logic inc_en, dec_en;
  nvm_cbf dut (.*);

  localparam int L = 64;             // counters per filter (module default)
  localparam int KB = $clog2(L);
  int ref_cnt [128][L];
  laddr_t members [128][$];

  // hash k: top KB bits of (a * M[k] + k) mod 2^25
  function automatic int h(laddr_t a, int k);
    longint unsigned m [3] = '{64'h1E3779B, 64'h15A4E35, 64'h0C2B2AF};
    longint unsigned p;
    p = ((longint'(a) * m[k]) + k) % (64'd1 << 25);
    return int'(p >> (25 - KB));
  endfunction

  task automatic ref_update(int c, bit inc, laddr_t ia, bit dec, laddr_t da);
    int d[L];
    for (int j = 0; j < L; j++) d[j] = 0;
    for (int k = 0; k < 3; k++) begin
      if (inc) d[h(ia, k)]++;
      if (dec && ref_cnt[c][h(da, k)] != 3) d[h(da, k)]--;
    end
    for (int j = 0; j < L; j++) begin
      int v = ref_cnt[c][j] + d[j];
      ref_cnt[c][j] = (v > 3) ? 3 : (v < 0 ? 0 : v);
    end
  endtask

  function automatic bit ref_pos(int c, laddr_t a);
    for (int k = 0; k < 3; k++) if (ref_cnt[c][h(a, k)] == 0) return 0;
    return 1;
  endfunction

  initial begin
    #2000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int c, n, p;
    laddr_t a, old;
    bit ok;
    for (int i = 0; i < 128; i++) for (int j = 0; j < L; j++) ref_cnt[i][j] = 0;
    inc_en = 0; dec_en = 0; upd_cbf = 0; inc_laddr = 0; dec_laddr = 0; test_laddr = 0;
    repeat (3) @(posedge clk); rst_n = 1; @(posedge clk); #1;
    test_laddr = 25'h123456; #1 `CHECK(test_pos == '0, "empty filters are all negative")
    for (int it = 0; it < 1500; it++) begin
      c = $urandom_range(0, 127);
      a = laddr_t'($urandom);
      n = members[c].size();
      upd_cbf = 7'(c);
      if (n >= 4 || (n > 0 && $urandom_range(0, 3) == 0)) begin
        // replace or remove a member
        p = $urandom_range(0, n - 1);
        old = members[c][p];
        members[c].delete(p);
        dec_en = 1; dec_laddr = old;
        if ($urandom_range(0, 1)) begin inc_en = 1; inc_laddr = a; members[c].push_back(a); end
      end else begin
        inc_en = 1; inc_laddr = a; members[c].push_back(a);
      end
      ref_update(c, inc_en, inc_laddr, dec_en, dec_laddr);
      @(posedge clk); #1 inc_en = 0; dec_en = 0;
      // test a member and a random address against every filter
      if (members[c].size() > 0) begin
        test_laddr = members[c][0]; #1
        `CHECK(test_pos[c], "member is positive (no false negative)")
      end
      test_laddr = laddr_t'($urandom); #1
      ok = 1;
      for (int f = 0; f < 128; f++) if (test_pos[f] != ref_pos(f, test_laddr)) ok = 0;
      `CHECK(ok, "all 128 filters match the reference counters")
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
