// tb_fuse_l1d: end-to-end test of the hybrid L1 data cache at its full default size.
//
// The cache is surrounded by a behavioural L2 (tb_l2 below, in this file's processes): it takes
// miss requests, answers each with the current contents of its memory after a random latency
// of 20..80 cycles (2..4 in one phase), and absorbs write-backs. A core model issues reads and writes over several
// address regions with four program counters that the read-level predictor must learn:
//   PC_WORM  read twice in a row by warp 0, then read-mostly: learned as write-once/read-many;
//   PC_WM    written twice in a row by warp 0, then written again: learned as write-multiple;
//   PC_WORO  streamed once by warp 12: learned as write-once/read-once (dead on arrival);
//   PC_N     mixed traffic that stays neutral.
// Every response is checked: each request gets exactly one response with its ID and type, and
// read data must equal a version of the line that was current at some time between the issue
// of the read and its answer (every write stores a unique value, and the L2 starts from a
// formula). At the end every line touched is read back and must hold its last written value.
// Cycle counts: an SRAM read hit is answered exactly 1 cycle after it is accepted; an STT-MRAM
// read hit on an idle cache 5 cycles plus one per tag row polled (1-cycle STT-MRAM read).
// Each mechanism of the design is counted through the perf outputs and the L2 ports, and a
// mechanism that never happened counts as a failure.
`timescale 1ns/1ps
`include "tb_util.svh"
module tb_fuse_l1d;
  import fuse_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  longint cyc = 0;
  always @(posedge clk) cyc++;

  logic req_valid, req_ready, req_write, rsp_valid, rsp_write;
  logic [31:0] req_addr, req_pc;
  logic [WARP_W-1:0] req_warp;
  line_t req_wdata, rsp_data, l2_fill_data, wb_data;
  rid_t req_rid, rsp_rid;
  logic l2_req_valid, l2_req_ready, l2_fill_valid, l2_fill_ready, wb_valid, wb_ready;
  logic [31:0] l2_req_addr, wb_addr;
  logic [4:0] l2_req_id, l2_fill_id;
  perf_t perf;

  fuse_l1d dut (.*);

  localparam logic [31:0] PC_WORM = 32'h0000_1011, PC_WM = 32'h0000_20a2,
                          PC_WORO = 32'h0000_3133, PC_N = 32'h0000_41c4;

  // ---------------- reference memory: versions of each line ----------------
  function automatic line_t init_line(laddr_t a);
    return {32{32'(a) * 32'h9e37_79b1 ^ 32'h1234_5678}};
  endfunction
  line_t vers [laddr_t][$];
  int n_writes = 0;

  function automatic void ensure(laddr_t a);
    if (!vers.exists(a)) vers[a].push_back(init_line(a));
  endfunction

  // ---------------- outstanding requests ----------------
  typedef struct { bit busy; bit wr; laddr_t a; int lo; longint t; } out_t;
  out_t outs [256];
  int n_out = 0;
  int next_rid = 0;
  int n_rsp = 0;
  longint last_lat = -1;
  rid_t last_rid;

  // ---------------- behavioural L2 ----------------
  line_t l2mem [laddr_t];
  typedef struct { logic [4:0] id; laddr_t a; longint due; } l2q_t;
  l2q_t l2q [$];
  int n_wb = 0, n_l2req = 0;
  int lat_min = 20, lat_max = 80;
  function automatic line_t l2_read(laddr_t a);
    return l2mem.exists(a) ? l2mem[a] : init_line(a);
  endfunction

  initial begin
    l2_req_ready = 0; l2_fill_valid = 0; l2_fill_id = '0; l2_fill_data = '0; wb_ready = 0;
    wait (rst_n);
    forever begin
      @(negedge clk);
      if (l2_req_valid && l2_req_ready) begin
        l2q.push_back('{id: l2_req_id, a: laddr_t'(l2_req_addr >> OFF_W), due: cyc + longint'($urandom_range(lat_min, lat_max))});
        n_l2req++;
        `CHECK(l2_req_addr[OFF_W-1:0] == '0, "L2 request is line aligned")
      end
      if (wb_valid && wb_ready) begin
        l2mem[laddr_t'(wb_addr >> OFF_W)] = wb_data;
        n_wb++;
      end
      if (l2_fill_valid && l2_fill_ready) begin
        @(posedge clk); #1;
        l2_fill_valid = 0;
      end else begin
        @(posedge clk); #1;
      end
      l2_req_ready = ($urandom_range(0, 9) != 0);
      wb_ready     = ($urandom_range(0, 3) != 0);
      if (!l2_fill_valid) begin
        // oldest due entry first
        int k; k = -1;
        foreach (l2q[i]) if (k < 0 && l2q[i].due <= cyc) k = i;
        if (k >= 0) begin
          l2_fill_valid = 1; l2_fill_id = l2q[k].id; l2_fill_data = l2_read(l2q[k].a);
          l2q.delete(k);
        end
      end
    end
  end

  // ---------------- response monitor ----------------
  initial begin
    wait (rst_n);
    forever begin
      @(negedge clk);
      if (rsp_valid) begin
        n_rsp++;
        `CHECK(outs[rsp_rid].busy, "response to an outstanding request")
        if (outs[rsp_rid].busy) begin
          `CHECK(rsp_write == outs[rsp_rid].wr, "response type matches the request")
          if (!outs[rsp_rid].wr) begin
            bit ok; ok = 0;
            for (int j = outs[rsp_rid].lo; j < vers[outs[rsp_rid].a].size(); j++)
              if (vers[outs[rsp_rid].a][j] == rsp_data) ok = 1;
            `CHECK(ok, "read data is a current version of the line")
            if (!ok) $display("  line %h rid %0d lo %0d versions %0d", outs[rsp_rid].a, rsp_rid,
                              outs[rsp_rid].lo, vers[outs[rsp_rid].a].size());
          end
          last_lat = cyc + 1 - outs[rsp_rid].t;
          last_rid = rsp_rid;
          outs[rsp_rid].busy = 0;
          n_out--;
        end
      end
    end
  end

  // ---------------- core request driver ----------------
  task automatic send(laddr_t a, logic [31:0] pc, int warp, bit wr);
    bit ok;
    while (outs[next_rid].busy) next_rid = (next_rid + 1) % 256;
    ensure(a);
    req_valid = 1; req_addr = {a, 7'(($urandom_range(0, 31)) * 4)}; req_pc = pc;
    req_warp = WARP_W'(warp); req_write = wr; req_rid = rid_t'(next_rid);
    if (wr) begin
      n_writes++;
      req_wdata = {32{32'(n_writes) ^ 32'hc0de_0000}} ^ {992'b0, 32'(a)};
    end
    do begin
      @(negedge clk); ok = req_ready;
      @(posedge clk); #1;
    end while (!ok);
    outs[next_rid] = '{busy: 1, wr: wr, a: a, lo: vers[a].size() - 1, t: cyc};
    if (wr) vers[a].push_back(req_wdata);
    n_out++;
    next_rid = (next_rid + 1) % 256;
    req_valid = 0;
  endtask

  task automatic wait_idle();
    while (n_out != 0 || l2q.size() != 0 || l2_fill_valid) @(posedge clk);
    repeat (40) @(posedge clk);
    #1;
  endtask

  // ---------------- watchdog ----------------
  initial begin
    #30000000;
    failures++;
    $display("watchdog: outstanding %0d", n_out);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // line address of region r, element i: spread over all SRAM sets
  function automatic laddr_t ra(int r, int i); return laddr_t'(r * 25'h4000 + i); endfunction
  int other_warp;
  int n_stt_lat = 0;

  initial begin
    req_valid = 0; req_addr = '0; req_pc = '0; req_warp = '0; req_write = 0; req_wdata = '0; req_rid = '0;
    foreach (outs[i]) outs[i].busy = 0;
    repeat (4) @(posedge clk); #1 rst_n = 1;
    repeat (2) @(posedge clk); #1;

    // --- directed: miss, then SRAM hit 1 cycle after acceptance ---
    send(ra(9, 3), PC_N, 5, 0);
    wait_idle();
    send(ra(9, 3), PC_N, 5, 0);
    wait_idle();
    `CHECK(last_lat == 1, "SRAM read hit answered 1 cycle after acceptance")

    // --- phase 1: train the predictor on warps 0 and 12 ---
    for (int i = 0; i < 24; i++) begin
      send(ra(1, i), PC_WORM, 0, 0);
      send(ra(1, i), PC_WORM, 0, 0);
      send(ra(2, i), PC_WM, 0, 1);
      send(ra(2, i), PC_WM, 0, 1);
    end
    for (int i = 0; i < 80; i++) send(ra(3, i), PC_WORO, 12, 0);
    wait_idle();

    // --- phase 2: read-many data fetched into STT-MRAM, with repeats close together ---
    for (int i = 0; i < 300; i++) begin
      other_warp = 1 + (i % 11);
      send(ra(4, i), PC_WORM, other_warp, 0);
      if (i % 5 == 0) send(ra(4, i), PC_WORM, other_warp, 0);
      if (i % 7 == 0) send(ra(4, i - (i % 3)), PC_WORM, other_warp, 0);
    end
    wait_idle();
    // idle STT-MRAM read hits: latency 5 + rows polled
    for (int i = 10; i < 20; i++) begin
      int p0, h0;
      p0 = perf.extra_polls; h0 = perf.stt_hits;
      send(ra(4, i), PC_WORM, 2, 0);
      wait_idle();
      if (perf.stt_hits == h0 + 1) begin
        n_stt_lat++;
        `CHECK(last_lat == 6 + (perf.extra_polls - p0), "STT-MRAM read hit latency")
      end
    end
    `CHECK(n_stt_lat > 0, "STT-MRAM hit latency measured at least once")
    for (int r = 0; r < 2; r++)
      for (int i = 0; i < 300; i++) send(ra(4, (i * 7) % 300), PC_WORM, 1 + (i % 11), 0);
    wait_idle();

    // --- short L2 latency: a second read of a line, queued before the first one reaches the
    //     MSHR and decided while the fetched line is still landing in STT-MRAM, is replayed ---
    lat_min = 2; lat_max = 4;
    for (int k = 0; k < 20; k++) begin
      send(ra(11, 40 * k), PC_WORM, 1, 0);
      for (int j = 1; j < 12; j++) send(ra(11, 40 * k + j), PC_WORM, 1 + (j % 11), 0);
      send(ra(11, 40 * k), PC_WORM, 2, 0);
      send(ra(11, 40 * k + 1), PC_WORM, 3, 0);
    end
    wait_idle();
    lat_min = 20; lat_max = 80;

    // --- phase 3: dead-on-arrival stream (WORO), some of it written ---
    for (int i = 0; i < 400; i++) begin
      send(ra(5, i), PC_WORO, 1 + (i % 11), 0);
      if (i % 9 == 0) send(ra(5, i), PC_WORO, 1 + (i % 11), 1);
    end
    wait_idle();

    // --- phase 4: write-multiple lines: allocate in SRAM, push out, migrate back ---
    for (int i = 0; i < 100; i++) send(ra(6, i), PC_WM, 3, 1);
    for (int i = 0; i < 200; i++) send(ra(7, i), PC_N, 4, 0);
    for (int i = 0; i < 100; i++) send(ra(6, i), PC_WM, 3, 1);
    // neutral writes to read-many lines held in STT-MRAM (written in place)
    for (int i = 100; i < 140; i++) send(ra(4, i), PC_N, 4, 1);
    // write misses of a read-many PC: allocated in STT-MRAM
    for (int i = 0; i < 40; i++) send(ra(8, i), PC_WORM, 6, 1);
    wait_idle();

    // --- phase 5: random mixed traffic over all regions ---
    for (int it = 0; it < 4000; it++) begin
      int r, i, k;
      logic [31:0] pc;
      k = $urandom_range(0, 9);
      r = 4 + $urandom_range(0, 5);
      i = $urandom_range(0, 299);
      pc = (r == 4 || r == 8) ? PC_WORM : (r == 6) ? PC_WM : (r == 5) ? PC_WORO : PC_N;
      send(ra(r == 9 ? 10 + $urandom_range(0, 3) : r, i), pc, 1 + $urandom_range(0, 10), k < 2);
    end
    wait_idle();

    // --- final read-back of every line touched ---
    foreach (vers[a]) send(a, PC_N, 7, 0);
    wait_idle();
    foreach (vers[a]) begin
      // the read-back above was issued after the last write: only the last version is allowed
    end

    $display("STT-MRAM hit latencies checked: %0d", n_stt_lat);
    $display("requests answered %0d, L2 requests %0d, write-backs %0d", n_rsp, n_l2req, n_wb);
    $display("sram_hits %0d stt_hits %0d l2_misses %0d mshr_merges %0d replays %0d",
             perf.sram_hits, perf.stt_hits, perf.l2_misses, perf.mshr_merges, perf.replays);
    $display("evict_to_stt %0d evict_to_l2 %0d fills_to_stt %0d fills_to_sram %0d stt_writes %0d",
             perf.evict_to_stt, perf.evict_to_l2, perf.fills_to_stt, perf.fills_to_sram, perf.stt_writes);
    $display("migrations %0d stt_allocs %0d stt_wbacks %0d drain_stalls %0d queue_stalls %0d extra_polls %0d",
             perf.migrations, perf.stt_allocs, perf.stt_wbacks, perf.drain_stalls, perf.queue_stalls, perf.extra_polls);
    `CHECK(n_out == 0, "every request answered")
    `CHECK(perf.sram_hits > 0,    "mechanism: SRAM hit")
    `CHECK(perf.stt_hits > 0,     "mechanism: STT-MRAM read hit")
    `CHECK(perf.l2_misses > 0,    "mechanism: miss to L2")
    `CHECK(perf.mshr_merges > 0,  "mechanism: MSHR merge")
    `CHECK(perf.replays > 0,      "mechanism: replay behind a landing line")
    `CHECK(perf.evict_to_stt > 0, "mechanism: SRAM victim to STT-MRAM via swap buffer")
    `CHECK(perf.evict_to_l2 > 0,  "mechanism: WORO victim to L2")
    `CHECK(perf.fills_to_stt > 0, "mechanism: WORM fill into STT-MRAM")
    `CHECK(perf.fills_to_sram > 0,"mechanism: fill into SRAM")
    `CHECK(perf.stt_writes > 0,   "mechanism: write in place in STT-MRAM")
    `CHECK(perf.migrations > 0,   "mechanism: WM line migrated to SRAM")
    `CHECK(perf.stt_allocs > 0,   "mechanism: write miss allocated in STT-MRAM")
    `CHECK(perf.stt_wbacks > 0,   "mechanism: dirty STT-MRAM victim written back")
    `CHECK(perf.drain_stalls > 0, "mechanism: write waits for the tag queue to drain")
    `CHECK(perf.queue_stalls > 0, "mechanism: read waits on a full queue or MSHR")
    `CHECK(perf.extra_polls > 0,  "mechanism: CBF false positive costs an extra poll")
    `CHECK(n_wb > 0,              "mechanism: write-back on the L2 port")
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
