// rl_history_table: prediction history table of the read-level predictor.
//
// ENTRIES (512) entries indexed by the 9-bit PC signature, each a 1-bit R/W status and a 4-bit
// counter, start at counter 8 and status R. A sampler hit lowers the counter of the signature
// and sets the status to the hit's type (W for a write hit, R for a read hit); an unused sampler
// eviction raises it. Counters saturate at 0 and 15. A signature is classified:
//   counter > UNUSED_TH (14)  -> WORO (lines are never reused: evict them straight to L2)
//   counter < 1               -> WORM if the status is R, WM if it is W
//   otherwise                 -> neutral
// Two combinational query ports serve the incoming request (where to place the line) and an
// SRAM victim (whether it goes to STT-MRAM or to L2). Updates apply at the clock edge; if a hit
// and an eviction name the same signature in one cycle they cancel.
// From the paper: size, fields, reset values, threshold 14 and the class rules. The paper's
// neutral range is 2..13; counters 1 and 14 fall in no class there and are neutral here.
module rl_history_table
  import fuse_pkg::*;
#(
  parameter int unsigned ENTRIES   = 512,
  parameter int unsigned CNT_INIT  = 8,
  parameter int unsigned UNUSED_TH = 14
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      hit_ev,
  input  sig_t      hit_sig,
  input  logic      hit_write,
  input  logic      evict_ev,
  input  sig_t      evict_sig,
  input  sig_t      q0_sig,
  output rl_class_e q0_class,
  input  sig_t      q1_sig,
  output rl_class_e q1_class
);
  localparam int unsigned IW = $clog2(ENTRIES);

  logic [3:0] cnt [ENTRIES];
  logic       rw  [ENTRIES];   // 1 = W

  function automatic rl_class_e classify(logic [3:0] c, logic w);
    if (int'(c) > int'(UNUSED_TH)) return RL_WORO;
    else if (c < 4'd1)             return w ? RL_WM : RL_WORM;
    else                           return RL_NEUTRAL;
  endfunction

  assign q0_class = classify(cnt[IW'(q0_sig)], rw[IW'(q0_sig)]);
  assign q1_class = classify(cnt[IW'(q1_sig)], rw[IW'(q1_sig)]);

  logic same;
  assign same = hit_ev && evict_ev && (IW'(hit_sig) == IW'(evict_sig));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < ENTRIES; i++) begin
        cnt[i] <= 4'(CNT_INIT);
        rw[i]  <= 1'b0;
      end
    end else begin
      if (hit_ev) begin
        rw[IW'(hit_sig)] <= hit_write;
        if (!same && cnt[IW'(hit_sig)] != 4'd0) cnt[IW'(hit_sig)] <= cnt[IW'(hit_sig)] - 4'd1;
      end
      if (evict_ev && !same && cnt[IW'(evict_sig)] != 4'd15)
        cnt[IW'(evict_sig)] <= cnt[IW'(evict_sig)] + 4'd1;
    end
  end

endmodule
