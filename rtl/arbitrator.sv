// arbitrator: status registers, decision tree and data-bus ownership of the FUSE cache
// controller.
//
// The arbitrator decides, for each step of a memory reference, which path serves it. It keeps
// one status register (idle / hit / miss / busy) and one request-ID register for each of the
// three modules that report to it: the SRAM bank, the STT-MRAM bank and the associativity
// approximation logic. Its decisions are combinational (the paper's arbitration costs less than
// one cache cycle) and it has three decision points:
//   front end (after the SRAM lookup): SRAM hit -> serve from SRAM; read miss -> attach to a
//     pending MSHR entry or queue an STT-MRAM search; write miss -> wait for the tag queue to
//     drain, then queue the write for STT-MRAM;
//   STT-MRAM side (after a tag search): read hit -> serve from STT-MRAM; write hit -> migrate the
//     line to SRAM if the predictor says WM, else write in place; miss -> MSHR / L2 with the
//     destination bank chosen by the prediction (WORM -> STT-MRAM, others -> SRAM), or replay (queue
//     again) if the line is just landing or its MSHR entry has no room for another request; write miss -> allocate in the predicted bank;
//   SRAM eviction: WORO victims go to L2 (dirty) or are dropped (clean), all others go to
//     STT-MRAM through the swap buffer.
// Data bus: one response per cycle; the SRAM path has priority, the STT-MRAM path waits.
// The decision tree follows the text of the paper (its decision-tree figure is not available);
// serving WM read hits in place, rather than migrating them, is this design's choice.
module arbitrator
  import fuse_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  // ---- front end ----
  input  logic        fe_valid,
  input  logic        fe_write,
  input  logic        fe_sram_hit,
  input  rid_t        fe_rid,
  input  logic        fe_mshr_hit,
  input  logic        fe_mshr_can_merge,
  input  logic        fe_tq_full,
  input  logic        fe_tq_drained,      // queue empty and STT-MRAM side idle
  input  logic        fe_mshr_empty,
  output action_e     fe_act,
  // ---- STT-MRAM side ----
  input  logic        be_valid,
  input  tq_cmd_e     be_cmd,
  input  logic        be_hit,
  input  rid_t        be_rid,
  input  rl_class_e   be_cls,
  input  logic        be_mshr_hit,
  input  logic        be_mshr_landing,
  input  logic        be_mshr_can_merge,
  input  logic        be_mshr_full,
  input  logic        be_approx_busy,
  output action_e     be_act,
  output bank_e       be_dst,
  // ---- SRAM eviction ----
  input  logic        vic_valid,
  input  logic        vic_dirty,
  input  rl_class_e   vic_cls,
  output vic_action_e vic_act,
  // ---- data bus ----
  input  logic        fe_bus_req,
  input  logic        be_bus_req,
  output logic        fe_bus_gnt,
  output logic        be_bus_gnt,
  // ---- status registers ----
  output status_e     sram_status,
  output status_e     stt_status,
  output status_e     approx_status,
  output rid_t        sram_rid,
  output rid_t        stt_rid
);

  // Front-end decision tree.
  always_comb begin
    fe_act = A_NONE;
    if (fe_valid) begin
      if (fe_sram_hit)                       fe_act = fe_write ? A_SRAM_WRITE : A_SRAM_READ;
      else if (!fe_write) begin
        if (fe_mshr_hit && fe_mshr_can_merge) fe_act = A_MERGE;
        else if (fe_mshr_hit || fe_tq_full)  fe_act = A_STALL;
        else                                 fe_act = A_QUEUE_R;
      end else begin
        // a write on STT-MRAM data: drain the tag queue and outstanding misses first
        if (fe_tq_drained && fe_mshr_empty)  fe_act = A_QUEUE_W;
        else                                 fe_act = A_STALL;
      end
    end
  end

  // STT-MRAM side decision tree.
  always_comb begin
    be_act = A_NONE;
    be_dst = (be_cls == RL_WORM) ? DST_STT : DST_SRAM;
    if (be_valid) begin
      unique case (be_cmd)
        TQ_R: begin
          if (be_hit)                                   be_act = A_STT_READ;
          else if (be_mshr_hit && be_mshr_can_merge)    be_act = A_MERGE;
          else if (be_mshr_landing || be_mshr_hit)      be_act = A_REPLAY;
          else if (be_mshr_full)                        be_act = A_STALL;
          else                                          be_act = A_MISS_L2;
        end
        TQ_W: begin
          if (be_hit)                                   be_act = (be_cls == RL_WM) ? A_MIGRATE : A_STT_WRITE;
          else                                          be_act = (be_cls == RL_WORM) ? A_ALLOC_STT : A_ALLOC_SRAM;
        end
        default:                                        be_act = A_NONE;   // F handled by the bank
      endcase
    end
  end

  // SRAM victim.
  always_comb begin
    if (!vic_valid)                 vic_act = V_DROP;
    else if (vic_cls == RL_WORO)    vic_act = vic_dirty ? V_L2 : V_DROP;
    else                            vic_act = V_STT;
  end

  // Data bus: SRAM path first.
  assign fe_bus_gnt = fe_bus_req;
  assign be_bus_gnt = be_bus_req && !fe_bus_req;

  // Status registers.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sram_status   <= ST_IDLE;
      stt_status    <= ST_IDLE;
      approx_status <= ST_IDLE;
      sram_rid      <= '0;
      stt_rid       <= '0;
    end else begin
      if (fe_valid) begin
        sram_status <= fe_sram_hit ? ST_HIT : ST_MISS;
        sram_rid    <= fe_rid;
      end else begin
        sram_status <= ST_IDLE;
      end
      approx_status <= be_approx_busy ? ST_BUSY : (be_valid ? (be_hit ? ST_HIT : ST_MISS) : ST_IDLE);
      if (be_valid) begin
        stt_status <= be_hit ? ST_HIT : ST_MISS;
        stt_rid    <= be_rid;
      end else if (be_bus_req && !be_bus_gnt) begin
        stt_status <= ST_BUSY;
      end else begin
        stt_status <= ST_IDLE;
      end
    end
  end

endmodule
