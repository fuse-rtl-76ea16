// fuse_l1d: FUSE, a hybrid SRAM + STT-MRAM L1 data cache for one GPU streaming multiprocessor.
//
// Structure. A 16 KB 2-way SRAM bank (sram_bank) holds lines that are written often; a 64 KB
// STT-MRAM bank (stt_data_array + assoc_approx) holds lines that are written once and read
// many times. STT-MRAM is denser but a write takes 5 cycles, so every STT-MRAM operation goes
// through a 16-entry tag queue (tag_queue) and every line written into it waits in a 3-line
// swap buffer (swap_buffer): the SRAM side never waits for an STT-MRAM write. The STT-MRAM bank
// is fully associative; its tag array is searched four tags per cycle, guided by 128 counting
// Bloom filters. A PC-indexed read-level predictor (rl_sampler + rl_history_table) labels each
// request WORM / WM / WORO / neutral, and the arbitrator uses the label to place fills (WORM ->
// STT-MRAM, others -> SRAM), to route SRAM victims (WORO -> L2, others -> STT-MRAM) and to pull
// written lines back from STT-MRAM into SRAM (WM). Misses are recorded in the MSHR (mshr) whose
// destination bits name the bank the fill goes to.
//
// Two engines run in parallel:
//  * the front end takes one core request at a time (req_valid/req_ready), looks it up in SRAM
//    in the next cycle and either answers it (hit), attaches it to a pending miss, or queues an
//    R command for STT-MRAM and moves on to the next request. A write that misses SRAM waits
//    until the tag queue, the STT-MRAM side and the MSHR are empty, then queues a W command and
//    waits for it. A request that has to wait (queue or MSHR full, write drain) is held and
//    looked up again; L2 fills (l2_fill_valid/ready) are taken in between and installed, since
//    the held request may be waiting for exactly that fill.
//  * the STT-MRAM side pops the tag queue, runs the tag search, then reads (R hit), fetches
//    (R miss: MSHR + L2 request), writes in place or migrates (W), or moves the swap buffer head
//    into STT-MRAM (F), writing back a dirty FIFO victim to L2 first.
// Responses (rsp_valid, one per cycle, no back-pressure) carry the request ID; a write is
// answered with an acknowledgement (rsp_write = 1). The SRAM path owns the response bus first.
// Lines move whole (128 bytes) in one clock; the paper's 700 MHz 128-byte core bus and 1.4 GHz
// 64-byte internal bus are not modelled. L2 requests (l2_req_*) carry an MSHR index that the
// fill must return; write-backs leave on wb_* (valid/ready).
// The arbitrator's status registers are kept for observability and drive no logic here, hence
// the lint notes on unused signals; the low address bits and upper PC bits are unused by design.
// Sizes, latencies and the placement rules follow the paper. The interfaces, the drain rule for
// writes, fills to STT-MRAM going through the swap buffer, replaying reads that meet a line
// still landing in STT-MRAM, and serving WM read hits in place are this design's choices.
module fuse_l1d
  import fuse_pkg::*;
#(
  parameter int unsigned SRAM_SETS  = 64,
  parameter int unsigned SRAM_WAYS  = 2,
  parameter int unsigned STT_LINES  = 512,
  parameter int unsigned STT_WR_CYC = 5,
  parameter int unsigned N_CMP      = 4,
  parameter int unsigned CBF_LEN    = 64,
  parameter int unsigned N_HASH     = 3,
  parameter int unsigned TQ_DEPTH   = 16,
  parameter int unsigned SB_ENTRIES = 3,
  parameter int unsigned MSHR_N     = 32,
  parameter int unsigned MSHR_MERGE = 8,
  parameter int unsigned PHT_N      = 512,
  parameter int unsigned UNUSED_TH  = 14
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // core request
  input  logic                      req_valid,
  output logic                      req_ready,
  input  logic [ADDR_W-1:0]         req_addr,
  input  logic [31:0]               req_pc,
  input  logic [WARP_W-1:0]         req_warp,
  input  logic                      req_write,
  input  line_t                     req_wdata,
  input  rid_t                      req_rid,
  // core response
  output logic                      rsp_valid,
  output rid_t                      rsp_rid,
  output logic                      rsp_write,
  output line_t                     rsp_data,
  // L2 miss requests and fills
  output logic                      l2_req_valid,
  input  logic                      l2_req_ready,
  output logic [ADDR_W-1:0]         l2_req_addr,
  output logic [$clog2(MSHR_N)-1:0] l2_req_id,
  input  logic                      l2_fill_valid,
  output logic                      l2_fill_ready,
  input  logic [$clog2(MSHR_N)-1:0] l2_fill_id,
  input  line_t                     l2_fill_data,
  // write-backs to L2
  output logic                      wb_valid,
  input  logic                      wb_ready,
  output logic [ADDR_W-1:0]         wb_addr,
  output line_t                     wb_data,
  // event counters
  output perf_t                     perf
);
  localparam int unsigned SW_W  = $clog2(SRAM_WAYS);
  localparam int unsigned LN_W  = $clog2(STT_LINES);
  localparam int unsigned MI_W  = $clog2(MSHR_N);
  localparam int unsigned MM_W  = $clog2(MSHR_MERGE) + 1;

  // =====================================================================================
  // Sub-blocks and their control nets
  // =====================================================================================
  typedef enum logic [2:0] {FE_IDLE, FE_LOOK, FE_WWAIT, FE_FILL, FE_INST, FE_RESP} fe_state_e;
  fe_state_e fe_st;

  // registered core request
  laddr_t    rq_laddr;
  sig_t      rq_sig;
  logic      rq_write;
  line_t     rq_wdata;
  rid_t      rq_rid;

  // line being installed into SRAM and responses to send
  laddr_t    in_laddr;
  line_t     in_data;
  logic      in_dirty;
  sig_t      in_sig;
  logic      in_is_fill;         // 1: L2 fill, 0: write allocation/migration
  logic [MI_W-1:0] fill_id;
  line_t     fill_data;
  rid_t      rs_rid [MSHR_MERGE];
  logic [MM_W-1:0] rs_n, rs_k;
  logic      rs_write;
  line_t     rs_data;
  logic      rs_rel;              // free the MSHR entry after the last response

  typedef enum logic [3:0] {
    BE_IDLE, BE_SRCH, BE_DEC, BE_RD, BE_RSP, BE_WR, BE_INS, BE_VRD, BE_WB, BE_INSW, BE_ACK
  } be_state_e;
  be_state_e be_st;

  tq_entry_t cur_q;
  logic      be_hit_q;
  logic [LN_W-1:0] be_line_q;
  logic      be_use_rq;    // data to write comes from the core write (W), not the swap buffer

  // signals from the STT-MRAM side to the front end
  logic      be_install;          // W: install rq line in SRAM
  logic      be_wdone;            // W: finished in STT-MRAM, answered

  // SRAM bank
  laddr_t            s_lk_laddr;
  logic              s_lk_hit;
  logic [SW_W-1:0]   s_lk_way;
  line_t             s_lk_rdata;
  logic              s_lk_dirty;
  logic              s_touch, s_wr, s_fill;
  laddr_t            s_fill_laddr;
  line_t             s_fill_data;
  logic              s_fill_dirty;
  sig_t              s_fill_sig;
  logic              s_vic_valid, s_vic_dirty;
  laddr_t            s_vic_laddr;
  line_t             s_vic_data;
  sig_t              s_vic_sig;

  // STT-MRAM data array
  logic              d_rd, d_wr, d_busy;
  logic [LN_W-1:0]   d_rd_line, d_wr_line;
  line_t             d_rdata, d_wdata;

  // associativity approximation
  logic              a_start, a_busy, a_done, a_hit, a_dirty;
  logic [LN_W-1:0]   a_line, a_ins_line;
  logic [7:0]        a_polls;
  logic              a_vic_valid, a_vic_dirty;
  laddr_t            a_vic_laddr;
  logic              a_ins, a_inv, a_set;
  laddr_t            a_ins_laddr;
  logic              a_ins_dirty;
  sig_t              a_ins_sig;
  logic [LN_W-1:0]   a_inv_line, a_set_line;
  sig_t              a_set_sig;

  // tag queue and swap buffer
  logic              tq_push, tq_pop, tq_empty, tq_full_raw, tq_drained;
  tq_entry_t         tq_in, tq_head;
  logic [$clog2(TQ_DEPTH):0] tq_count;
  logic              sb_push, sb_pop, sb_empty, sb_full;
  line_t             sb_in, sb_head;
  laddr_t            sb_in_laddr;
  logic              sb_match;

  // predictor
  logic              p_hit_ev, p_hit_write, p_evict_ev;
  sig_t              p_hit_sig, p_evict_sig;
  rl_class_e         p_req_cls, p_vic_cls;
  sig_t              p_req_sig;

  // MSHR
  laddr_t            m_lk_laddr, m_lk2_laddr;
  logic              m_lk_hit, m_lk_landing, m_lk_can_merge;
  logic              m_lk2_hit, m_lk2_landing, m_lk2_can_merge;
  logic [MI_W-1:0]   m_lk_idx, m_lk2_idx, m_alloc_idx;
  logic              m_full, m_empty;
  logic [MI_W:0]     m_free;
  logic              m_alloc, m_merge, m_land, m_rel, m_rel2;
  bank_e             m_alloc_dst;
  logic [MI_W-1:0]   m_merge_idx, m_rd_idx, m_land_idx, m_rel_idx, m_rel2_idx;
  rid_t              m_merge_rid;
  laddr_t            m_rd_laddr, m_l2_laddr;
  bank_e             m_rd_dst;
  sig_t              m_rd_sig;
  logic [MM_W-1:0]   m_rd_nrid;
  rid_t              m_rd_rid [MSHR_MERGE];

  // arbitrator
  action_e           fe_act, be_act;
  bank_e             be_dst;
  vic_action_e       vic_act;
  logic              fe_bus_req, be_bus_req, fe_bus_gnt, be_bus_gnt;
  status_e           st_sram, st_stt, st_approx;
  rid_t              st_sram_rid, st_stt_rid;

  sram_bank #(.SETS(SRAM_SETS), .WAYS(SRAM_WAYS)) u_sram (
    .clk, .rst_n,
    .lk_laddr (s_lk_laddr), .lk_hit (s_lk_hit), .lk_way (s_lk_way), .lk_rdata (s_lk_rdata),
    .lk_dirty (s_lk_dirty),
    .touch_en (s_touch), .touch_laddr (s_lk_laddr), .touch_way (s_lk_way),
    .wr_en (s_wr), .wr_laddr (s_lk_laddr), .wr_way (s_lk_way), .wr_data (rq_wdata), .wr_sig (rq_sig),
    .fill_en (s_fill), .fill_laddr (s_fill_laddr), .fill_data (s_fill_data),
    .fill_dirty (s_fill_dirty), .fill_sig (s_fill_sig),
    .vic_valid (s_vic_valid), .vic_laddr (s_vic_laddr), .vic_data (s_vic_data),
    .vic_dirty (s_vic_dirty), .vic_sig (s_vic_sig)
  );

  stt_data_array #(.LINES(STT_LINES), .WR_CYCLES(STT_WR_CYC)) u_stt_data (
    .clk, .rst_n,
    .rd_en (d_rd), .rd_line (d_rd_line), .rdata (d_rdata),
    .wr_en (d_wr), .wr_line (d_wr_line), .wr_data (d_wdata), .busy (d_busy)
  );

  assoc_approx #(.LINES(STT_LINES), .N_CMP(N_CMP), .CBF_LEN(CBF_LEN), .N_HASH(N_HASH)) u_approx (
    .clk, .rst_n,
    .srch_start (a_start), .srch_laddr (tq_head.laddr), .srch_busy (a_busy), .srch_done (a_done),
    .srch_hit (a_hit), .srch_line (a_line), .srch_dirty (a_dirty), .srch_polls (a_polls),
    .ins_line (a_ins_line), .vic_valid (a_vic_valid), .vic_laddr (a_vic_laddr), .vic_dirty (a_vic_dirty),
    .ins_en (a_ins), .ins_laddr (a_ins_laddr), .ins_dirty (a_ins_dirty), .ins_sig (a_ins_sig),
    .inv_en (a_inv), .inv_line (a_inv_line),
    .set_en (a_set), .set_line (a_set_line), .set_sig (a_set_sig)
  );

  tag_queue #(.DEPTH(TQ_DEPTH)) u_tq (
    .clk, .rst_n,
    .push (tq_push), .push_entry (tq_in), .pop (tq_pop), .head (tq_head),
    .empty (tq_empty), .full (tq_full_raw), .drained (tq_drained), .count (tq_count)
  );

  swap_buffer #(.ENTRIES(SB_ENTRIES)) u_sb (
    .clk, .rst_n,
    .push (sb_push), .push_data (sb_in), .push_laddr (sb_in_laddr), .pop (sb_pop), .head (sb_head),
    .empty (sb_empty), .full (sb_full), .match_laddr (cur_q.laddr), .match_hit (sb_match)
  );

  rl_sampler u_sampler (
    .clk, .rst_n,
    .acc_valid (req_valid && req_ready), .acc_warp (req_warp), .acc_laddr (req_addr[ADDR_W-1:OFF_W]),
    .acc_sig (p_req_sig), .acc_write (req_write),
    .hit_ev (p_hit_ev), .hit_sig (p_hit_sig), .hit_write (p_hit_write),
    .evict_ev (p_evict_ev), .evict_sig (p_evict_sig)
  );
  assign p_req_sig = req_pc[SIG_W-1:0];

  rl_history_table #(.ENTRIES(PHT_N), .UNUSED_TH(UNUSED_TH)) u_pht (
    .clk, .rst_n,
    .hit_ev (p_hit_ev), .hit_sig (p_hit_sig), .hit_write (p_hit_write),
    .evict_ev (p_evict_ev), .evict_sig (p_evict_sig),
    .q0_sig (rq_sig), .q0_class (p_req_cls),
    .q1_sig (s_vic_sig), .q1_class (p_vic_cls)
  );

  mshr #(.ENTRIES(MSHR_N), .MERGE(MSHR_MERGE)) u_mshr (
    .clk, .rst_n,
    .lk_laddr (m_lk_laddr), .lk_hit (m_lk_hit), .lk_idx (m_lk_idx), .lk_landing (m_lk_landing),
    .lk_can_merge (m_lk_can_merge),
    .lk2_laddr (m_lk2_laddr), .lk2_hit (m_lk2_hit), .lk2_idx (m_lk2_idx), .lk2_landing (m_lk2_landing),
    .lk2_can_merge (m_lk2_can_merge),
    .full (m_full), .empty (m_empty), .free_cnt (m_free), .alloc_idx (m_alloc_idx),
    .alloc_en (m_alloc), .alloc_laddr (cur_q.laddr), .alloc_dst (m_alloc_dst),
    .alloc_rid (cur_q.rid), .alloc_sig (cur_q.sig),
    .merge_en (m_merge), .merge_idx (m_merge_idx), .merge_rid (m_merge_rid),
    .l2_req_valid (l2_req_valid), .l2_req_ready (l2_req_ready), .l2_req_laddr (m_l2_laddr),
    .l2_req_id (l2_req_id),
    .rd_idx (m_rd_idx), .rd_laddr (m_rd_laddr), .rd_dst (m_rd_dst), .rd_sig (m_rd_sig),
    .rd_nrid (m_rd_nrid), .rd_rid (m_rd_rid),
    .land_en (m_land), .land_idx (m_land_idx),
    .rel_en (m_rel), .rel_idx (m_rel_idx), .rel2_en (m_rel2), .rel2_idx (m_rel2_idx)
  );
  assign l2_req_addr = {m_l2_laddr, {OFF_W{1'b0}}};

  // =====================================================================================
  // Front end
  // =====================================================================================

  // tag queue room for the front end: one slot stays free for STT-MRAM-side replays
  logic      fe_tq_full;
  assign fe_tq_full = (int'(tq_count) >= int'(TQ_DEPTH) - 1);

  // a read may be queued only while every queued read is sure of an MSHR entry
  logic      fe_room;
  assign fe_room = !fe_tq_full && (int'(m_free) > int'(tq_count) + 1);

  logic      be_idle;
  logic      fe_push_r, fe_push_w, fe_push_f;
  logic      fe_merge;
  logic      fe_wb_req;
  logic      inst_go;             // FE_INST: victim handled, fill SRAM now
  logic      fill_stt_go;         // FE_FILL to STT: room for swap buffer + F

  // a stalled request is held in rq_* and looked up again, with L2 fills served in between
  // (a fill may be what the stalled request waits for)
  logic      rq_hold;
  assign req_ready     = (fe_st == FE_IDLE) && !l2_fill_valid && !rq_hold;
  assign l2_fill_ready = (fe_st == FE_IDLE);

  // SRAM lookup address and MSHR front-end lookup
  always_comb begin
    unique case (fe_st)
      FE_FILL: s_lk_laddr = m_rd_laddr;
      FE_INST: s_lk_laddr = in_laddr;
      default: s_lk_laddr = rq_laddr;
    endcase
  end
  assign m_lk_laddr = rq_laddr;
  assign m_rd_idx   = fill_id;

  arbitrator u_arb (
    .clk, .rst_n,
    .fe_valid (fe_st == FE_LOOK), .fe_write (rq_write), .fe_sram_hit (s_lk_hit), .fe_rid (rq_rid),
    .fe_mshr_hit (m_lk_hit), .fe_mshr_can_merge (m_lk_can_merge), .fe_tq_full (!fe_room),
    .fe_tq_drained (tq_drained && be_idle), .fe_mshr_empty (m_empty),
    .fe_act (fe_act),
    .be_valid (be_st == BE_DEC), .be_cmd (cur_q.cmd), .be_hit (be_hit_q), .be_rid (cur_q.rid),
    .be_cls (cur_q.cls), .be_mshr_hit (m_lk2_hit), .be_mshr_landing (m_lk2_landing || sb_match),
    .be_mshr_can_merge (m_lk2_can_merge), .be_mshr_full (m_full), .be_approx_busy (a_busy),
    .be_act (be_act), .be_dst (be_dst),
    .vic_valid (s_vic_valid), .vic_dirty (s_vic_dirty), .vic_cls (p_vic_cls), .vic_act (vic_act),
    .fe_bus_req (fe_bus_req), .be_bus_req (be_bus_req), .fe_bus_gnt (fe_bus_gnt), .be_bus_gnt (be_bus_gnt),
    .sram_status (st_sram), .stt_status (st_stt), .approx_status (st_approx),
    .sram_rid (st_sram_rid), .stt_rid (st_stt_rid)
  );

  // be_mshr_landing above also covers a line waiting in the swap buffer: a read that misses in
  // STT-MRAM while its line sits there is queued again behind the F command, so it never
  // fetches from L2 a line whose (possibly dirty) copy is still on its way into STT-MRAM.

  // SRAM victim routing during an install
  logic vic_room;
  always_comb begin
    unique case (vic_act)
      V_STT:   vic_room = !sb_full && !fe_tq_full;
      V_L2:    vic_room = wb_ready;
      default: vic_room = 1'b1;
    endcase
  end

  always_comb begin
    fe_push_r   = (fe_st == FE_LOOK) && (fe_act == A_QUEUE_R);
    fe_push_w   = (fe_st == FE_LOOK) && (fe_act == A_QUEUE_W);
    fe_merge    = (fe_st == FE_LOOK) && (fe_act == A_MERGE);
    // an install into SRAM whose line is already there (a second fetch) only answers
    inst_go     = (fe_st == FE_INST) && !(in_is_fill && s_lk_hit) && vic_room;
    fill_stt_go = (fe_st == FE_FILL) && (m_rd_dst == DST_STT) && !s_lk_hit && !sb_full && !fe_tq_full;
    fe_push_f   = (inst_go && vic_act == V_STT) || fill_stt_go;
    fe_wb_req   = (fe_st == FE_INST) && !(in_is_fill && s_lk_hit) && (vic_act == V_L2);

    s_touch      = (fe_st == FE_LOOK) && (fe_act == A_SRAM_READ);
    s_wr         = (fe_st == FE_LOOK) && (fe_act == A_SRAM_WRITE);
    s_fill       = inst_go;
    s_fill_laddr = in_laddr;
    s_fill_data  = in_data;
    s_fill_dirty = in_dirty;
    s_fill_sig   = in_sig;

    sb_push = (inst_go && vic_act == V_STT) || fill_stt_go;
    sb_in   = fill_stt_go ? fill_data : s_vic_data;
    sb_in_laddr = fill_stt_go ? m_rd_laddr : s_vic_laddr;

    m_land     = (fe_st == FE_FILL);
    m_land_idx = fill_id;
    m_rel      = (fe_st == FE_RESP) && (rs_k + 1'b1 >= rs_n) && rs_rel;
    m_rel_idx  = fill_id;
  end

  // response bus
  always_comb begin
    fe_bus_req = ((fe_st == FE_LOOK) && (fe_act inside {A_SRAM_READ, A_SRAM_WRITE})) ||
                 (fe_st == FE_RESP);
    rsp_valid  = 1'b0;
    rsp_rid    = '0;
    rsp_write  = 1'b0;
    rsp_data   = s_lk_rdata;
    if (fe_bus_gnt) begin
      rsp_valid = 1'b1;
      if (fe_st == FE_LOOK) begin
        rsp_rid   = rq_rid;
        rsp_write = rq_write;
        rsp_data  = s_lk_rdata;
      end else begin
        rsp_rid   = rs_rid[rs_k[MM_W-2:0]];
        rsp_write = rs_write;
        rsp_data  = rs_data;
      end
    end else if (be_bus_gnt) begin
      rsp_valid = 1'b1;
      rsp_rid   = cur_q.rid;
      rsp_write = (cur_q.cmd == TQ_W);
      rsp_data  = d_rdata;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fe_st      <= FE_IDLE;
      rq_laddr   <= '0;
      rq_sig     <= '0;
      rq_write   <= 1'b0;
      rq_rid     <= '0;
      in_laddr   <= '0;
      in_dirty   <= 1'b0;
      in_sig     <= '0;
      in_is_fill <= 1'b0;
      fill_id    <= '0;
      rs_n       <= '0;
      rs_k       <= '0;
      rs_write   <= 1'b0;
      rs_rel     <= 1'b0;
      rq_hold    <= 1'b0;
    end else begin
      unique case (fe_st)
        FE_IDLE: begin
          if (l2_fill_valid) begin
            fill_id <= l2_fill_id;
            fe_st   <= FE_FILL;
          end else if (rq_hold) begin
            fe_st   <= FE_LOOK;
          end else if (req_valid) begin
            rq_laddr <= req_addr[ADDR_W-1:OFF_W];
            rq_sig   <= p_req_sig;
            rq_write <= req_write;
            rq_rid   <= req_rid;
            fe_st    <= FE_LOOK;
          end
        end
        FE_LOOK: begin
          rq_hold <= (fe_act == A_STALL);
          unique case (fe_act)
            A_QUEUE_W: fe_st <= FE_WWAIT;
            default:   fe_st <= FE_IDLE;
          endcase
        end
        FE_WWAIT: begin
          if (be_install) begin
            in_laddr   <= rq_laddr;
            in_dirty   <= 1'b1;
            in_sig     <= rq_sig;
            in_is_fill <= 1'b0;
            rs_rid[0]  <= rq_rid;
            rs_n       <= MM_W'(1);
            rs_k       <= '0;
            rs_write   <= 1'b1;
            rs_rel     <= 1'b0;
            fe_st      <= FE_INST;
          end else if (be_wdone) begin
            fe_st <= FE_IDLE;
          end
        end
        FE_FILL: begin
          for (int m = 0; m < MSHR_MERGE; m++) rs_rid[m] <= m_rd_rid[m];
          rs_n     <= m_rd_nrid;
          rs_k     <= '0;
          rs_write <= 1'b0;
          if (s_lk_hit) begin
            // the line is already in SRAM (fetched twice): answer with the SRAM copy
            rs_rel  <= 1'b1;
            fe_st   <= FE_RESP;
          end else if (m_rd_dst == DST_SRAM) begin
            in_laddr   <= m_rd_laddr;
            in_dirty   <= 1'b0;
            in_sig     <= m_rd_sig;
            in_is_fill <= 1'b1;
            rs_rel     <= 1'b1;
            fe_st      <= FE_INST;
          end else if (fill_stt_go) begin
            rs_rel <= 1'b0;        // freed by the STT-MRAM side once the line is written
            fe_st  <= FE_RESP;
          end
        end
        FE_INST: begin
          if ((in_is_fill && s_lk_hit) || inst_go) fe_st <= FE_RESP;
        end
        FE_RESP: begin
          if (fe_bus_gnt) begin
            rs_k <= rs_k + 1'b1;
            if (rs_k + 1'b1 >= rs_n) fe_st <= FE_IDLE;
          end
        end
        default: fe_st <= FE_IDLE;
      endcase
    end
  end

  // data registers of the front end (no reset needed: written before use)
  always_ff @(posedge clk) begin
    if (fe_st == FE_IDLE && !l2_fill_valid && !rq_hold && req_valid) rq_wdata <= req_wdata;
    if (fe_st == FE_IDLE && l2_fill_valid) fill_data <= l2_fill_data;
    if (fe_st == FE_WWAIT && be_install) in_data <= rq_wdata;
    if (fe_st == FE_FILL) begin
      in_data <= fill_data;
      rs_data <= s_lk_hit ? s_lk_rdata : fill_data;
    end
    if (fe_st == FE_WWAIT) rs_data <= rq_wdata;
    if (fe_st == FE_INST && in_is_fill && s_lk_hit) rs_data <= s_lk_rdata;
  end

  // =====================================================================================
  // STT-MRAM side
  // =====================================================================================
  assign be_idle       = (be_st == BE_IDLE);

  logic fe_wb_busy;
  assign fe_wb_busy = fe_wb_req;

  always_comb begin
    a_start     = (be_st == BE_IDLE) && !tq_empty;
    tq_pop      = a_start;
    m_lk2_laddr = cur_q.laddr;

    d_rd      = 1'b0;
    d_rd_line = be_line_q;
    d_wr      = 1'b0;
    d_wr_line = be_line_q;
    d_wdata   = be_use_rq ? rq_wdata : sb_head;
    sb_pop    = 1'b0;

    a_ins       = 1'b0;
    a_ins_laddr = cur_q.laddr;
    a_ins_dirty = cur_q.dirty;
    a_ins_sig   = cur_q.sig;
    a_inv       = 1'b0;
    a_inv_line  = be_line_q;
    a_set       = 1'b0;
    a_set_line  = be_line_q;
    a_set_sig   = cur_q.sig;

    m_alloc     = 1'b0;
    m_alloc_dst = be_dst;
    m_rel2      = 1'b0;
    m_rel2_idx  = MI_W'(cur_q.rid);
    be_bus_req  = (be_st == BE_RSP) || (be_st == BE_ACK);
    be_install  = 1'b0;
    be_wdone    = 1'b0;

    // MSHR merge port: front end first
    m_merge     = fe_merge;
    m_merge_idx = m_lk_idx;
    m_merge_rid = rq_rid;
    if (!fe_merge && be_st == BE_DEC && be_act == A_MERGE) begin
      m_merge     = 1'b1;
      m_merge_idx = m_lk2_idx;
      m_merge_rid = cur_q.rid;
    end

    unique case (be_st)
      BE_DEC: begin
        unique case (be_act)
          A_MISS_L2:    m_alloc    = 1'b1;
          A_MIGRATE:    begin a_inv = 1'b1; be_install = 1'b1; end
          A_ALLOC_SRAM: be_install = 1'b1;
          default: ;
        endcase
      end
      BE_RD:  d_rd = !d_busy;
      BE_WR:  if (!d_busy) begin
        d_wr   = 1'b1;
        sb_pop = !be_use_rq;
        a_set  = be_use_rq || cur_q.dirty;
        m_rel2 = !be_use_rq && cur_q.mshr_rel;
      end
      BE_VRD: begin
        d_rd      = !d_busy;
        d_rd_line = a_ins_line;
      end
      BE_INSW: if (!d_busy) begin
        d_wr      = 1'b1;
        d_wr_line = a_ins_line;
        a_ins     = 1'b1;
        a_ins_dirty = be_use_rq ? 1'b1 : cur_q.dirty;
        sb_pop    = !be_use_rq;
        m_rel2    = !be_use_rq && cur_q.mshr_rel;
      end
      BE_ACK: be_wdone = be_bus_gnt;
      default: ;
    endcase
  end

  // replays and front-end pushes share the tag-queue write port (front end first)
  logic be_replay;
  assign be_replay = (be_st == BE_DEC) && (be_act == A_REPLAY) && !(fe_push_r || fe_push_w || fe_push_f);

  always_comb begin
    tq_push = fe_push_r || fe_push_w || fe_push_f || be_replay;
    tq_in   = '{cmd: TQ_R, laddr: rq_laddr, rid: rq_rid, sig: rq_sig, dirty: 1'b0,
                mshr_rel: 1'b0, cls: p_req_cls};
    if (fe_push_w) tq_in.cmd = TQ_W;
    if (fe_push_f) begin
      if (fill_stt_go)
        tq_in = '{cmd: TQ_F, laddr: m_rd_laddr, rid: rid_t'(fill_id), sig: m_rd_sig, dirty: 1'b0,
                  mshr_rel: 1'b1, cls: RL_WORM};
      else
        tq_in = '{cmd: TQ_F, laddr: s_vic_laddr, rid: '0, sig: s_vic_sig, dirty: s_vic_dirty,
                  mshr_rel: 1'b0, cls: p_vic_cls};
    end
    if (be_replay) tq_in = cur_q;
  end

  // write-back port: SRAM victims first
  always_comb begin
    wb_valid = fe_wb_req || (be_st == BE_WB);
    wb_addr  = fe_wb_req ? {s_vic_laddr, {OFF_W{1'b0}}} : {a_vic_laddr, {OFF_W{1'b0}}};
    wb_data  = fe_wb_req ? s_vic_data : d_rdata;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      be_st     <= BE_IDLE;
      cur_q     <= '0;
      be_hit_q  <= 1'b0;
      be_line_q <= '0;
      be_use_rq <= 1'b0;
    end else begin
      unique case (be_st)
        BE_IDLE: if (a_start) begin
          cur_q     <= tq_head;
          be_use_rq <= (tq_head.cmd == TQ_W);
          be_st     <= BE_SRCH;
        end
        BE_SRCH: if (a_done) begin
          be_hit_q  <= a_hit;
          be_line_q <= a_line;
          be_st     <= BE_DEC;
        end
        BE_DEC: begin
          if (cur_q.cmd == TQ_F) begin
            be_st <= be_hit_q ? BE_WR : BE_INS;
          end else begin
            unique case (be_act)
              A_STT_READ:  be_st <= BE_RD;
              A_STT_WRITE: be_st <= BE_WR;
              A_ALLOC_STT: be_st <= BE_INS;
              A_REPLAY:    if (be_replay) be_st <= BE_IDLE;
              A_MERGE:     if (!fe_merge) be_st <= BE_IDLE;
              A_STALL:     be_st <= BE_DEC;
              default:     be_st <= BE_IDLE;   // MISS_L2, MIGRATE, ALLOC_SRAM
            endcase
          end
        end
        BE_RD:   if (!d_busy) be_st <= BE_RSP;
        BE_RSP:  if (be_bus_gnt) be_st <= BE_IDLE;
        BE_WR:   if (!d_busy) be_st <= be_use_rq ? BE_ACK : BE_IDLE;
        BE_INS:  be_st <= (a_vic_valid && a_vic_dirty) ? BE_VRD : BE_INSW;
        BE_VRD:  if (!d_busy) be_st <= BE_WB;
        BE_WB:   if (wb_ready && !fe_wb_busy) be_st <= BE_INSW;
        BE_INSW: if (!d_busy) be_st <= be_use_rq ? BE_ACK : BE_IDLE;
        BE_ACK:  if (be_bus_gnt) be_st <= BE_IDLE;
        default: be_st <= BE_IDLE;
      endcase
    end
  end

  // =====================================================================================
  // Event counters
  // =====================================================================================
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      perf <= '0;
    end else begin
      if (fe_st == FE_LOOK && fe_act inside {A_SRAM_READ, A_SRAM_WRITE}) perf.sram_hits <= perf.sram_hits + 1;
      if (be_st == BE_RSP && be_bus_gnt)                perf.stt_hits      <= perf.stt_hits + 1;
      if (m_alloc)                                      perf.l2_misses     <= perf.l2_misses + 1;
      if (m_merge)                                      perf.mshr_merges   <= perf.mshr_merges + 1;
      if (be_replay)                                    perf.replays       <= perf.replays + 1;
      if (inst_go && vic_act == V_STT)                  perf.evict_to_stt  <= perf.evict_to_stt + 1;
      if (inst_go && s_vic_valid && vic_act != V_STT)   perf.evict_to_l2   <= perf.evict_to_l2 + 1;
      if (fill_stt_go)                                  perf.fills_to_stt  <= perf.fills_to_stt + 1;
      if (inst_go && in_is_fill)                        perf.fills_to_sram <= perf.fills_to_sram + 1;
      if (be_st == BE_DEC && be_act == A_STT_WRITE)     perf.stt_writes    <= perf.stt_writes + 1;
      if (be_st == BE_DEC && be_act == A_MIGRATE)       perf.migrations    <= perf.migrations + 1;
      if (be_st == BE_DEC && be_act == A_ALLOC_STT)     perf.stt_allocs    <= perf.stt_allocs + 1;
      if (be_st == BE_WB && wb_ready && !fe_wb_busy)    perf.stt_wbacks    <= perf.stt_wbacks + 1;
      if (fe_st == FE_LOOK && fe_act == A_STALL && rq_write)  perf.drain_stalls <= perf.drain_stalls + 1;
      if (fe_st == FE_LOOK && fe_act == A_STALL && !rq_write) perf.queue_stalls <= perf.queue_stalls + 1;
      if (a_done && a_polls > 8'd1)                     perf.extra_polls   <= perf.extra_polls + 32'(a_polls - 8'd1);
    end
  end

  // =====================================================================================
  // Rules
  // =====================================================================================
  a_one_response: assert property (@(posedge clk) disable iff (!rst_n) !(fe_bus_gnt && be_bus_gnt))
    else $error("fuse_l1d: two owners of the response bus");
  a_f_has_data: assert property (@(posedge clk) disable iff (!rst_n)
                                 (be_st == BE_DEC && cur_q.cmd == TQ_F) |-> !sb_empty)
    else $error("fuse_l1d: F command without a line in the swap buffer");
  a_tq_no_overflow: assert property (@(posedge clk) disable iff (!rst_n) tq_push |-> !tq_full_raw)
    else $error("fuse_l1d: tag queue overflow");

endmodule
