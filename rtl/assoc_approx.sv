// assoc_approx: associativity approximation logic that makes the STT-MRAM bank behave as a
// fully associative cache of LINES lines while using only N_CMP tag comparators.
//
// The STT-MRAM tag array is read one row of N_CMP entries at a time (512 entries = 128 rows of
// 4). Every row is one data set watched by its own counting Bloom filter (nvm_cbf). A search
// works in two steps:
//   cycle 0 (srch_start): the line address is tested against all filters at once; the rows
//           whose filter says "positive" are latched as the rows still to poll;
//   cycle 1..: the polling logic sends the lowest pending row index to the tag-array decoder,
//           the N_CMP tags of that row are compared with the request, and the row is crossed
//           off. srch_done rises in the cycle a comparator matches (srch_hit = 1, srch_line =
//           row*N_CMP + column) or no positive row is left (srch_hit = 0).
// A line whose filter is negative is thus rejected in 2 cycles, a line found in the first
// positive row costs 2 cycles, each false-positive row one more.
// Replacement is FIFO over the whole array: ins_line always shows the next slot, vic_* shows
// what it holds. ins_en writes the new tag there, and in the same cycle the row's filter is
// incremented for the new line and decremented for the victim. inv_en frees one slot (with a
// decrement); set_en marks a slot dirty and records a new PC signature (write in place).
// srch_start must only be given while srch_busy is low; the caller does not issue ins/inv/set
// during a search.
// From the paper: four comparators, polling logic fed by CBF positives, tag array indexed by the
// poll, FIFO replacement, 512 entries and 128 filters. This design's choices: one filter per
// row, lowest-row-first polling, and keeping valid/dirty/signature bits with each tag.
module assoc_approx
  import fuse_pkg::*;
#(
  parameter int unsigned LINES   = 512,
  parameter int unsigned N_CMP   = 4,
  parameter int unsigned CBF_LEN = 64,
  parameter int unsigned N_HASH  = 3
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // search
  input  logic                     srch_start,
  input  laddr_t                   srch_laddr,
  output logic                     srch_busy,
  output logic                     srch_done,
  output logic                     srch_hit,
  output logic [$clog2(LINES)-1:0] srch_line,
  output logic                     srch_dirty,
  output logic [7:0]               srch_polls,   // rows polled by the finished search
  // FIFO insertion
  output logic [$clog2(LINES)-1:0] ins_line,
  output logic                     vic_valid,
  output laddr_t                   vic_laddr,
  output logic                     vic_dirty,
  input  logic                     ins_en,
  input  laddr_t                   ins_laddr,
  input  logic                     ins_dirty,
  input  sig_t                     ins_sig,
  // invalidate one line
  input  logic                     inv_en,
  input  logic [$clog2(LINES)-1:0] inv_line,
  // write in place: set dirty, new signature
  input  logic                     set_en,
  input  logic [$clog2(LINES)-1:0] set_line,
  input  sig_t                     set_sig
);
  localparam int unsigned ROWS  = LINES / N_CMP;
  localparam int unsigned ROW_W = $clog2(ROWS);
  localparam int unsigned COL_W = (N_CMP > 1) ? $clog2(N_CMP) : 1;
  localparam int unsigned LN_W  = $clog2(LINES);

  typedef struct packed {
    logic   valid;
    logic   dirty;
    laddr_t laddr;
    sig_t   sig;
  } tentry_t;

  tentry_t tags [LINES];

  // ---------------- counting Bloom filters ----------------
  logic [ROWS-1:0]  cbf_pos;
  logic [ROW_W-1:0] upd_row;
  logic             cbf_inc, cbf_dec;
  laddr_t           cbf_dec_laddr;

  nvm_cbf #(.N_CBF(ROWS), .CBF_LEN(CBF_LEN), .N_HASH(N_HASH)) u_cbf (
    .clk, .rst_n,
    .test_laddr (srch_laddr),
    .test_pos   (cbf_pos),
    .upd_cbf    (upd_row),
    .inc_en     (cbf_inc),
    .inc_laddr  (ins_laddr),
    .dec_en     (cbf_dec),
    .dec_laddr  (cbf_dec_laddr)
  );

  // ---------------- polling logic ----------------
  typedef enum logic {P_IDLE, P_POLL} pstate_e;
  pstate_e         pst;
  logic [ROWS-1:0] pending;
  laddr_t          key_q;
  logic [7:0]      polls_q;

  logic [ROW_W-1:0] poll_row;
  logic             any_pending;
  always_comb begin
    poll_row    = '0;
    any_pending = 1'b0;
    for (int r = ROWS - 1; r >= 0; r--)
      if (pending[r]) begin
        poll_row    = ROW_W'(r);
        any_pending = 1'b1;
      end
  end

  // N_CMP comparators on the polled row
  logic             row_hit;
  logic [COL_W-1:0] row_col;
  always_comb begin
    row_hit = 1'b0;
    row_col = '0;
    for (int c = 0; c < N_CMP; c++) begin
      if (!row_hit && tags[int'(poll_row)*N_CMP+c].valid && tags[int'(poll_row)*N_CMP+c].laddr == key_q) begin
        row_hit = 1'b1;
        row_col = COL_W'(c);
      end
    end
  end

  logic [LN_W-1:0] hit_line;
  assign hit_line   = LN_W'(int'(poll_row) * N_CMP + int'(row_col));
  assign srch_busy  = (pst == P_POLL);
  assign srch_done  = (pst == P_POLL) && (!any_pending || row_hit);
  assign srch_hit   = (pst == P_POLL) && any_pending && row_hit;
  assign srch_line  = hit_line;
  assign srch_dirty = tags[hit_line].dirty;
  assign srch_polls = polls_q + ((any_pending) ? 8'd1 : 8'd0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pst     <= P_IDLE;
      pending <= '0;
      key_q   <= '0;
      polls_q <= '0;
    end else begin
      case (pst)
        P_IDLE: if (srch_start) begin
          pst     <= P_POLL;
          pending <= cbf_pos;
          key_q   <= srch_laddr;
          polls_q <= '0;
        end
        P_POLL: begin
          if (srch_done) pst <= P_IDLE;
          if (any_pending) begin
            pending[poll_row] <= 1'b0;
            polls_q           <= polls_q + 8'd1;
          end
        end
        default: pst <= P_IDLE;
      endcase
    end
  end

  // ---------------- FIFO replacement and tag writes ----------------
  logic [LN_W-1:0] fifo_ptr;
  assign ins_line  = fifo_ptr;
  assign vic_valid = tags[fifo_ptr].valid;
  assign vic_laddr = tags[fifo_ptr].laddr;
  assign vic_dirty = tags[fifo_ptr].dirty;

  always_comb begin
    cbf_inc       = ins_en;
    cbf_dec       = (ins_en && tags[fifo_ptr].valid) || (inv_en && tags[inv_line].valid);
    cbf_dec_laddr = ins_en ? tags[fifo_ptr].laddr : tags[inv_line].laddr;
    upd_row       = ins_en ? ROW_W'(fifo_ptr / LN_W'(N_CMP)) : ROW_W'(inv_line / LN_W'(N_CMP));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fifo_ptr <= '0;
      for (int i = 0; i < LINES; i++) tags[i] <= '0;
    end else begin
      if (ins_en) begin
        tags[fifo_ptr] <= '{valid: 1'b1, dirty: ins_dirty, laddr: ins_laddr, sig: ins_sig};
        fifo_ptr       <= (fifo_ptr == LN_W'(LINES - 1)) ? '0 : fifo_ptr + 1'b1;
      end else if (inv_en) begin
        tags[inv_line].valid <= 1'b0;
        tags[inv_line].dirty <= 1'b0;
      end else if (set_en) begin
        tags[set_line].dirty <= 1'b1;
        tags[set_line].sig   <= set_sig;
      end
    end
  end

  a_start_when_idle: assert property (@(posedge clk) disable iff (!rst_n) srch_start |-> !srch_busy)
    else $error("assoc_approx: search started while busy");
  a_one_update: assert property (@(posedge clk) disable iff (!rst_n) !(ins_en && inv_en))
    else $error("assoc_approx: insert and invalidate in the same cycle");

endmodule
