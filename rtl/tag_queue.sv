// tag_queue: the FIFO of commands waiting for the STT-MRAM bank (16 entries).
//
// The tag queue is what lets the SRAM side keep serving while STT-MRAM is searching or in the
// middle of a slow write. Each entry holds only meta-information: the command (R = read, F =
// move the head of the swap buffer into STT-MRAM, W = write update), the tag+index bits of the
// line, the request ID, the PC signature, a dirty flag and the predicted read level. Because
// reads and F commands leave in order, an F and its 128-byte line in the swap buffer always meet
// without any address matching, and a read queued behind an F finds the line already moved.
// push/pop handshake: an entry is written when push && !full and removed when pop && !empty;
// head is the oldest entry, valid whenever !empty. Pushing and popping in the same cycle is
// allowed. drained is high when the queue is empty: a write update to STT-MRAM waits for it
// (the paper's flush before a write on STT-MRAM data).
// From the paper: depth 16, the command/tag/index contents, FIFO order. This design adds the
// request ID, signature, dirty flag and class fields.
module tag_queue
  import fuse_pkg::*;
#(
  parameter int unsigned DEPTH = 16
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      push,
  input  tq_entry_t push_entry,
  input  logic      pop,
  output tq_entry_t head,
  output logic      empty,
  output logic      full,
  output logic      drained,
  output logic [$clog2(DEPTH):0] count
);
  localparam int unsigned PW = $clog2(DEPTH);

  tq_entry_t      q [DEPTH];
  logic [PW-1:0]  rd_ptr, wr_ptr;
  logic           do_push, do_pop;

  assign empty   = (count == '0);
  assign full    = (count == (PW+1)'(DEPTH));
  assign drained = empty;
  assign head    = q[rd_ptr];
  assign do_push = push && !full;
  assign do_pop  = pop && !empty;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
    end else begin
      if (do_push) wr_ptr <= (wr_ptr == PW'(DEPTH-1)) ? '0 : wr_ptr + 1'b1;
      if (do_pop)  rd_ptr <= (rd_ptr == PW'(DEPTH-1)) ? '0 : rd_ptr + 1'b1;
      count <= count + (PW+1)'(do_push) - (PW+1)'(do_pop);
    end
  end

  always_ff @(posedge clk) begin
    if (do_push) q[wr_ptr] <= push_entry;
  end

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) push |-> !full || pop)
    else $error("tag_queue: push while full");
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) pop |-> !empty)
    else $error("tag_queue: pop while empty");

endmodule
