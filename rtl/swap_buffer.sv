// swap_buffer: three 128-byte registers between the SRAM and STT-MRAM data arrays.
//
// When a line must go into STT-MRAM (an SRAM eviction, or a fill the predictor assigns to
// STT-MRAM) its data is parked here at once and an F command goes into the tag queue; the SRAM
// side is then free while STT-MRAM takes its long write. The buffer is a FIFO: the STT-MRAM side
// pops the oldest line when it executes the oldest F command, so commands and data pair up in
// order without any search of the buffered data.
// Handshake: push && !full stores push_data; pop && !empty removes head; head is valid while
// !empty. Same-cycle push and pop are allowed.
// Each register also keeps the line address it holds; match_hit tells, combinationally, whether
// match_laddr is one of the lines still waiting. The STT-MRAM side uses it only when a read
// misses in STT-MRAM, to wait for the line instead of fetching a stale copy from L2. This is an
// address compare only (three comparators), not a data snoop: data still pairs up by order.
// From the paper: three 128-byte registers shared by both banks, FIFO pairing with F commands.
// The address match is this design's addition.
module swap_buffer
  import fuse_pkg::*;
#(
  parameter int unsigned ENTRIES = 3
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  push,
  input  line_t push_data,
  input  laddr_t push_laddr,
  input  logic  pop,
  output line_t head,
  output logic  empty,
  output logic  full,
  input  laddr_t match_laddr,
  output logic  match_hit
);
  localparam int unsigned PW = (ENTRIES > 1) ? $clog2(ENTRIES) : 1;

  line_t          regs [ENTRIES];
  laddr_t         tags [ENTRIES];
  logic [PW-1:0]  rd_ptr, wr_ptr;
  logic [PW:0]    count;
  logic           do_push, do_pop;

  assign empty   = (count == '0);
  assign full    = (count == (PW+1)'(ENTRIES));
  assign head    = regs[rd_ptr];

  // register i holds a waiting line when it lies within count entries from rd_ptr
  always_comb begin
    match_hit = 1'b0;
    for (int unsigned i = 0; i < ENTRIES; i++) begin
      int unsigned age;
      age = (i + ENTRIES - int'(rd_ptr)) % ENTRIES;
      if (age < int'(count) && tags[i] == match_laddr) match_hit = 1'b1;
    end
  end
  assign do_push = push && !full;
  assign do_pop  = pop && !empty;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
    end else begin
      if (do_push) wr_ptr <= (wr_ptr == PW'(ENTRIES-1)) ? '0 : wr_ptr + 1'b1;
      if (do_pop)  rd_ptr <= (rd_ptr == PW'(ENTRIES-1)) ? '0 : rd_ptr + 1'b1;
      count <= count + (PW+1)'(do_push) - (PW+1)'(do_pop);
    end
  end

  always_ff @(posedge clk) begin
    if (do_push) begin
      regs[wr_ptr] <= push_data;
      tags[wr_ptr] <= push_laddr;
    end
  end

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n) push |-> !full || pop)
    else $error("swap_buffer: push while full");

endmodule
