// stt_data_array: the STT-MRAM data array of the FUSE cache (512 lines x 128 bytes = 64 KB).
//
// The array is fully associative from the outside: the line number (0..LINES-1) is chosen by
// the associativity approximation logic, which owns the tag array. Reads take one cycle: rdata
// is valid in the cycle after rd_en. A write is slow in STT-MRAM: after wr_en the array is busy
// for WR_CYCLES cycles, takes no read or write, and the new data is visible once busy falls.
// The MTJ cells, sense amplifiers and write drivers are modelled as a register array and a
// countdown; the latencies (1-cycle read, 5-cycle write) and the size come from the paper.
// Interface: rd_en/rd_line -> rdata next cycle; wr_en/wr_line/wr_data accepted when !busy.
module stt_data_array
  import fuse_pkg::*;
#(
  parameter int unsigned LINES     = 512,
  parameter int unsigned WR_CYCLES = 5
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     rd_en,
  input  logic [$clog2(LINES)-1:0] rd_line,
  output line_t                    rdata,
  input  logic                     wr_en,
  input  logic [$clog2(LINES)-1:0] wr_line,
  input  line_t                    wr_data,
  output logic                     busy
);
  localparam int unsigned CNT_W = $clog2(WR_CYCLES + 1);

  line_t                    mem [LINES];
  logic [CNT_W-1:0]         wcnt;
  logic [$clog2(LINES)-1:0] wline_q;
  line_t                    wdata_q;

  assign busy = (wcnt != '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wcnt    <= '0;
      wline_q <= '0;
    end else if (wr_en && !busy) begin
      wcnt    <= CNT_W'(WR_CYCLES);
      wline_q <= wr_line;
    end else if (busy) begin
      wcnt <= wcnt - 1'b1;
    end
  end

  // The cells switch at the end of the write pulse.
  always_ff @(posedge clk) begin
    if (wr_en && !busy) wdata_q <= wr_data;
    if (wcnt == CNT_W'(1)) mem[wline_q] <= wdata_q;
    if (rd_en && !busy) rdata <= mem[rd_line];
  end

  a_no_access_while_busy: assert property (@(posedge clk) disable iff (!rst_n) busy |-> !(rd_en || wr_en))
    else $error("stt_data_array accessed while a write is in progress");

endmodule
