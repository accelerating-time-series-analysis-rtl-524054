// matsa_mem_subarray: an MRAM crossbar working in regular memory mode.
//
// The accelerator keeps the reference and the queries in memory crossbars
// until the compute subarrays consume them. A row of 256 cells holds
// COLS/32 elements of 32 bits stored side by side (horizontal layout, as in
// ordinary memory). The host side writes one 32-bit element at a time
// (row, word within the row); the read side senses a whole row into the
// local row buffer, from where the MAT controller picks elements.
//
// Timing: a write takes effect on the rising edge. A read with rd_en senses
// row rd_row and the row appears on lrb one cycle later, where it stays until
// the next read (the row buffer).
//
// From the paper: regular-memory crossbars of 256x256 cells that buffer data
// until it is processed, and a local row buffer shared by the subarrays. The
// horizontal element layout, the word-wide write and the one-cycle read are
// this design's own. The cells are not reset.
module matsa_mem_subarray
  import matsa_pkg::*;
#(
  parameter int unsigned ROWS = XB_ROWS,
  parameter int unsigned COLS = XB_COLS,
  localparam int unsigned WPR = COLS / W     // elements per row
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     we,
  input  row_t                     wr_row,
  input  logic [$clog2(WPR)-1:0]   wr_word,
  input  logic [W-1:0]             wr_data,
  input  logic                     rd_en,
  input  row_t                     rd_row,
  output logic [COLS-1:0]          lrb
);

  logic [COLS-1:0] cells [ROWS];

  always_ff @(posedge clk) begin
    if (we) cells[wr_row][wr_word*W +: W] <= wr_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     lrb <= '0;
    else if (rd_en) lrb <= cells[rd_row];
  end

endmodule
