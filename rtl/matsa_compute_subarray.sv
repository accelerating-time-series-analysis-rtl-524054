// matsa_compute_subarray: a compute-enabled MRAM crossbar with its memory
// row decoder (MRD), one reconfigurable sense amplifier per column and the
// pass-gate links to its left and right neighbour subarrays.
//
// Each cycle executes one micro-operation (uop) on all columns at once: the
// MRD activates rows ra, rb and rc (how many depends on the sense function),
// the RSAs sense them and, in the second half cycle, the result is written to
// row rd of every column. Row copies between columns (diagonal copies) go
// through the RSA latches: a read with latch_en captures the source row, a
// write with dc_sel stores each column's left neighbour latch. dc_in is the
// latch of the last column of the subarray to the left (or the feed from the
// MAT controller for the first subarray of a chain); dc_out goes to the
// subarray on the right.
//
// The crossbar also works as a regular memory: mem_we writes a whole row
// (row write from the row buffer) and rd_row/rd_data read one (to the row
// buffer). A micro-operation write takes precedence over a memory write in the
// same cycle; controllers never issue both.
//
// Timing: reads are combinational, writes and latch updates happen on the
// rising clock edge, so one micro-operation completes per cycle (a paper
// "memory cycle": read in the first half, write in the second).
//
// From the paper: 256x256 cells, RSA per column, row activation of two or
// three cells, vertical copy within a cycle, two-step diagonal copy through
// the RSA latches, pass gates between adjacent subarrays. The cycle model and
// the precedence rule are this design's own. The cells are not reset: the
// controller's INIT program writes every row it later reads.
// The RSA row's latch_q output is not used here; only the last column's
// latch leaves the subarray, as dc_out.
module matsa_compute_subarray
  import matsa_pkg::*;
#(
  parameter int unsigned ROWS = XB_ROWS,
  parameter int unsigned COLS = XB_COLS
) (
  input  logic            clk,
  input  logic            rst_n,
  input  uop_t            uop,
  input  logic            dc_in,
  output logic            dc_out,
  // regular memory mode
  input  logic            mem_we,
  input  row_t            mem_row,
  input  logic [COLS-1:0] mem_wdata,
  input  row_t            rd_row,
  output logic [COLS-1:0] rd_data
);

  logic [COLS-1:0] cells [ROWS];
  logic [COLS-1:0] bl_a, bl_b, bl_c, wdata, latch_q;

  // memory row decoder: rows activated by the micro-operation
  assign bl_a    = cells[uop.ra];
  assign bl_b    = cells[uop.rb];
  assign bl_c    = cells[uop.rc];
  assign rd_data = cells[rd_row];

  matsa_rsa #(.COLS(COLS)) u_rsa (
    .clk      (clk),
    .rst_n    (rst_n),
    .sense    (uop.sense),
    .inv      (uop.inv),
    .dc_sel   (uop.dc_sel),
    .latch_en (uop.latch_en),
    .bl_a     (bl_a),
    .bl_b     (bl_b),
    .bl_c     (bl_c),
    .dc_in    (dc_in),
    .wdata    (wdata),
    .latch_q  (latch_q),
    .dc_out   (dc_out)
  );

  always_ff @(posedge clk) begin
    if (uop.we)      cells[uop.rd]  <= wdata;
    else if (mem_we) cells[mem_row] <= mem_wdata;
  end

endmodule
