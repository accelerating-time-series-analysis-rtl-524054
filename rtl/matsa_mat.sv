// matsa_mat: one MAT (memory matrix group) of the accelerator.
//
// A MAT holds NSA compute subarrays chained left to right through their
// pass gates, so that their columns form one row of K = NSA*COLS processing
// elements, and NMEM memory subarrays that buffer the reference (subarray 0)
// and the queries (subarrays 1..NMEM-1). Every compute subarray has its own
// controller; all of them run the same program in lock step, started by the
// MAT controller, which also feeds the left end of the chain and reads the
// right end. The host side fills the memory subarrays through a word-wide
// write port.
//
// Interface: start/cfg start a run (see matsa_mat_ctrl), ready_go/advance
// implement the lock step with the other MATs, res_* hand out one result per
// finished query, fin says the run is over. wr_* write one 32-bit element
// into memory subarray wr_sel.
//
// From the paper: compute subarrays with their own controllers, memory
// subarrays buffering data, a row buffer per subarray pair read by the MAT
// and data flow between adjacent subarrays through pass gates. The number of
// subarrays per MAT (8 compute, 56 memory, the paper's 1:7 ratio of compute
// to memory crossbars) is this design's choice.
//
// The memory-mode read port of the compute subarrays (rd_data) is left
// open: results leave the chain through the latches, never by a row read.
module matsa_mat
  import matsa_pkg::*;
#(
  parameter int unsigned NSA  = 8,
  parameter int unsigned NMEM = 56,
  parameter int unsigned COLS = XB_COLS,
  parameter int unsigned ROWS = XB_ROWS,
  localparam int unsigned WPR = COLS / W,
  localparam int unsigned MSW = (NMEM > 1) ? $clog2(NMEM) : 1
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   start,
  input  mat_cfg_t               cfg,
  output logic                   ready_go,
  input  logic                   advance,
  output logic                   fin,
  input  logic                   wr_en,
  input  logic [MSW-1:0]         wr_sel,
  input  row_t                   wr_row,
  input  logic [$clog2(WPR)-1:0] wr_word,
  input  logic [W-1:0]           wr_data,
  output logic                   res_valid,
  input  logic                   res_ready,
  output logic [31:0]            res_lq,
  output logic [W-1:0]           res_dist
);

  logic            prog_start, prog_done;
  prog_e           prog;
  feed_e           feed_sel [NSA];
  cap_e            cap_sel  [NSA];
  logic [4:0]      bit_idx  [NSA];
  logic            done     [NSA];
  logic            busy     [NSA];
  uop_t            uop      [NSA];
  logic            dc       [NSA+1];   // pass-gate links: dc[s] enters subarray s
  logic [COLS-1:0] sa_rd    [NSA];

  logic            mem_rd_en;
  logic [MSW-1:0]  mem_rd_sel;
  row_t            mem_rd_row;
  logic [COLS-1:0] lrb [NMEM];

  for (genvar s = 0; s < NSA; s++) begin : g_sa
    matsa_subarray_ctrl u_ctrl (
      .clk, .rst_n,
      .start    (prog_start),
      .prog     (prog),
      .busy     (busy[s]),
      .done     (done[s]),
      .uop      (uop[s]),
      .feed_sel (feed_sel[s]),
      .cap_sel  (cap_sel[s]),
      .bit_idx  (bit_idx[s])
    );
    matsa_compute_subarray #(.ROWS(ROWS), .COLS(COLS)) u_sa (
      .clk, .rst_n,
      .uop       (uop[s]),
      .dc_in     (dc[s]),
      .dc_out    (dc[s+1]),
      .mem_we    (1'b0),
      .mem_row   ('0),
      .mem_wdata ('0),
      .rd_row    ('0),
      .rd_data   (sa_rd[s])
    );
  end

  for (genvar m = 0; m < NMEM; m++) begin : g_mem
    matsa_mem_subarray #(.ROWS(ROWS), .COLS(COLS)) u_mem (
      .clk, .rst_n,
      .we      (wr_en && wr_sel == MSW'(m)),
      .wr_row  (wr_row),
      .wr_word (wr_word),
      .wr_data (wr_data),
      .rd_en   (mem_rd_en && mem_rd_sel == MSW'(m)),
      .rd_row  (mem_rd_row),
      .lrb     (lrb[m])
    );
  end

  assign prog_done = done[0];

  matsa_mat_ctrl #(.NSA(NSA), .NMEM(NMEM), .COLS(COLS), .ROWS(ROWS)) u_ctrl (
    .clk, .rst_n,
    .start, .cfg, .ready_go, .advance, .fin,
    .prog_start, .prog, .prog_done,
    .feed_sel   (feed_sel[0]),
    .cap_sel    (cap_sel[NSA-1]),
    .bit_idx    (bit_idx[0]),
    .chain_in   (dc[0]),
    .chain_out  (dc[NSA]),
    .mem_rd_en, .mem_rd_sel, .mem_rd_row,
    .mem_lrb    (lrb[mem_rd_sel]),
    .res_valid, .res_ready, .res_lq, .res_dist
  );

  // all subarray controllers of the MAT run in lock step
  for (genvar s = 1; s < NSA; s++) begin : g_lockstep
    assert property (@(posedge clk) disable iff (!rst_n) busy[s] == busy[0] && uop[s] == uop[0]);
  end

endmodule
