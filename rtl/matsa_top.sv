// matsa_top: the MATSA chip, an MRAM processing-using-memory accelerator for
// subsequence Dynamic Time Warping (sDTW), the similarity kernel of time
// series analysis.
//
// The chip compares queries against a reference time series inside its
// memory crossbars. Each MAT holds a copy of the reference spread over the
// columns of a chain of compute subarrays (one reference element per column)
// and memory subarrays with its share of the queries. The query elements
// flow through the chain column by column while every column computes one
// cell of the sDTW matrix per wavefront step, bit-serially, with the sense
// amplifiers of the crossbar. The global controller loads the data, keeps
// the MATs in lock step and collects one distance per query.
//
// Default size: MATSA-Embedded, 128 compute crossbars and 896 regular-memory
// crossbars of 256x256 cells (16 MATs of 8 compute and 56 memory subarrays;
// the split into MATs is this design's choice). Each MAT's chain has
// 8*256 = 2048 columns, so a reference of up to 2048 elements is held 16
// times and 16 query streams run in parallel.
//
// Host interface: cfg_* then cfg_we configure a run (the arguments of the
// host call), in_* stream the reference and the queries in, start runs,
// out_* give (query, distance, anomaly) with a valid/ready handshake, done
// marks the end. See matsa_global_ctrl for the rules.
//
// Lint reports rst_n as used both asynchronously and synchronously. The
// flip-flops all reset asynchronously; the synchronous use is the
// disable iff (!rst_n) of the simulation assertions in the controllers.
module matsa_top
  import matsa_pkg::*;
#(
  parameter int unsigned NMATS = 16,
  parameter int unsigned NSA   = 8,
  parameter int unsigned NMEM  = 56,
  parameter int unsigned COLS  = XB_COLS,
  parameter int unsigned ROWS  = XB_ROWS
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         cfg_we,
  input  mode_e        cfg_mode,
  input  dist_e        cfg_metric,
  input  logic [31:0]  cfg_ref_size,
  input  logic [31:0]  cfg_qlen,
  input  logic [31:0]  cfg_nq,
  input  logic [W-1:0] cfg_thres,
  output logic         cfg_err,
  input  logic         in_valid,
  output logic         in_ready,
  input  in_kind_e     in_kind,
  input  logic [W-1:0] in_data,
  input  logic         start,
  output logic         busy,
  output logic         done,
  output logic         out_valid,
  input  logic         out_ready,
  output logic [31:0]  out_qid,
  output logic [W-1:0] out_dist,
  output logic         out_anomaly
);

  localparam int unsigned WPR = COLS / W;
  localparam int unsigned MSW = (NMEM > 1) ? $clog2(NMEM) : 1;

  logic [NMATS-1:0]       mat_start, mat_ready_go, mat_fin, mat_wr_en;
  logic [NMATS-1:0]       mat_res_valid, mat_res_ready;
  logic                   mat_advance;
  mat_cfg_t               mat_cfg [NMATS];
  logic [MSW-1:0]         mat_wr_sel;
  row_t                   mat_wr_row;
  logic [$clog2(WPR)-1:0] mat_wr_word;
  logic [W-1:0]           mat_wr_data;
  logic [31:0]            mat_res_lq   [NMATS];
  logic [W-1:0]           mat_res_dist [NMATS];

  matsa_global_ctrl #(.NMATS(NMATS), .NSA(NSA), .NMEM(NMEM), .COLS(COLS), .ROWS(ROWS)) u_gctrl (
    .clk, .rst_n,
    .cfg_we, .cfg_mode, .cfg_metric, .cfg_ref_size, .cfg_qlen, .cfg_nq, .cfg_thres, .cfg_err,
    .in_valid, .in_ready, .in_kind, .in_data,
    .start, .busy, .done,
    .out_valid, .out_ready, .out_qid, .out_dist, .out_anomaly,
    .mat_start, .mat_cfg, .mat_ready_go, .mat_advance, .mat_fin,
    .mat_wr_en, .mat_wr_sel, .mat_wr_row, .mat_wr_word, .mat_wr_data,
    .mat_res_valid, .mat_res_ready, .mat_res_lq, .mat_res_dist
  );

  for (genvar m = 0; m < NMATS; m++) begin : g_mat
    matsa_mat #(.NSA(NSA), .NMEM(NMEM), .COLS(COLS), .ROWS(ROWS)) u_mat (
      .clk, .rst_n,
      .start     (mat_start[m]),
      .cfg       (mat_cfg[m]),
      .ready_go  (mat_ready_go[m]),
      .advance   (mat_advance),
      .fin       (mat_fin[m]),
      .wr_en     (mat_wr_en[m]),
      .wr_sel    (mat_wr_sel),
      .wr_row    (mat_wr_row),
      .wr_word   (mat_wr_word),
      .wr_data   (mat_wr_data),
      .res_valid (mat_res_valid[m]),
      .res_ready (mat_res_ready[m]),
      .res_lq    (mat_res_lq[m]),
      .res_dist  (mat_res_dist[m])
    );
  end

endmodule
