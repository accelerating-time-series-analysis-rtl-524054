// matsa_global_ctrl: the chip-level controller. It is the hardware behind
// the host call
//   matsa(ref, queries, ref_size, query_size, n_queries, mode, dist_metric,
//         anomaly_thres, anomalies, distances)
// and orchestrates the MATs.
//
// Configuration (cfg_we) latches mode, metric, sizes and threshold and
// rewinds the load pointers. The host then streams the data on in_*: the
// reference elements in order (in_kind = IN_REF) are written to memory
// subarray 0 of every MAT (each MAT holds a copy of the reference and works
// on its own share of the queries), the query elements query by query
// (IN_QUERY) go to MAT q mod NMATS, which stores them contiguously in its
// query subarrays. start then gives every MAT its share: in query filtering
// MAT m gets queries m, m+NMATS, ...; in self-join the queries are the
// windows of the reference and MAT m gets windows m, m+NMATS, ....
//
// While the MATs run, advance is raised only when every MAT that has not
// finished is waiting for it and no result is waiting to be taken, so all
// MATs step in lock step and a slow result consumer stalls them all. Results
// are taken from the MATs round robin and given out with out_qid (global
// query or window number), out_dist (sDTW distance) and out_anomaly
// (distance above the threshold). done rises when every MAT has finished.
//
// cfg_err flags a configuration this implementation cannot run: the square
// distance metric, a reference longer than a MAT's chain, or a query set
// larger than the query subarrays.
//
// From the paper: a global controller for the inter-bank flow, the
// arguments of the host call, replication of a short reference with the
// queries distributed over the copies, and the anomaly output. This design's
// own: the load stream, the round-robin query distribution, the lock-step
// rule, the result arbitration and "anomaly = distance > threshold".
module matsa_global_ctrl
  import matsa_pkg::*;
#(
  parameter int unsigned NMATS = 16,
  parameter int unsigned NSA   = 8,
  parameter int unsigned NMEM  = 56,
  parameter int unsigned COLS  = XB_COLS,
  parameter int unsigned ROWS  = XB_ROWS,
  localparam int unsigned K    = NSA * COLS,
  localparam int unsigned WPR  = COLS / W,
  localparam int unsigned MSW  = (NMEM > 1) ? $clog2(NMEM) : 1,
  localparam int unsigned PER_MEM = ROWS * WPR,
  localparam int unsigned MW   = (NMATS > 1) ? $clog2(NMATS) : 1
) (
  input  logic                   clk,
  input  logic                   rst_n,
  // configuration
  input  logic                   cfg_we,
  input  mode_e                  cfg_mode,
  input  dist_e                  cfg_metric,
  input  logic [31:0]            cfg_ref_size,
  input  logic [31:0]            cfg_qlen,
  input  logic [31:0]            cfg_nq,
  input  logic [W-1:0]           cfg_thres,
  output logic                   cfg_err,
  // data load stream
  input  logic                   in_valid,
  output logic                   in_ready,
  input  in_kind_e               in_kind,
  input  logic [W-1:0]           in_data,
  // run
  input  logic                   start,
  output logic                   busy,
  output logic                   done,
  // results
  output logic                   out_valid,
  input  logic                   out_ready,
  output logic [31:0]            out_qid,
  output logic [W-1:0]           out_dist,
  output logic                   out_anomaly,
  // MAT side
  output logic [NMATS-1:0]       mat_start,
  output mat_cfg_t               mat_cfg [NMATS],
  input  logic [NMATS-1:0]       mat_ready_go,
  output logic                   mat_advance,
  input  logic [NMATS-1:0]       mat_fin,
  output logic [NMATS-1:0]       mat_wr_en,
  output logic [MSW-1:0]         mat_wr_sel,
  output row_t                   mat_wr_row,
  output logic [$clog2(WPR)-1:0] mat_wr_word,
  output logic [W-1:0]           mat_wr_data,
  input  logic [NMATS-1:0]       mat_res_valid,
  output logic [NMATS-1:0]       mat_res_ready,
  input  logic [31:0]            mat_res_lq   [NMATS],
  input  logic [W-1:0]           mat_res_dist [NMATS]
);

  mode_e        mode;
  dist_e        metric;
  logic [31:0]  ref_size, qlen, nq;
  logic [W-1:0] thres;
  logic         running;

  // load pointers
  logic [31:0]  ref_ptr, q_i;
  logic [MW-1:0] q_mat;
  logic [31:0]  lptr [NMATS];

  // ---- configuration checks ----
  logic [31:0] max_q_per_mat;
  always_comb begin
    max_q_per_mat = (nq + NMATS - 1) / NMATS;
    cfg_err = (metric == DIST_SQUARE_DIFF)
           || (ref_size > 32'(K))
           || (mode == MODE_QUERY_FILTERING && max_q_per_mat * qlen > 32'((NMEM - 1) * PER_MEM))
           || (mode == MODE_SELF_JOIN && nq + qlen - 1 > ref_size)
           || (qlen == 0);
  end

  // ---- load stream to the memory subarrays ----
  logic [31:0] widx;
  always_comb begin
    mat_wr_en   = '0;
    widx        = (in_kind == IN_REF) ? ref_ptr : lptr[q_mat];
    mat_wr_data = in_data;
    mat_wr_word = widx[$clog2(WPR)-1:0];
    if (in_kind == IN_REF) begin
      mat_wr_sel = '0;
      mat_wr_row = row_t'(widx / WPR);
    end else begin
      mat_wr_sel = MSW'(widx / PER_MEM + 1);
      mat_wr_row = row_t'((widx % PER_MEM) / WPR);
    end
    if (in_valid && in_ready) begin
      if (in_kind == IN_REF) mat_wr_en = '1;
      else                   mat_wr_en[q_mat] = 1'b1;
    end
  end
  assign in_ready = !running;

  // ---- per-MAT work ----
  for (genvar m = 0; m < NMATS; m++) begin : g_cfg
    always_comb begin
      mat_cfg[m]            = '0;
      mat_cfg[m].self_join  = (mode == MODE_SELF_JOIN);
      mat_cfg[m].ref_size   = ref_size;
      mat_cfg[m].qlen       = qlen;
      mat_cfg[m].nq         = (nq > m) ? (nq - m + NMATS - 1) / NMATS : '0;
      mat_cfg[m].win_base   = m;
      mat_cfg[m].win_stride = NMATS;
    end
  end
  assign mat_start = {NMATS{start && !running && !cfg_err}};

  // ---- lock step and stall ----
  assign mat_advance = running && ((mat_ready_go | mat_fin) == '1) && (mat_ready_go != '0)
                       && (mat_res_valid == '0);

  // ---- result arbitration (round robin) ----
  logic [MW-1:0] rr, pick;
  logic          any;
  always_comb begin
    pick = rr;
    any  = 1'b0;
    for (int n = 0; n < NMATS; n++) begin
      logic [MW-1:0] idx;
      idx = MW'((int'(rr) + n) % NMATS);
      if (!any && mat_res_valid[idx]) begin
        any  = 1'b1;
        pick = idx;
      end
    end
  end
  assign out_valid     = any;
  assign out_dist      = mat_res_dist[pick];
  assign out_qid       = mat_res_lq[pick] * NMATS + 32'(pick);
  assign out_anomaly   = (mat_res_dist[pick] > thres);
  always_comb begin
    mat_res_ready       = '0;
    mat_res_ready[pick] = any && out_ready;
  end

  assign busy = running;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mode <= MODE_QUERY_FILTERING; metric <= DIST_ABS_DIFF;
      ref_size <= '0; qlen <= 32'd1; nq <= '0; thres <= '0;
      running <= 1'b0; done <= 1'b0;
      ref_ptr <= '0; q_i <= '0; q_mat <= '0; rr <= '0;
      for (int m = 0; m < NMATS; m++) lptr[m] <= '0;
    end else begin
      if (cfg_we && !running) begin
        mode <= cfg_mode; metric <= cfg_metric;
        ref_size <= cfg_ref_size; qlen <= cfg_qlen; nq <= cfg_nq; thres <= cfg_thres;
        ref_ptr <= '0; q_i <= '0; q_mat <= '0;
        for (int m = 0; m < NMATS; m++) lptr[m] <= '0;
        done <= 1'b0;
      end else if (in_valid && in_ready) begin
        if (in_kind == IN_REF) ref_ptr <= ref_ptr + 1;
        else begin
          lptr[q_mat] <= lptr[q_mat] + 1;
          if (q_i == qlen - 1) begin
            q_i   <= '0;
            q_mat <= (q_mat == MW'(NMATS - 1)) ? '0 : q_mat + 1'b1;
          end else begin
            q_i <= q_i + 1;
          end
        end
      end
      if (start && !running && !cfg_err) begin
        running <= 1'b1;
        done    <= 1'b0;
      end else if (running && mat_fin == '1 && mat_start == '0) begin
        running <= 1'b0;
        done    <= 1'b1;
      end
      if (any && out_ready) rr <= (pick == MW'(NMATS - 1)) ? '0 : pick + 1'b1;
    end
  end

endmodule
