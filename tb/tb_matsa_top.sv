// tb_matsa_top: end-to-end test of the chip on a reduced configuration
// (3 MATs, each a chain of 2 compute subarrays of 64 columns, K = 128, and 3
// memory subarrays).
//
// Runs, each checked query by query against a software sDTW (see
// tb_matsa_mat for the recurrence), with anomaly = distance > threshold:
//   1. query filtering, 7 queries of 6 elements, reference of 100 elements
//      (pad columns in every chain, MATs with 3, 2 and 2 queries);
//   2. self-join over a 128-element reference, windows of 5 elements;
//   3. a square-difference request, which must be refused (cfg_err).
// It counts the mechanisms of the design and fails if one never happened:
// results stalled by out_ready, two MATs offering results in the same cycle
// (arbitration), MATs finishing at different steps while the others go on
// in lock step, anomalies flagged and not flagged, and the refused
// configuration.
module tb_matsa_top;
  import matsa_pkg::*;
  timeunit 1ns; timeprecision 1ps;

  localparam int unsigned NMATS = 3;
  localparam int unsigned NSA   = 2;
  localparam int unsigned NMEM  = 3;
  localparam int unsigned COLS  = 64;
  localparam int unsigned K     = NSA * COLS;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic cfg_we, cfg_err, in_valid, in_ready, start, busy, done, out_valid, out_ready, out_anomaly;
  mode_e cfg_mode;
  dist_e cfg_metric;
  logic [31:0] cfg_ref_size, cfg_qlen, cfg_nq, out_qid;
  logic [W-1:0] cfg_thres, in_data, out_dist;
  in_kind_e in_kind;

  matsa_top #(.NMATS(NMATS), .NSA(NSA), .NMEM(NMEM), .COLS(COLS)) dut (
    .clk, .rst_n, .cfg_we, .cfg_mode, .cfg_metric, .cfg_ref_size, .cfg_qlen, .cfg_nq, .cfg_thres,
    .cfg_err, .in_valid, .in_ready, .in_kind, .in_data, .start, .busy, .done,
    .out_valid, .out_ready, .out_qid, .out_dist, .out_anomaly
  );

  int checks = 0, failures = 0;
  int n_stall = 0, n_contend = 0, n_early_fin = 0, n_anom = 0, n_normal = 0, n_refused = 0;
  int ref_v [K];
  int qry_v [16][8];

  function automatic int unsigned sdtw(int qi, int n, int m, bit sj);
    int unsigned s [8][K];
    int unsigned best;
    for (int i = 0; i < n; i++)
      for (int j = 0; j < m; j++) begin
        int qv, dv;
        int unsigned d, mn;
        qv = sj ? ref_v[qi + i] : qry_v[qi][i];
        dv = qv - ref_v[j];
        d  = (dv < 0) ? -dv : dv;
        if (i == 0) mn = 0;
        else if (j == 0) mn = s[i-1][0];
        else begin
          mn = s[i-1][j-1];
          if (s[i-1][j] < mn) mn = s[i-1][j];
          if (s[i][j-1] < mn) mn = s[i][j-1];
        end
        s[i][j] = d + mn;
      end
    best = 32'hFFFF_FFFF;
    for (int j = 0; j < m; j++) if (s[n-1][j] < best) best = s[n-1][j];
    return best;
  endfunction

  always @(posedge clk) begin
    if (out_valid && !out_ready) n_stall++;
    if ($countones(dut.mat_res_valid) > 1) n_contend++;
    if (dut.mat_advance && dut.mat_fin != '0) n_early_fin++;
  end

  task automatic configure(mode_e md, dist_e mt, int m, int n, int nq, int thr);
    @(negedge clk);
    cfg_we = 1; cfg_mode = md; cfg_metric = mt; cfg_ref_size = m; cfg_qlen = n; cfg_nq = nq; cfg_thres = thr;
    @(negedge clk);
    cfg_we = 0;
  endtask

  task automatic send(in_kind_e kd, int val);
    @(negedge clk);
    in_valid = 1; in_kind = kd; in_data = val;
    @(negedge clk);
    in_valid = 0;
  endtask

  task automatic run(bit sj, int m, int n, int nq, int thr);
    bit seen [16];
    int got = 0;
    for (int q = 0; q < 16; q++) seen[q] = 0;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    while (!done) begin
      @(negedge clk);
      out_ready = ($urandom_range(0, 2) != 0);
      if (out_valid && out_ready) begin
        int unsigned exp_d;
        exp_d = sdtw(out_qid, n, m, sj);
        checks++;
        if (out_qid >= nq || seen[out_qid] || out_dist != exp_d || out_anomaly != (exp_d > thr)) begin
          failures++;
          $display("FAIL sj=%0d q=%0d dist=%0d exp=%0d anomaly=%0d", sj, out_qid, out_dist, exp_d, out_anomaly);
        end else begin
          seen[out_qid] = 1;
          if (out_anomaly) n_anom++; else n_normal++;
        end
        got++;
      end
    end
    checks++;
    if (got != nq) begin failures++; $display("FAIL %0d results, expected %0d", got, nq); end
  endtask

  initial begin
    cfg_we = 0; cfg_mode = MODE_QUERY_FILTERING; cfg_metric = DIST_ABS_DIFF; cfg_ref_size = 0;
    cfg_qlen = 1; cfg_nq = 0; cfg_thres = 0; in_valid = 0; in_kind = IN_REF; in_data = 0;
    start = 0; out_ready = 1;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int j = 0; j < K; j++) ref_v[j] = int'($urandom_range(0, 400)) - 200;
    for (int q = 0; q < 16; q++) for (int i = 0; i < 8; i++) qry_v[q][i] = int'($urandom_range(0, 400)) - 200;

    // 1. query filtering
    configure(MODE_QUERY_FILTERING, DIST_ABS_DIFF, 100, 6, 7, 150);
    checks++; if (cfg_err) begin failures++; $display("FAIL cfg_err on a valid configuration"); end
    for (int j = 0; j < 100; j++) send(IN_REF, ref_v[j]);
    for (int q = 0; q < 7; q++) for (int i = 0; i < 6; i++) send(IN_QUERY, qry_v[q][i]);
    run(1'b0, 100, 6, 7, 150);

    // 2. self-join
    configure(MODE_SELF_JOIN, DIST_ABS_DIFF, K, 5, 8, 100);
    for (int j = 0; j < K; j++) send(IN_REF, ref_v[j]);
    run(1'b1, K, 5, 8, 100);

    // 3. unsupported metric
    configure(MODE_QUERY_FILTERING, DIST_SQUARE_DIFF, 100, 6, 7, 150);
    checks++;
    if (!cfg_err) begin failures++; $display("FAIL square metric accepted"); end
    else n_refused++;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    repeat (5) @(negedge clk);
    checks++;
    if (busy) begin failures++; $display("FAIL refused run started"); end

    $display("stalls=%0d contention=%0d early_finish=%0d anomalies=%0d normal=%0d refused=%0d",
             n_stall, n_contend, n_early_fin, n_anom, n_normal, n_refused);
    checks++; if (n_stall == 0)     begin failures++; $display("FAIL no result stall"); end
    checks++; if (n_contend == 0)   begin failures++; $display("FAIL no arbitration"); end
    checks++; if (n_early_fin == 0) begin failures++; $display("FAIL no early finish"); end
    checks++; if (n_anom == 0)      begin failures++; $display("FAIL no anomaly"); end
    checks++; if (n_normal == 0)    begin failures++; $display("FAIL no normal query"); end
    checks++; if (n_refused == 0)   begin failures++; $display("FAIL no refused configuration"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3_000_000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
