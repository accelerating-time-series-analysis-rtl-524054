// tb_matsa_top_full: one complete run of the chip at its default size
// (16 MATs, 8 compute subarrays of 256 columns per MAT, 56 memory subarrays
// per MAT). A 2048-element reference fills every chain; 16 queries of 4
// elements, one per MAT, are compared against it in query-filtering mode and
// every distance and anomaly flag is checked against a software sDTW. It
// also checks the number of wavefront steps (N + 2048 - 1 per MAT).
module tb_matsa_top_full;
  import matsa_pkg::*;
  timeunit 1ns; timeprecision 1ps;

  localparam int unsigned K  = 2048;
  localparam int unsigned N  = 4;
  localparam int unsigned NQ = 16;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic cfg_we, cfg_err, in_valid, in_ready, start, busy, done, out_valid, out_ready, out_anomaly;
  mode_e cfg_mode;
  dist_e cfg_metric;
  logic [31:0] cfg_ref_size, cfg_qlen, cfg_nq, out_qid;
  logic [W-1:0] cfg_thres, in_data, out_dist;
  in_kind_e in_kind;

  matsa_top dut (
    .clk, .rst_n, .cfg_we, .cfg_mode, .cfg_metric, .cfg_ref_size, .cfg_qlen, .cfg_nq, .cfg_thres,
    .cfg_err, .in_valid, .in_ready, .in_kind, .in_data, .start, .busy, .done,
    .out_valid, .out_ready, .out_qid, .out_dist, .out_anomaly
  );

  int checks = 0, failures = 0, steps = 0;
  int ref_v [K];
  int qry_v [NQ][N];

  function automatic int unsigned sdtw(int qi);
    int unsigned s [N][K];
    int unsigned best;
    for (int i = 0; i < N; i++)
      for (int j = 0; j < K; j++) begin
        int dv;
        int unsigned d, mn;
        dv = qry_v[qi][i] - ref_v[j];
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
    for (int j = 0; j < K; j++) if (s[N-1][j] < best) best = s[N-1][j];
    return best;
  endfunction

  always @(posedge clk) if (dut.mat_advance && dut.g_mat[0].u_mat.prog == PROG_STEP) steps++;

  initial begin
    int got = 0;
    cfg_we = 0; cfg_mode = MODE_QUERY_FILTERING; cfg_metric = DIST_ABS_DIFF; cfg_ref_size = 0;
    cfg_qlen = 1; cfg_nq = 0; cfg_thres = 0; in_valid = 0; in_kind = IN_REF; in_data = 0;
    start = 0; out_ready = 1;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int j = 0; j < K; j++) ref_v[j] = int'($urandom_range(0, 2_000_000)) - 1_000_000;
    for (int q = 0; q < NQ; q++) for (int i = 0; i < N; i++) qry_v[q][i] = int'($urandom_range(0, 2_000_000)) - 1_000_000;
    @(negedge clk);
    cfg_we = 1; cfg_ref_size = K; cfg_qlen = N; cfg_nq = NQ; cfg_thres = 100_000;
    @(negedge clk);
    cfg_we = 0;
    checks++; if (cfg_err) begin failures++; $display("FAIL cfg_err"); end
    in_valid = 1;
    in_kind = IN_REF;
    for (int j = 0; j < K; j++) begin in_data = ref_v[j]; @(negedge clk); end
    in_kind = IN_QUERY;
    for (int q = 0; q < NQ; q++) for (int i = 0; i < N; i++) begin in_data = qry_v[q][i]; @(negedge clk); end
    in_valid = 0;
    start = 1; @(negedge clk); start = 0;
    while (!done) begin
      @(negedge clk);
      if (out_valid) begin
        int unsigned exp_d;
        exp_d = sdtw(out_qid);
        checks++;
        if (out_dist != exp_d || out_anomaly != (exp_d > 100_000)) begin
          failures++; $display("FAIL q=%0d dist=%0d exp=%0d", out_qid, out_dist, exp_d);
        end
        got++;
      end
    end
    checks++; if (got != NQ) begin failures++; $display("FAIL %0d results", got); end
    checks++; if (steps != N + K - 1) begin failures++; $display("FAIL %0d steps", steps); end
    $display("steps=%0d", steps);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (4_000_000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
