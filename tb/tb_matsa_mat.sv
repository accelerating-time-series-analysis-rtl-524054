// tb_matsa_mat: end-to-end test of one MAT on a reduced chain (2 compute
// subarrays of 64 columns, K = 128 processing elements).
//
// The testbench writes a random reference and random queries into the memory
// subarrays, starts the MAT in query-filtering mode and then in self-join
// mode, and compares every distance with a software sDTW:
//   S[0][j] = d(q0, rj)                      (free start in the reference)
//   S[i][0] = S[i-1][0] + d(qi, r0)
//   S[i][j] = d(qi, rj) + min(S[i-1][j-1], S[i-1][j], S[i][j-1])
//   result  = min over j < ref_size of S[N-1][j],  d = |q - r|.
// It also checks that results come out in query order, that the run takes
// the expected number of wavefront steps, and it holds res_ready low at
// times so that the result stall happens.
module tb_matsa_mat;
  timeunit 1ns; timeprecision 1ps;
  import matsa_pkg::*;

  localparam int unsigned NSA  = 2;
  localparam int unsigned NMEM = 3;
  localparam int unsigned COLS = 64;
  localparam int unsigned K    = NSA * COLS;
  localparam int unsigned WPR  = COLS / W;
  localparam int unsigned PER_MEM = 256 * WPR;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic start, ready_go, advance, fin;
  mat_cfg_t cfg;
  logic wr_en;
  logic [1:0] wr_sel;
  row_t wr_row;
  logic [$clog2(WPR)-1:0] wr_word_w;
  logic [W-1:0] wr_data;
  logic res_valid, res_ready;
  logic [31:0] res_lq;
  logic [W-1:0] res_dist;

  matsa_mat #(.NSA(NSA), .NMEM(NMEM), .COLS(COLS)) dut (
    .clk, .rst_n, .start, .cfg, .ready_go, .advance, .fin,
    .wr_en, .wr_sel, .wr_row, .wr_word(wr_word_w), .wr_data,
    .res_valid, .res_ready, .res_lq, .res_dist
  );

  assign advance = ready_go;

  int checks = 0, failures = 0;
  int steps = 0, stalls = 0;
  int ref_v [K];
  int qry_v [K][16];

  function automatic int unsigned sdtw(int qi, int n, int m, bit sj);
    int unsigned s [16][K];
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

  task automatic write_elem(int sel, int idx, int val);
    @(negedge clk);
    wr_en = 1'b1; wr_sel = 2'(sel); wr_row = row_t'(idx / WPR);
    wr_word_w = ($clog2(WPR))'(idx % WPR); wr_data = val;
    @(negedge clk);
    wr_en = 1'b0;
  endtask

  // count wavefront steps started and result stalls
  always @(posedge clk) begin
    if (dut.prog_start && dut.prog == PROG_STEP) steps++;
    if (res_valid && !res_ready) stalls++;
  end

  task automatic run(bit sj, int m, int n, int nq);
    int got = 0;
    int steps0;
    cfg = '0;
    cfg.self_join = sj; cfg.ref_size = m; cfg.qlen = n; cfg.nq = nq;
    cfg.win_base = 0; cfg.win_stride = 1;
    steps0 = steps;
    @(negedge clk); start = 1'b1; @(negedge clk); start = 1'b0;
    while (!fin) begin
      @(negedge clk);
      res_ready = ($urandom_range(0, 1) != 0);
      if (res_valid && res_ready) begin
        int unsigned exp_d;
        exp_d = sdtw(sj ? res_lq : res_lq, n, m, sj);
        checks++;
        if (res_lq != got || res_dist != exp_d) begin
          failures++;
          $display("FAIL sj=%0d q=%0d (exp q %0d) dist=%0d exp=%0d", sj, res_lq, got, res_dist, exp_d);
        end
        got++;
      end
    end
    checks++;
    if (got != nq) begin failures++; $display("FAIL got %0d results, expected %0d", got, nq); end
    checks++;
    if (steps - steps0 != nq * n + K - 1) begin
      failures++; $display("FAIL %0d steps, expected %0d", steps - steps0, nq * n + K - 1);
    end
  endtask

  initial begin
    start = 0; wr_en = 0; wr_sel = 0; wr_row = 0; wr_word_w = 0; wr_data = 0; res_ready = 1;
    cfg = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int j = 0; j < K; j++) begin
      ref_v[j] = int'($urandom_range(0, 2000)) - 1000;
      write_elem(0, j, ref_v[j]);
    end
    for (int q = 0; q < 8; q++)
      for (int i = 0; i < 5; i++) begin
        qry_v[q][i] = int'($urandom_range(0, 2000)) - 1000;
        write_elem(1 + (q * 5 + i) / PER_MEM, (q * 5 + i) % PER_MEM, qry_v[q][i]);
      end
    // query filtering, reference shorter than the chain
    run(1'b0, 50, 5, 8);
    // self-join over the first windows of the reference, full chain
    run(1'b1, K, 4, 6);
    if (stalls == 0) begin failures++; $display("FAIL result stall never happened"); end
    $display("steps=%0d stalls=%0d", steps, stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2_000_000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
