// tb_matsa_subarray_ctrl: runs the subarray controller's programs on a
// compute subarray of 64 columns and checks the result of one wavefront
// step in every column, and the length of every program.
//
// After PROG_INIT the testbench writes random Q, R, S[i-1,j-1], S[i-1,j],
// S[i,j-1] and BEST values and random FIRST/LAST/VALID flags into the
// columns (bit k of every column's element in row base+k), runs PROG_STEP
// with dc_in held at 1 (the left edge sees "infinity") and checks per
// column c:
//   S[i-1,j] (vertical copy of the new S) = |Q-R| + (FIRST ? 0 : min of 3)
//   S[i,j-1]   = new S of column c-1 (all ones in column 0)
//   S[i-1,j-1] = old S[i-1,j] of column c-1
//   BEST       = BEST' of column c-1, where BEST' = min(BEST, S) if
//                LAST & VALID else BEST
//   Q, FIRST, LAST shifted one column right.
// Program lengths: INIT 38, LOADR 66, SHIFT 69 and STEP 1236 cycles.
module tb_matsa_subarray_ctrl;
  import matsa_pkg::*;
  timeunit 1ns; timeprecision 1ps;

  localparam int unsigned COLS = 64;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic start, busy, done, dc_in, dc_out, mem_we;
  prog_e prog;
  uop_t  uop;
  feed_e feed_sel;
  cap_e  cap_sel;
  logic [4:0] bit_idx;
  row_t mem_row, rd_row;
  logic [COLS-1:0] mem_wdata, rd_data;

  matsa_subarray_ctrl u_ctrl (.clk, .rst_n, .start, .prog, .busy, .done, .uop, .feed_sel, .cap_sel, .bit_idx);
  matsa_compute_subarray #(.COLS(COLS)) u_sa (
    .clk, .rst_n, .uop, .dc_in, .dc_out, .mem_we, .mem_row, .mem_wdata, .rd_row, .rd_data
  );

  int checks = 0, failures = 0;
  logic [31:0] q [COLS], r [COLS], sdd [COLS], su [COLS], sl [COLS], best [COLS];
  logic        fi [COLS], la [COLS], va [COLS];

  task automatic write_vec(row_t base, logic [31:0] val [COLS]);
    for (int k = 0; k < 32; k++) begin
      @(negedge clk);
      mem_we = 1; mem_row = base + row_t'(k);
      for (int col = 0; col < COLS; col++) mem_wdata[col] = val[col][k];
    end
    @(negedge clk); mem_we = 0;
  endtask

  task automatic write_flag(row_t rw, logic val [COLS]);
    @(negedge clk);
    mem_we = 1; mem_row = rw;
    for (int col = 0; col < COLS; col++) mem_wdata[col] = val[col];
    @(negedge clk); mem_we = 0;
  endtask

  task automatic read_vec(row_t base, output logic [31:0] val [COLS]);
    for (int k = 0; k < 32; k++) begin
      rd_row = base + row_t'(k); #1;
      for (int col = 0; col < COLS; col++) val[col][k] = rd_data[col];
    end
  endtask

  task automatic run(prog_e p, int exp_cycles);
    int n = 0;
    @(negedge clk); start = 1; prog = p;
    @(negedge clk); start = 0;
    while (busy) begin n++; @(negedge clk); end
    checks++;
    if (n != exp_cycles) begin failures++; $display("FAIL program %0d took %0d cycles, expected %0d", p, n, exp_cycles); end
  endtask

  function automatic logic [31:0] absd(logic [31:0] a, logic [31:0] b);
    int d;
    d = int'(a) - int'(b);
    return (d < 0) ? -d : d;
  endfunction

  initial begin
    logic [31:0] s_new [COLS], best_new [COLS], got [COLS];
    start = 0; prog = PROG_INIT; dc_in = 1; mem_we = 0; mem_row = 0; rd_row = 0; mem_wdata = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    run(PROG_INIT, 38);
    run(PROG_LOADR, 66);
    run(PROG_SHIFT, 69);
    for (int t = 0; t < 3; t++) begin
      for (int col = 0; col < COLS; col++) begin
        q[col]    = $urandom_range(0, 100000) - 50000;
        r[col]    = $urandom_range(0, 100000) - 50000;
        sdd[col]  = $urandom_range(0, 1 << 20);
        su[col]   = $urandom_range(0, 1 << 20);
        sl[col]   = $urandom_range(0, 1 << 20);
        best[col] = $urandom_range(0, 1 << 21);
        fi[col]   = ($urandom_range(0, 3) == 0);
        la[col]   = ($urandom_range(0, 1) == 0);
        va[col]   = ($urandom_range(0, 3) != 0);
      end
      write_vec(ROW_Q, q); write_vec(ROW_R, r); write_vec(ROW_SDD, sdd);
      write_vec(ROW_SU, su); write_vec(ROW_SL, sl); write_vec(ROW_BEST, best);
      write_flag(ROW_FIRST, fi); write_flag(ROW_LAST, la); write_flag(ROW_VALID, va);
      for (int col = 0; col < COLS; col++) fi[col] = ~fi[col];
      write_flag(ROW_NFIRST, fi);
      for (int col = 0; col < COLS; col++) fi[col] = ~fi[col];
      dc_in = 1;
      run(PROG_STEP, 1236);
      for (int col = 0; col < COLS; col++) begin
        logic [31:0] mn;
        mn = sdd[col];
        if (su[col] < mn) mn = su[col];
        if (sl[col] < mn) mn = sl[col];
        s_new[col]    = absd(q[col], r[col]) + (fi[col] ? 32'd0 : mn);
        best_new[col] = (la[col] && va[col] && s_new[col] < best[col]) ? s_new[col] : best[col];
      end
      read_vec(ROW_SU, got);
      for (int col = 0; col < COLS; col++) begin
        checks++;
        if (got[col] !== s_new[col]) begin failures++; $display("FAIL S col %0d got %0d exp %0d", col, got[col], s_new[col]); end
      end
      read_vec(ROW_SL, got);
      for (int col = 0; col < COLS; col++) begin
        checks++;
        if (got[col] !== ((col == 0) ? 32'hFFFF_FFFF : s_new[col-1])) begin failures++; $display("FAIL S[i,j-1] col %0d", col); end
      end
      read_vec(ROW_SDD, got);
      for (int col = 0; col < COLS; col++) begin
        checks++;
        if (got[col] !== ((col == 0) ? 32'hFFFF_FFFF : su[col-1])) begin failures++; $display("FAIL S[i-1,j-1] col %0d", col); end
      end
      read_vec(ROW_BEST, got);
      for (int col = 0; col < COLS; col++) begin
        checks++;
        if (got[col] !== ((col == 0) ? 32'hFFFF_FFFF : best_new[col-1])) begin failures++; $display("FAIL BEST col %0d got %0d", col, got[col]); end
      end
      read_vec(ROW_Q, got);
      for (int col = 1; col < COLS; col++) begin
        checks++;
        if (got[col] !== q[col-1]) begin failures++; $display("FAIL Q shift col %0d", col); end
      end
      rd_row = ROW_LAST; #1;
      for (int col = 1; col < COLS; col++) begin
        checks++;
        if (rd_data[col] !== la[col-1]) begin failures++; $display("FAIL LAST shift col %0d", col); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
