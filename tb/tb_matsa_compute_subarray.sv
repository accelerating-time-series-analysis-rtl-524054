// tb_matsa_compute_subarray: checks the compute subarray with hand-issued
// micro-operations.
//
// Rows are written in memory mode and read back; then it checks a vertical
// copy, the two-cycle diagonal copy (column c receives column c-1, column 0
// receives dc_in, dc_out carries the last column), an AND of two rows, a
// majority of three rows, and that a micro-operation write wins over a
// memory write in the same cycle.
module tb_matsa_compute_subarray;
  import matsa_pkg::*;
  timeunit 1ns; timeprecision 1ps;

  localparam int unsigned COLS = 64;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  uop_t            uop;
  logic            dc_in, dc_out, mem_we;
  row_t            mem_row, rd_row;
  logic [COLS-1:0] mem_wdata, rd_data;

  matsa_compute_subarray #(.COLS(COLS)) dut (
    .clk, .rst_n, .uop, .dc_in, .dc_out, .mem_we, .mem_row, .mem_wdata, .rd_row, .rd_data
  );

  int checks = 0, failures = 0;
  logic [COLS-1:0] v [4];

  task automatic wr(row_t r, logic [COLS-1:0] d);
    @(negedge clk); mem_we = 1; mem_row = r; mem_wdata = d;
    @(negedge clk); mem_we = 0;
  endtask

  task automatic chk(row_t r, logic [COLS-1:0] exp, string what);
    rd_row = r; #1;
    checks++;
    if (rd_data !== exp) begin failures++; $display("FAIL %s got %h exp %h", what, rd_data, exp); end
  endtask

  task automatic issue(uop_t o);
    @(negedge clk); uop = o;
    @(negedge clk); uop = UOP_NOP;
  endtask

  function automatic uop_t mk(sense_e s, logic iv, logic dc, logic le, logic we,
                              row_t a, row_t b, row_t c, row_t d);
    return '{sense: s, inv: iv, dc_sel: dc, latch_en: le, we: we, ra: a, rb: b, rc: c, rd: d};
  endfunction

  initial begin
    uop = UOP_NOP; dc_in = 0; mem_we = 0; mem_row = 0; rd_row = 0; mem_wdata = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 8; t++) begin
      for (int n = 0; n < 4; n++) v[n] = {$urandom, $urandom};
      wr(8'd10, v[0]); wr(8'd11, v[1]); wr(8'd12, v[2]);
      chk(8'd10, v[0], "memory write/read");
      // vertical copy 10 -> 20
      issue(mk(SENSE_MEM, 0, 0, 0, 1, 8'd10, 0, 0, 8'd20));
      chk(8'd20, v[0], "vertical copy");
      // AND 10,11 -> 21 ; MAJ 10,11,12 -> 22 ; NOT 12 -> 23
      issue(mk(SENSE_AND, 0, 0, 0, 1, 8'd10, 8'd11, 0, 8'd21));
      chk(8'd21, v[0] & v[1], "and");
      issue(mk(SENSE_MAJ, 0, 0, 0, 1, 8'd10, 8'd11, 8'd12, 8'd22));
      chk(8'd22, (v[0] & v[1]) | (v[0] & v[2]) | (v[1] & v[2]), "majority");
      issue(mk(SENSE_MEM, 1, 0, 0, 1, 8'd12, 0, 0, 8'd23));
      chk(8'd23, ~v[2], "invert");
      // diagonal copy 11 -> 24, one column to the right
      dc_in = t[0];
      issue(mk(SENSE_MEM, 0, 0, 1, 0, 8'd11, 0, 0, 0));
      checks++;
      if (dc_out !== v[1][COLS-1]) begin failures++; $display("FAIL dc_out"); end
      issue(mk(SENSE_NONE, 0, 1, 0, 1, 0, 0, 0, 8'd24));
      chk(8'd24, {v[1][COLS-2:0], dc_in}, "diagonal copy");
      // micro-operation write has precedence over a memory write
      @(negedge clk);
      uop = mk(SENSE_MEM, 0, 0, 0, 1, 8'd12, 0, 0, 8'd25);
      mem_we = 1; mem_row = 8'd26; mem_wdata = v[3];
      @(negedge clk);
      uop = UOP_NOP; mem_we = 0;
      chk(8'd25, v[2], "uop write");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
