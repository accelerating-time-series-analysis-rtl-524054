// tb_matsa_rsa: checks the row of reconfigurable sense amplifiers.
//
// For random cell values it checks every sense function against its Boolean
// meaning (read, OR, AND, majority, Sum = a ^ b ^ latch), the inverter, the
// latch capture and the diagonal-copy path (each column writes its left
// neighbour's latch, column 0 takes dc_in, dc_out is the last latch). It
// also runs a bit-serial 16-bit addition through Sum and Carry, as the
// crossbar does, and compares it with the integer sum.
module tb_matsa_rsa;
  import matsa_pkg::*;
  timeunit 1ns; timeprecision 1ps;

  localparam int unsigned COLS = 64;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  sense_e          sense;
  logic            inv, dc_sel, latch_en, dc_in, dc_out;
  logic [COLS-1:0] a, b, c, wdata, latch_q;

  matsa_rsa #(.COLS(COLS)) dut (
    .clk, .rst_n, .sense, .inv, .dc_sel, .latch_en,
    .bl_a(a), .bl_b(b), .bl_c(c), .dc_in, .wdata, .latch_q, .dc_out
  );

  int checks = 0, failures = 0;

  task automatic check(logic [COLS-1:0] got, logic [COLS-1:0] exp, string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s got %h exp %h", what, got, exp);
    end
  endtask

  function automatic logic [COLS-1:0] rnd();
    return {$urandom, $urandom};
  endfunction

  initial begin
    logic [COLS-1:0] l, sum_bits [16];
    logic [15:0] x [COLS], y [COLS];
    sense = SENSE_NONE; inv = 0; dc_sel = 0; latch_en = 0; dc_in = 0; a = 0; b = 0; c = 0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    check(latch_q, '0, "latch after reset");
    for (int t = 0; t < 20; t++) begin
      a = rnd(); b = rnd(); c = rnd();
      // load a known latch value
      sense = SENSE_MEM; inv = 0; latch_en = 1; dc_sel = 0;
      l = rnd(); a = l;
      @(negedge clk);
      check(latch_q, l, "latch capture");
      latch_en = 0; a = rnd();
      sense = SENSE_NONE; #1 check(wdata, '0, "none");
      inv = 1;            #1 check(wdata, '1, "none inverted");
      inv = 0;
      sense = SENSE_MEM;  #1 check(wdata, a, "read");
      inv = 1;            #1 check(wdata, ~a, "read inverted");
      inv = 0;
      sense = SENSE_OR;   #1 check(wdata, a | b, "or");
      sense = SENSE_AND;  #1 check(wdata, a & b, "and");
      sense = SENSE_MAJ;  #1 check(wdata, (a & b) | (a & c) | (b & c), "maj");
      sense = SENSE_SUM;  #1 check(wdata, a ^ b ^ l, "sum");
      dc_sel = 1; dc_in = t[0];
      #1 check(wdata, {l[COLS-2:0], dc_in}, "diagonal copy");
      checks++; if (dc_out !== l[COLS-1]) begin failures++; $display("FAIL dc_out"); end
      dc_sel = 0;
      @(negedge clk);
    end
    // bit-serial addition of two vectors of 16-bit numbers, one per column
    for (int col = 0; col < COLS; col++) begin x[col] = 16'($urandom); y[col] = 16'($urandom); end
    sense = SENSE_NONE; inv = 0; latch_en = 1; @(negedge clk);   // carry = 0
    c = '0;                                                       // carry row
    for (int k = 0; k < 16; k++) begin
      for (int col = 0; col < COLS; col++) begin a[col] = x[col][k]; b[col] = y[col][k]; end
      sense = SENSE_SUM; latch_en = 0; #1 sum_bits[k] = wdata;
      @(negedge clk);
      sense = SENSE_MAJ; latch_en = 1; #1 c = wdata;
      @(negedge clk);
    end
    for (int col = 0; col < COLS; col++) begin
      logic [15:0] s;
      for (int k = 0; k < 16; k++) s[k] = sum_bits[k][col];
      checks++;
      if (s !== 16'(x[col] + y[col])) begin failures++; $display("FAIL add col %0d", col); end
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
