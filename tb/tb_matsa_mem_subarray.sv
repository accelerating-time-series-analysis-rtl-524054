// tb_matsa_mem_subarray: checks the regular-memory crossbar: random 32-bit
// element writes to random (row, word) positions, then row reads into the
// row buffer, compared with a software copy of the array. It checks the
// one-cycle read latency and that the row buffer holds its row between
// reads.
module tb_matsa_mem_subarray;
  import matsa_pkg::*;
  timeunit 1ns; timeprecision 1ps;

  localparam int unsigned COLS = 256;
  localparam int unsigned WPR  = COLS / W;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic we, rd_en;
  row_t wr_row, rd_row;
  logic [$clog2(WPR)-1:0] wr_word;
  logic [W-1:0] wr_data;
  logic [COLS-1:0] lrb;

  matsa_mem_subarray #(.COLS(COLS)) dut (.clk, .rst_n, .we, .wr_row, .wr_word, .wr_data, .rd_en, .rd_row, .lrb);

  int checks = 0, failures = 0;
  logic [COLS-1:0] model [256];

  initial begin
    we = 0; rd_en = 0; wr_row = 0; rd_row = 0; wr_word = 0; wr_data = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // fill 16 rows completely, then overwrite random words
    for (int rw = 0; rw < 16; rw++)
      for (int w = 0; w < WPR; w++) begin
        @(negedge clk);
        we = 1; wr_row = row_t'(rw); wr_word = ($clog2(WPR))'(w); wr_data = $urandom;
        model[rw][w*W +: W] = wr_data;
      end
    for (int n = 0; n < 100; n++) begin
      @(negedge clk);
      we = 1; wr_row = row_t'($urandom_range(0, 15)); wr_word = ($clog2(WPR))'($urandom_range(0, WPR - 1));
      wr_data = $urandom;
      model[wr_row][wr_word*W +: W] = wr_data;
    end
    @(negedge clk); we = 0;
    for (int n = 0; n < 64; n++) begin
      int rw;
      rw = $urandom_range(0, 15);
      rd_en = 1; rd_row = row_t'(rw);
      @(negedge clk);
      rd_en = 0; rd_row = row_t'((rw + 1) % 16);
      checks++;
      if (lrb !== model[rw]) begin failures++; $display("FAIL row %0d", rw); end
      @(negedge clk);
      checks++;
      if (lrb !== model[rw]) begin failures++; $display("FAIL row buffer did not hold row %0d", rw); end
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
