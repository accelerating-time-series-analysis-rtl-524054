// matsa_rsa: one row of reconfigurable sense amplifiers (RSAs), one per
// crossbar column.
//
// In compute mode the memory row decoder activates one, two or three cells
// of every column at once. The RSA compares the resulting bitline level with
// a threshold chosen by its enable inputs, which turns the analog read into
// a Boolean function of the activated cells: a plain read (one cell), OR and
// AND (two cells, thresholds 1 and 2) and majority (three cells, threshold
// 2). The analog level is modelled here by the count of activated cells that
// hold a 1, so the block is the digital function of the sense amplifier, not
// its circuit. For addition the RSA senses OR and AND of two cells with its
// two amplifiers, forms their XOR and XORs it with the carry held in its
// latch (Sum). An inverter can be applied to the result. The Carry/DC latch
// captures the result when latch_en is high; on a diagonal-copy write the
// column writes its left neighbour's latch value (DCIn) instead of its own
// bitline result, which shifts a row one column to the right. Column 0 takes
// dc_in from the neighbouring subarray through the pass gates and the latch
// of the last column is dc_out.
//
// Interface: bl_a/bl_b/bl_c are the values of the activated cells of each
// column, wdata is what the write driver stores in the destination row in
// the second half of the same cycle. The latch updates on the clock edge.
//
// From the paper: the AND/NOR/majority/memory enables, the two sense
// amplifiers, the NOR, XOR and inverter, the Carry/DC latch, the BL/DC
// select multiplexer and the Sum, Carry, DCIn and DCOut signals (Fig. 6),
// and Sum = operands XOR stored carry. The threshold model and the reset
// value of the latch are this design's own.
module matsa_rsa
  import matsa_pkg::*;
#(
  parameter int unsigned COLS = XB_COLS
) (
  input  logic            clk,
  input  logic            rst_n,
  input  sense_e          sense,
  input  logic            inv,
  input  logic            dc_sel,
  input  logic            latch_en,
  input  logic [COLS-1:0] bl_a,
  input  logic [COLS-1:0] bl_b,
  input  logic [COLS-1:0] bl_c,
  input  logic            dc_in,
  output logic [COLS-1:0] wdata,
  output logic [COLS-1:0] latch_q,
  output logic            dc_out
);

  logic [COLS-1:0] sensed;
  logic [COLS-1:0] result;
  logic [COLS-1:0] dc_left;   // DCIn of every column: latch of the column to its left

  always_comb begin
    for (int c = 0; c < COLS; c++) begin
      logic [1:0] cnt;
      cnt = 2'd0;
      unique case (sense)
        SENSE_NONE: sensed[c] = 1'b0;
        SENSE_MEM:  sensed[c] = bl_a[c];
        SENSE_OR: begin
          cnt = {1'b0, bl_a[c]} + {1'b0, bl_b[c]};
          sensed[c] = (cnt >= 2'd1);
        end
        SENSE_AND: begin
          cnt = {1'b0, bl_a[c]} + {1'b0, bl_b[c]};
          sensed[c] = (cnt >= 2'd2);
        end
        SENSE_MAJ: begin
          cnt = {1'b0, bl_a[c]} + {1'b0, bl_b[c]} + {1'b0, bl_c[c]};
          sensed[c] = (cnt >= 2'd2);
        end
        SENSE_SUM: begin
          // OR amplifier and AND amplifier sensed together, XOR = OR & ~AND
          sensed[c] = ((bl_a[c] | bl_b[c]) & ~(bl_a[c] & bl_b[c])) ^ latch_q[c];
        end
        default:    sensed[c] = 1'b0;
      endcase
    end
  end

  assign dc_left = {latch_q[COLS-2:0], dc_in};
  assign result  = inv ? ~sensed : sensed;
  assign wdata   = dc_sel ? dc_left : result;
  assign dc_out  = latch_q[COLS-1];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)        latch_q <= '0;
    else if (latch_en) latch_q <= result;
  end

endmodule
