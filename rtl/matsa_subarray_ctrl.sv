// matsa_subarray_ctrl: the per-subarray controller. It runs the sDTW
// programs of a compute subarray as a sequence of micro-operations, one per
// cycle, by activating rows through the row decoder and configuring the RSAs.
//
// A program is a list of phases. A phase repeats a short list of
// micro-operations once per bit of a 32-bit vector, least significant bit
// first (bit-serial), or runs once. The full wavefront step (PROG_STEP) is:
//   1. distance  S <- |Q - R|: Q + ~R + 1 bit-serially (sum, carry), then the
//      absolute value: XOR every bit with the sign and add the sign.
//   2. minimum   of S[i-1,j-1], S[i-1,j], S[i,j-1]: two comparisons by carry
//      chains of a subtraction whose difference bits are not stored; the
//      sign flags (F1, F2) select, bit by bit, the operand of the next
//      comparison. The minimum itself is never stored (S1 in the paper).
//   3. addition  S <- S + S1, with S1 rebuilt bit by bit from the flags and
//      forced to 0 in columns that hold the first element of a query.
//   B. BEST      where the column holds the last query element and a
//      reference element, BEST <- min(BEST, S).
//   4. diagonal copy S[i,j]   -> S[i,j-1]   (one column right)
//   5. diagonal copy S[i-1,j] -> S[i-1,j-1]
//   6. vertical copy S[i,j]   -> S[i-1,j]
//   B. diagonal copy BEST     -> BEST
//   7. diagonal copy Q, FIRST and LAST flags one column right.
// PROG_SHIFT runs only step 7, PROG_LOADR shifts the reference element and
// VALID one column right, PROG_INIT writes the constant rows and clears the
// flags. Addition takes two micro-operations per bit (Sum, then Carry into
// the carry row and latch); a diagonal copy takes two per bit (read into the
// latch, write from the neighbour's latch).
//
// Interface: start with prog starts a program, busy is high while it runs
// and done pulses in its last cycle. feed_sel/bit_idx tell the MAT controller
// which bit the first subarray of the chain must receive on dc_in in the
// current cycle; cap_sel/bit_idx tell it which bit leaves the last subarray
// on dc_out.
//
// From the paper: the operations (vertical and diagonal copy, bit-serial add
// and subtract in two cycles per bit, absolute value by inversion plus one,
// minimum of three by two subtraction signs) and the order of steps 1-7.
// This design's own: the exact micro-operation lists, the unsigned 32-bit
// comparison, the all-ones value injected at the left edge as "infinity",
// the FIRST/LAST/VALID flag rows and the BEST running minimum that gives
// min(S[N,:]) per query.
module matsa_subarray_ctrl
  import matsa_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  logic   start,
  input  prog_e  prog,
  output logic   busy,
  output logic   done,
  output uop_t   uop,
  output feed_e  feed_sel,
  output cap_e   cap_sel,
  output logic [4:0] bit_idx
);

  typedef enum logic [4:0] {
    P_IDLE, P_INIT, P_INIT_BEST,
    P_D_INIT, P_D_SUB, P_A_SIGN, P_A_XOR, P_A_CIN, P_A_INC,
    P_M_C1I, P_M_C1, P_M_F1, P_M_C2I, P_M_C2, P_M_F2, P_ADD_I, P_ADD,
    P_B_G, P_B_CMP, P_B_F, P_B_SEL,
    P_DC_SL, P_DC_SDD, P_VC, P_DC_BEST, P_DC_Q, P_DC_FL, P_NF,
    P_DC_R, P_DC_V
  } phase_e;

  phase_e     ph;
  logic [4:0] k;      // bit index
  logic [3:0] u;      // micro-operation index within the bit

  // ---- micro-operation constructors ----
  function automatic uop_t op(sense_e s, logic iv, logic dcs, logic le, logic w,
                              row_t a, row_t b, row_t c, row_t d);
    uop_t o;
    o.sense = s; o.inv = iv; o.dc_sel = dcs; o.latch_en = le; o.we = w;
    o.ra = a; o.rb = b; o.rc = c; o.rd = d;
    return o;
  endfunction
  function automatic uop_t op_set(row_t d, logic v, logic le);
    return op(SENSE_NONE, v, 1'b0, le, 1'b1, '0, '0, '0, d);
  endfunction
  function automatic uop_t op_copy(row_t d, row_t a, logic le);
    return op(SENSE_MEM, 1'b0, 1'b0, le, 1'b1, a, '0, '0, d);
  endfunction
  function automatic uop_t op_not(row_t d, row_t a);
    return op(SENSE_MEM, 1'b1, 1'b0, 1'b0, 1'b1, a, '0, '0, d);
  endfunction
  function automatic uop_t op_and(row_t d, row_t a, row_t b);
    return op(SENSE_AND, 1'b0, 1'b0, 1'b0, 1'b1, a, b, '0, d);
  endfunction
  function automatic uop_t op_or(row_t d, row_t a, row_t b);
    return op(SENSE_OR, 1'b0, 1'b0, 1'b0, 1'b1, a, b, '0, d);
  endfunction
  function automatic uop_t op_sum(row_t d, row_t a, row_t b);
    return op(SENSE_SUM, 1'b0, 1'b0, 1'b0, 1'b1, a, b, '0, d);
  endfunction
  function automatic uop_t op_carry(row_t a, row_t b);
    return op(SENSE_MAJ, 1'b0, 1'b0, 1'b1, 1'b1, a, b, ROW_C, ROW_C);
  endfunction
  function automatic uop_t op_dcrd(row_t a);
    return op(SENSE_MEM, 1'b0, 1'b0, 1'b1, 1'b0, a, '0, '0, '0);
  endfunction
  function automatic uop_t op_dcwr(row_t d);
    return op(SENSE_NONE, 1'b0, 1'b1, 1'b0, 1'b1, '0, '0, '0, d);
  endfunction

  // ---- phase table: iterations (1 or W) and micro-operations per iteration ----
  function automatic logic phase_bitwise(phase_e p);
    case (p)
      P_INIT_BEST, P_D_SUB, P_A_XOR, P_A_INC, P_M_C1, P_M_C2, P_ADD,
      P_B_CMP, P_B_SEL, P_DC_SL, P_DC_SDD, P_VC, P_DC_BEST, P_DC_Q, P_DC_R:
        return 1'b1;
      default: return 1'b0;
    endcase
  endfunction

  function automatic logic [3:0] phase_nu(phase_e p);
    case (p)
      P_INIT:      return 4'd6;
      P_D_SUB:     return 4'd3;
      P_A_SIGN:    return 4'd2;
      P_A_INC:     return 4'd3;
      P_M_C1:      return 4'd2;
      P_M_F1:      return 4'd2;
      P_M_C2:      return 4'd5;
      P_M_F2:      return 4'd2;
      P_ADD:       return 4'd10;
      P_B_G:       return 4'd2;
      P_B_CMP:     return 4'd2;
      P_B_F:       return 4'd2;
      P_B_SEL:     return 4'd3;
      P_DC_SL, P_DC_SDD, P_DC_BEST, P_DC_Q, P_DC_R, P_DC_V: return 4'd2;
      P_DC_FL:     return 4'd4;
      default:     return 4'd1;
    endcase
  endfunction

  function automatic phase_e phase_next(phase_e p);
    case (p)
      P_INIT:      return P_INIT_BEST;
      P_INIT_BEST: return P_IDLE;
      P_D_INIT:    return P_D_SUB;
      P_D_SUB:     return P_A_SIGN;
      P_A_SIGN:    return P_A_XOR;
      P_A_XOR:     return P_A_CIN;
      P_A_CIN:     return P_A_INC;
      P_A_INC:     return P_M_C1I;
      P_M_C1I:     return P_M_C1;
      P_M_C1:      return P_M_F1;
      P_M_F1:      return P_M_C2I;
      P_M_C2I:     return P_M_C2;
      P_M_C2:      return P_M_F2;
      P_M_F2:      return P_ADD_I;
      P_ADD_I:     return P_ADD;
      P_ADD:       return P_B_G;
      P_B_G:       return P_B_CMP;
      P_B_CMP:     return P_B_F;
      P_B_F:       return P_B_SEL;
      P_B_SEL:     return P_DC_SL;
      P_DC_SL:     return P_DC_SDD;
      P_DC_SDD:    return P_VC;
      P_VC:        return P_DC_BEST;
      P_DC_BEST:   return P_DC_Q;
      P_DC_Q:      return P_DC_FL;
      P_DC_FL:     return P_NF;
      P_NF:        return P_IDLE;
      P_DC_R:      return P_DC_V;
      P_DC_V:      return P_IDLE;
      default:     return P_IDLE;
    endcase
  endfunction

  function automatic phase_e phase_first(prog_e pr);
    case (pr)
      PROG_INIT:  return P_INIT;
      PROG_LOADR: return P_DC_R;
      PROG_SHIFT: return P_DC_Q;
      default:    return P_D_INIT;
    endcase
  endfunction

  // ---- micro-operation of (phase, bit, index) ----
  always_comb begin
    row_t kk;
    kk       = row_t'(k);
    uop      = UOP_NOP;
    feed_sel = FEED_INF;
    cap_sel  = CAP_NONE;
    case (ph)
      P_INIT: case (u)
        4'd0: uop = op_set(ROW_ZERO, 1'b0, 1'b1);
        4'd1: uop = op_set(ROW_FIRST, 1'b0, 1'b0);
        4'd2: uop = op_set(ROW_LAST, 1'b0, 1'b0);
        4'd3: uop = op_set(ROW_NFIRST, 1'b1, 1'b0);
        4'd4: uop = op_set(ROW_VALID, 1'b0, 1'b0);
        default: uop = op_set(ROW_G, 1'b0, 1'b0);
      endcase
      P_INIT_BEST: uop = op_set(ROW_BEST + kk, 1'b1, 1'b0);
      // 1. distance
      P_D_SUB: case (u)
        4'd0: uop = op_not(ROW_T1, ROW_R + kk);
        4'd1: uop = op_sum(ROW_S + kk, ROW_Q + kk, ROW_T1);
        default: uop = op_carry(ROW_Q + kk, ROW_T1);
      endcase
      P_A_SIGN: case (u)
        4'd0: uop = op_copy(ROW_SIGN, ROW_S + row_t'(W-1), 1'b0);
        default: uop = op_set(ROW_C, 1'b0, 1'b1);
      endcase
      P_A_XOR: uop = op_sum(ROW_S + kk, ROW_S + kk, ROW_SIGN);
      P_A_CIN: uop = op_copy(ROW_C, ROW_SIGN, 1'b1);
      P_A_INC: case (u)
        4'd0: uop = op_sum(ROW_T1, ROW_S + kk, ROW_ZERO);
        4'd1: uop = op_carry(ROW_S + kk, ROW_ZERO);
        default: uop = op_copy(ROW_S + kk, ROW_T1, 1'b0);
      endcase
      // 2. minimum
      P_M_C1I, P_M_C2I, P_D_INIT: uop = op_set(ROW_C, 1'b1, 1'b1);
      P_M_C1: case (u)
        4'd0: uop = op_not(ROW_T1, ROW_SU + kk);
        default: uop = op_carry(ROW_SDD + kk, ROW_T1);
      endcase
      P_M_F1: case (u)
        4'd0: uop = op_copy(ROW_F1, ROW_C, 1'b0);
        default: uop = op_not(ROW_NF1, ROW_C);
      endcase
      P_M_C2: case (u)
        4'd0: uop = op_and(ROW_T1, ROW_F1, ROW_SU + kk);
        4'd1: uop = op_and(ROW_T2, ROW_NF1, ROW_SDD + kk);
        4'd2: uop = op_or(ROW_T3, ROW_T1, ROW_T2);
        4'd3: uop = op_not(ROW_T1, ROW_SL + kk);
        default: uop = op_carry(ROW_T3, ROW_T1);
      endcase
      P_M_F2: case (u)
        4'd0: uop = op_copy(ROW_F2, ROW_C, 1'b0);
        default: uop = op_not(ROW_NF2, ROW_C);
      endcase
      // 3. addition of the unstored minimum
      P_ADD_I: uop = op_set(ROW_C, 1'b0, 1'b1);
      P_ADD: case (u)
        4'd0: uop = op_and(ROW_T1, ROW_F1, ROW_SU + kk);
        4'd1: uop = op_and(ROW_T2, ROW_NF1, ROW_SDD + kk);
        4'd2: uop = op_or(ROW_T3, ROW_T1, ROW_T2);
        4'd3: uop = op_and(ROW_T1, ROW_F2, ROW_SL + kk);
        4'd4: uop = op_and(ROW_T2, ROW_NF2, ROW_T3);
        4'd5: uop = op_or(ROW_T3, ROW_T1, ROW_T2);
        4'd6: uop = op_and(ROW_T3, ROW_T3, ROW_NFIRST);
        4'd7: uop = op_sum(ROW_T1, ROW_S + kk, ROW_T3);
        4'd8: uop = op_carry(ROW_S + kk, ROW_T3);
        default: uop = op_copy(ROW_S + kk, ROW_T1, 1'b0);
      endcase
      // B. running minimum of the last S row
      P_B_G: case (u)
        4'd0: uop = op_and(ROW_G, ROW_LAST, ROW_VALID);
        default: uop = op_set(ROW_C, 1'b1, 1'b1);
      endcase
      P_B_CMP: case (u)
        4'd0: uop = op_not(ROW_T1, ROW_S + kk);
        default: uop = op_carry(ROW_BEST + kk, ROW_T1);
      endcase
      P_B_F: case (u)
        4'd0: uop = op_and(ROW_F1, ROW_C, ROW_G);
        default: uop = op_not(ROW_NF1, ROW_F1);
      endcase
      P_B_SEL: case (u)
        4'd0: uop = op_and(ROW_T1, ROW_F1, ROW_S + kk);
        4'd1: uop = op_and(ROW_T2, ROW_NF1, ROW_BEST + kk);
        default: uop = op_or(ROW_BEST + kk, ROW_T1, ROW_T2);
      endcase
      // 4-7. copies
      P_DC_SL:   uop = (u == 4'd0) ? op_dcrd(ROW_S + kk)    : op_dcwr(ROW_SL + kk);
      P_DC_SDD:  uop = (u == 4'd0) ? op_dcrd(ROW_SU + kk)   : op_dcwr(ROW_SDD + kk);
      P_VC:      uop = op_copy(ROW_SU + kk, ROW_S + kk, 1'b0);
      P_DC_BEST: begin
        uop = (u == 4'd0) ? op_dcrd(ROW_BEST + kk) : op_dcwr(ROW_BEST + kk);
        if (u == 4'd1) cap_sel = CAP_BEST;
      end
      P_DC_Q: begin
        uop = (u == 4'd0) ? op_dcrd(ROW_Q + kk) : op_dcwr(ROW_Q + kk);
        feed_sel = FEED_Q;
      end
      P_DC_FL: case (u)
        4'd0: uop = op_dcrd(ROW_FIRST);
        4'd1: begin uop = op_dcwr(ROW_FIRST); feed_sel = FEED_FIRST; end
        4'd2: uop = op_dcrd(ROW_LAST);
        default: begin uop = op_dcwr(ROW_LAST); feed_sel = FEED_LAST; cap_sel = CAP_LAST; end
      endcase
      P_NF:  uop = op_not(ROW_NFIRST, ROW_FIRST);
      P_DC_R: begin
        uop = (u == 4'd0) ? op_dcrd(ROW_R + kk) : op_dcwr(ROW_R + kk);
        feed_sel = FEED_R;
      end
      P_DC_V: begin
        uop = (u == 4'd0) ? op_dcrd(ROW_VALID) : op_dcwr(ROW_VALID);
        feed_sel = FEED_VALID;
      end
      default: uop = UOP_NOP;
    endcase
  end

  // ---- sequencer ----
  logic last_u, last_k;
  assign last_u  = (u == phase_nu(ph) - 4'd1);
  assign last_k  = !phase_bitwise(ph) || (k == 5'(W-1));
  assign busy    = (ph != P_IDLE);
  assign done    = busy && last_u && last_k && (phase_next(ph) == P_IDLE);
  assign bit_idx = k;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ph     <= P_IDLE;
      k      <= '0;
      u      <= '0;
    end else if (ph == P_IDLE) begin
      if (start) begin
        ph     <= phase_first(prog);
        k      <= '0;
        u      <= '0;
      end
    end else if (!last_u) begin
      u <= u + 4'd1;
    end else begin
      u <= '0;
      if (!last_k) begin
        k <= k + 5'd1;
      end else begin
        k  <= '0;
        ph <= phase_next(ph);
      end
    end
  end

  // a program is only started from idle
  assert property (@(posedge clk) disable iff (!rst_n) start |-> !busy);

endmodule
