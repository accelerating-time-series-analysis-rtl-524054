// matsa_mat_ctrl: the controller of one MAT. It runs the wavefront over the
// chain of compute subarrays of the MAT: it loads the reference into the
// chain, streams the queries in one element per wavefront step, and takes the
// per-query results out of the far end of the chain.
//
// The chain has K = NSA*COLS columns, one processing element each. Column j
// holds reference element R[j]. Query elements enter column 0 and move one
// column right per step (diagonal copy), so column j works on cell (i, j) of
// the sDTW matrix one step after column j-1 worked on (i, j-1): the
// anti-diagonal wavefront. Queries follow each other back to back, so the
// pipeline never drains between queries; a query of N elements started at
// step s0 leaves the last column at step s0 + N - 1 + K - 1.
//
// Sequence after start:
//   INIT   one PROG_INIT program (constant rows, flags cleared, BEST = ones).
//   LOADR  K PROG_LOADR programs. Each shifts the reference row right by one
//          column; the element fed is R[K-1-s] (VALID=1) for the s-th shift
//          while that index is below ref_size, else a pad column (VALID=0).
//          After K shifts R[j] sits in column j.
//   PRIME  one PROG_SHIFT program puts stream element 0 in column 0.
//   STEP   nq*N + K - 1 PROG_STEP programs; each feeds the next stream
//          element at its end. The stream is the queries one after another,
//          then bubbles (no flags). FIRST marks i = 0 and LAST marks i = N-1.
// Elements come from the memory subarrays: the reference from subarray 0,
// query elements from subarrays 1.. (query filtering, query-major order) or
// windows of the reference (self-join: window w is R[w .. w+N-1]; this MAT
// takes windows win_base, win_base+win_stride, ...).
//
// Every program start waits for advance from the global controller, which
// keeps all MATs in lock step and stalls them while a result is not yet
// taken. A step that moves a LAST flag out of the chain carries the BEST
// value of that query out bit by bit: res_valid rises with the local query
// number and its distance and stays until res_ready.
//
// From the paper: reference stationary in the columns, query elements shifted
// right every step, pipelining of consecutive queries, and the result
// min(S[N-1,:]). This design's own: loading the reference by shifting it
// through the chain, the flag rows, the result path, the stall rule and the
// self-join window order. References longer than K (the paper's sequential
// batches) are not supported.
module matsa_mat_ctrl
  import matsa_pkg::*;
#(
  parameter int unsigned NSA  = 8,          // compute subarrays in the chain
  parameter int unsigned NMEM = 56,         // memory subarrays of the MAT
  parameter int unsigned COLS = XB_COLS,
  parameter int unsigned ROWS = XB_ROWS,
  localparam int unsigned K    = NSA * COLS,
  localparam int unsigned WPR  = COLS / W,
  localparam int unsigned MSW  = (NMEM > 1) ? $clog2(NMEM) : 1
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    start,
  input  mat_cfg_t                cfg,
  output logic                    ready_go,   // waiting for advance
  input  logic                    advance,
  output logic                    fin,        // all results delivered
  // subarray controllers (all run the same program)
  output logic                    prog_start,
  output prog_e                   prog,
  input  logic                    prog_done,
  input  feed_e                   feed_sel,
  input  cap_e                    cap_sel,
  input  logic [4:0]              bit_idx,
  output logic                    chain_in,   // dc_in of the first subarray
  input  logic                    chain_out,  // dc_out of the last subarray
  // memory subarrays
  output logic                    mem_rd_en,
  output logic [MSW-1:0]          mem_rd_sel,
  output row_t                    mem_rd_row,
  input  logic [COLS-1:0]         mem_lrb,
  // results
  output logic                    res_valid,
  input  logic                    res_ready,
  output logic [31:0]             res_lq,     // local query number
  output logic [W-1:0]            res_dist
);

  typedef enum logic [3:0] {
    S_IDLE, S_FETCH, S_LATCH, S_GO, S_RUN, S_RESULT, S_FIN
  } state_e;

  typedef enum logic [1:0] {PH_INIT, PH_LOADR, PH_PRIME, PH_STEP} phase_e;

  state_e       st;
  phase_e       ph;
  mat_cfg_t     c;
  logic [31:0]  cnt;        // shifts (LOADR) or steps (STEP) done
  logic [31:0]  n_steps;
  // stream position of the next element to feed
  logic [31:0]  s_i, s_q, s_g;
  // element fed at the end of the running program
  logic [W-1:0] f_word;
  logic         f_first, f_last, f_valid;
  // element index being fetched and its word in the row buffer
  logic [31:0]  e_idx;
  logic         e_ok;
  logic [$clog2(WPR)-1:0] e_word;
  // captured result
  logic [W-1:0] cap_best;
  logic         cap_last;
  logic [31:0]  out_q;

  localparam int unsigned PER_MEM = ROWS * WPR;   // elements per memory subarray

  // element to fetch for the next program
  always_comb begin
    e_idx      = '0;
    e_ok       = 1'b0;
    mem_rd_sel = '0;
    if (ph == PH_LOADR) begin
      e_idx = 32'(K - 1) - cnt;
      e_ok  = (e_idx < c.ref_size);
    end else begin
      e_ok = (s_q < c.nq);
      if (c.self_join) e_idx = s_g + s_i;
      else begin
        e_idx      = s_g % PER_MEM;
        mem_rd_sel = MSW'(s_g / PER_MEM + 1);
      end
    end
  end
  assign mem_rd_row = row_t'(e_idx / WPR);
  assign mem_rd_en  = (st == S_FETCH);

  always_comb begin
    unique case (feed_sel)
      FEED_Q:     chain_in = f_word[bit_idx];
      FEED_R:     chain_in = f_word[bit_idx];
      FEED_FIRST: chain_in = f_first;
      FEED_LAST:  chain_in = f_last;
      FEED_VALID: chain_in = f_valid;
      default:    chain_in = 1'b1;
    endcase
  end

  assign ready_go   = (st == S_GO);
  assign prog_start = (st == S_GO) && advance;
  assign fin        = (st == S_FIN);
  assign res_valid  = (st == S_RESULT) && cap_last;
  assign res_dist   = cap_best;
  assign res_lq     = out_q;

  always_comb begin
    unique case (ph)
      PH_INIT:  prog = PROG_INIT;
      PH_LOADR: prog = PROG_LOADR;
      PH_PRIME: prog = PROG_SHIFT;
      default:  prog = PROG_STEP;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; ph <= PH_INIT; c <= '0; cnt <= '0; n_steps <= '0;
      s_i <= '0; s_q <= '0; s_g <= '0;
      f_word <= '0; f_first <= 1'b0; f_last <= 1'b0; f_valid <= 1'b0;
      e_word <= '0; cap_best <= '0; cap_last <= 1'b0; out_q <= '0;
    end else begin
      // result bits leave the last column while the step runs
      if (st == S_RUN) begin
        if (cap_sel == CAP_BEST) cap_best[bit_idx] <= chain_out;
        if (cap_sel == CAP_LAST) cap_last          <= chain_out;
      end
      unique case (st)
        S_IDLE, S_FIN: if (start) begin
          c       <= cfg;
          ph      <= PH_INIT;
          cnt     <= '0;
          n_steps <= cfg.nq * cfg.qlen + 32'(K - 1);
          s_i     <= '0;
          s_q     <= '0;
          s_g     <= cfg.self_join ? cfg.win_base : '0;
          out_q   <= '0;
          f_word  <= '0; f_first <= 1'b0; f_last <= 1'b0; f_valid <= 1'b0;
          st      <= S_GO;
        end
        S_FETCH: begin
          e_word <= e_idx[$clog2(WPR)-1:0];
          st     <= S_LATCH;
        end
        S_LATCH: begin
          f_word  <= e_ok ? mem_lrb[e_word*W +: W] : '0;
          f_valid <= e_ok;
          f_first <= e_ok && (ph != PH_LOADR) && (s_i == 0);
          f_last  <= e_ok && (ph != PH_LOADR) && (s_i == c.qlen - 1);
          if (ph != PH_LOADR && e_ok) begin
            // advance the stream to the element after this one
            if (s_i == c.qlen - 1) begin
              s_i <= '0;
              s_q <= s_q + 1;
              if (c.self_join) s_g <= s_g + c.win_stride;
              else             s_g <= s_g + 1;
            end else begin
              s_i <= s_i + 1;
              if (!c.self_join) s_g <= s_g + 1;
            end
          end
          st <= S_GO;
        end
        S_GO: if (advance) st <= S_RUN;
        S_RUN: if (prog_done) begin
          unique case (ph)
            PH_INIT: begin
              ph  <= PH_LOADR;
              cnt <= '0;
              st  <= S_FETCH;
            end
            PH_LOADR: begin
              if (cnt == 32'(K - 1)) begin
                ph  <= PH_PRIME;
                cnt <= '0;
              end else begin
                cnt <= cnt + 1;
              end
              st <= S_FETCH;
            end
            PH_PRIME: begin
              ph  <= PH_STEP;
              cnt <= '0;
              st  <= S_FETCH;
            end
            default: begin
              cnt <= cnt + 1;
              st  <= S_RESULT;
            end
          endcase
        end
        S_RESULT: begin
          // the step is over: hand out a result if a query left the chain
          if (!cap_last || res_ready) begin
            if (cap_last) out_q <= out_q + 1;
            cap_last <= 1'b0;
            st <= (cnt == n_steps) ? S_FIN : S_FETCH;
          end
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) start && (st == S_IDLE || st == S_FIN) |-> cfg.ref_size <= 32'(K));

endmodule
