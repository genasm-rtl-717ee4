// genasm_tb_engine: GenASM-TB, the traceback accelerator for one window.
//
// After GenASM-DC has filled the TB-SRAMs for a window, this engine walks the
// stored bitvectors from the sub-pattern MSB (the start of the alignment) to
// the LSB, following a chain of 0s, and emits one CIGAR operation per cycle.
// State: curError (remaining errors), textI (text index), patternI (bit of the
// 0 being followed), the last emitted operation, and the consumed counts.
// Each cycle it
//   1. reads TB-SRAM number curError mod P at address
//      (curError div P)*W + textI (one SRAM per cycle, selected by curError),
//   2. tests bit patternI of match, insertion, deletion and of the
//      substitution vector, which is the deletion vector shifted left by one,
//   3. picks an operation in the order insertion-extend, deletion-extend,
//      match, substitution, insertion-open, deletion-open (with subs_last=1
//      substitution is tested after the two gap openings, for scoring schemes
//      where a substitution costs more than opening a gap), and
//   4. computes the next read address from the updated indices.
// M/S/D advance textI, M/S/I move patternI one bit down, S/I/D use one error.
// The walk stops when W-O text or query bases have been consumed (the rest of
// the window is the overlap with the next one) or, in the last window, when
// the whole sub-pattern has been consumed.
// Timing: start (one cycle) issues the first read; from the next cycle on one
// op per cycle, op_valid/op; done pulses in the cycle after the last op with
// the consumed counts and the number of errors used. fail is set if no
// vector has a 0 at the current position, which a correct DC run never gives.
// The algorithm, the SRAM selection by curError and the shifted deletion
// vector follow the paper; rejecting edits at curError = 0 and the handling
// of a text window shorter than W are this design's choices (no operation is
// accepted once textI has passed the window's last text base).
module genasm_tb_engine
  import genasm_pkg::*;
#(
  parameter int unsigned W     = 64,
  parameter int unsigned O     = 24,
  parameter int unsigned P     = 64,
  parameter int unsigned ND    = 64,
  parameter int unsigned NPASS = (ND + P - 1) / P,
  parameter int unsigned TIW   = (W  > 1) ? $clog2(W)  : 1,
  parameter int unsigned DW    = (ND > 1) ? $clog2(ND) : 1,
  parameter int unsigned PW    = (P  > 1) ? $clog2(P)  : 1,
  parameter int unsigned AW    = (NPASS*W > 1) ? $clog2(NPASS*W) : 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  logic [DW-1:0]        init_err,   // window edit distance from DC
  input  logic [TIW:0]         plen,       // sub-pattern length, 1..W
  input  logic [TIW:0]         tlen,       // sub-text length, 1..W
  input  logic                 last_win,
  input  logic                 subs_last,
  // TB-SRAM read side
  output logic                 rd_en,
  output logic [PW-1:0]        rd_sel,
  output logic [AW-1:0]        rd_addr,
  input  logic [P-1:0][3*W-1:0] rd_data,
  // CIGAR stream and window result
  output logic                 op_valid,
  output cigar_op_e            op,
  output logic                 done,
  output logic                 fail,
  output logic [TIW:0]         text_consumed,
  output logic [TIW:0]         pattern_consumed,
  output logic [TIW:0]         errors_used
);
  typedef enum logic [1:0] {S_IDLE, S_RUN, S_DONE} state_e;
  state_e state_q;

  logic [DW-1:0]  cur_err_q;
  logic [TIW:0]   text_i_q, pat_i_q;      // pat_i_q: bit of the 0 being followed
  logic [TIW:0]   tc_q, pc_q, err_q;
  logic [TIW:0]   plen_q, tlen_q;
  logic           last_q, subs_last_q, have_prev_q;
  cigar_op_e      prev_q;                 // the "Last CIGAR" register
  logic [PW-1:0]  sel_q;

  // selected TB-SRAM word
  logic [3*W-1:0] word;
  logic [W-1:0]   v_mat, v_ins, v_del, v_sub;
  logic           b_m, b_s, b_i, b_d, any;
  cigar_op_e      pick;
  logic           stop;
  logic [DW-1:0]  n_err;
  logic [TIW:0]   n_text, n_pat, n_tc, n_pc, n_errs;

  assign word  = rd_data[sel_q];
  assign v_mat = word[3*W-1:2*W];
  assign v_ins = word[2*W-1:W];
  assign v_del = word[W-1:0];
  assign v_sub = v_del << 1;

  always_comb begin
    logic tb_text_ok, tb_err_ok;
    tb_text_ok = (text_i_q < tlen_q);
    tb_err_ok  = (cur_err_q != '0);
    b_m = !(tb_text_ok && !v_mat[pat_i_q[TIW-1:0]]);
    b_s = !(tb_text_ok && tb_err_ok && !v_sub[pat_i_q[TIW-1:0]]);
    b_d = !(tb_text_ok && tb_err_ok && !v_del[pat_i_q[TIW-1:0]]);
    b_i = !(tb_text_ok && tb_err_ok && !v_ins[pat_i_q[TIW-1:0]]);
    any = 1'b1;
    // 0 in a bit means that operation is possible here
    if (have_prev_q && prev_q == OP_I && !b_i)      pick = OP_I;
    else if (have_prev_q && prev_q == OP_D && !b_d) pick = OP_D;
    else if (!b_m)                                  pick = OP_M;
    else if (!subs_last_q && !b_s)                  pick = OP_S;
    else if (!b_i)                                  pick = OP_I;
    else if (!b_d)                                  pick = OP_D;
    else if (subs_last_q && !b_s)                   pick = OP_S;
    else begin
      pick = OP_M;
      any  = 1'b0;
    end
    n_err  = (pick == OP_M) ? cur_err_q : cur_err_q - 1'b1;
    n_text = (pick == OP_I) ? text_i_q  : text_i_q + 1'b1;
    n_tc   = (pick == OP_I) ? tc_q      : tc_q + 1'b1;
    n_pat  = (pick == OP_D) ? pat_i_q   : pat_i_q - 1'b1;
    n_pc   = (pick == OP_D) ? pc_q      : pc_q + 1'b1;
    n_errs = (pick == OP_M) ? err_q     : err_q + 1'b1;
    stop   = (n_pc == plen_q) ||
             (!last_q && (n_tc == (TIW+1)'(W-O) || n_pc == (TIW+1)'(W-O)));
  end

  // read address: from the start inputs, or from the next indices
  always_comb begin
    rd_en   = 1'b0;
    rd_sel  = '0;
    rd_addr = '0;
    if (state_q != S_RUN && start) begin
      rd_en   = 1'b1;
      rd_sel  = PW'(32'(init_err) % P);
      rd_addr = AW'((32'(init_err) / P) * W);
    end else if (state_q == S_RUN && any && !stop) begin
      rd_en   = 1'b1;
      rd_sel  = PW'(32'(n_err) % P);
      rd_addr = AW'((32'(n_err) / P) * W + 32'(n_text[TIW-1:0]));
    end
  end

  assign op_valid = (state_q == S_RUN) && any;
  assign op       = pick;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q     <= S_IDLE;
      cur_err_q   <= '0;
      text_i_q    <= '0;
      pat_i_q     <= '0;
      tc_q        <= '0;
      pc_q        <= '0;
      err_q       <= '0;
      plen_q      <= '0;
      tlen_q      <= '0;
      last_q      <= 1'b0;
      subs_last_q <= 1'b0;
      have_prev_q <= 1'b0;
      prev_q      <= OP_M;
      sel_q       <= '0;
      done        <= 1'b0;
      fail        <= 1'b0;
    end else begin
      done <= 1'b0;
      if (rd_en) sel_q <= rd_sel;
      case (state_q)
        S_IDLE, S_DONE: begin
          if (start) begin
            state_q     <= S_RUN;
            cur_err_q   <= init_err;
            text_i_q    <= '0;
            pat_i_q     <= plen - 1'b1;
            tc_q        <= '0;
            pc_q        <= '0;
            err_q       <= '0;
            plen_q      <= plen;
            tlen_q      <= tlen;
            last_q      <= last_win;
            subs_last_q <= subs_last;
            have_prev_q <= 1'b0;
            fail        <= 1'b0;
          end
        end
        S_RUN: begin
          if (!any) begin
            fail    <= 1'b1;
            done    <= 1'b1;
            state_q <= S_DONE;
          end else begin
            cur_err_q   <= n_err;
            text_i_q    <= n_text;
            pat_i_q     <= n_pat;
            tc_q        <= n_tc;
            pc_q        <= n_pc;
            err_q       <= n_errs;
            prev_q      <= pick;
            have_prev_q <= 1'b1;
            if (stop) begin
              done    <= 1'b1;
              state_q <= S_DONE;
            end
          end
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

  assign text_consumed    = tc_q;
  assign pattern_consumed = pc_q;
  assign errors_used      = err_q;
endmodule
