// genasm_dc_ctrl: DC controller, the control and memory management logic of
// one GenASM accelerator.
//
// For one task (a reference text region and a query) it
//   1. fetches both sequences from main memory into the DC-SRAM: text at
//      word 0 upwards, query at word DEPTH/2 upwards, 32 bases per word;
//   2. walks the overlapping windows of the divide-and-conquer traceback: a
//      window is the W bases of text and query starting at curText and
//      curPattern (fewer at the end of a sequence);
//   3. loads the window's bases (three DC-SRAM words each for text and query,
//      then a funnel shift) and builds the four pattern masks, with a 0 where
//      the query base equals A, C, G or T. The first query base sits at the
//      highest used bit, bit Lp-1, as in Bitap; bits above a short
//      sub-pattern are ones;
//   4. feeds the processing block one text base per cycle, last base first
//      (Bitap scans the text backwards), in tiles of P bases, ND cycles
//      apart, and maps the block's spill reads and writes onto the DC-SRAM
//      spill area (the top ND words);
//   5. takes the smallest distance whose R has a 0 at bit Lp-1 after text
//      index 0 as the window's edit distance and starts GenASM-TB with it;
//   6. advances curText/curPattern by what the traceback consumed, adds the
//      errors it used to the total, and repeats until the query or the text
//      is used up.
// The window whose remaining query fits in W is the last one; its traceback
// runs to the end of the query. In MODE_FILTER the task stops as soon as the
// total exceeds `threshold`; filter_pass reports total <= threshold.
// Memory interface: requests are valid/ready; responses come back in request
// order, one word per rsp_valid. done pulses for one cycle at the end.
// The window walk, overlap and distance rule follow the paper; the memory
// protocol, SRAM layout, per-window mask building (the paper keeps the masks
// in the DC-SRAM) and the filter's early stop are this design's choices.
module genasm_dc_ctrl
  import genasm_pkg::*;
#(
  parameter int unsigned W     = 64,
  parameter int unsigned P     = 64,
  parameter int unsigned ND    = 64,
  parameter int unsigned DEPTH = 1024,
  parameter int unsigned LW    = 24,   // sequence length / count width
  parameter int unsigned MAW   = 32,   // main-memory word address width
  parameter int unsigned NT    = (W + P - 1) / P,
  parameter int unsigned TIW   = (W  > 1) ? $clog2(W)  : 1,
  parameter int unsigned DW    = (ND > 1) ? $clog2(ND) : 1,
  parameter int unsigned SAW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  // task from the host
  input  logic              start,
  input  logic [MAW-1:0]    text_addr,
  input  logic [LW-1:0]     text_len,
  input  logic [MAW-1:0]    pat_addr,
  input  logic [LW-1:0]     pat_len,
  input  mode_e             mode,
  input  logic [LW-1:0]     threshold,
  output logic              busy,
  output logic              done,
  output logic              fail,
  output logic [LW-1:0]     edit_dist,
  output logic              filter_pass,
  output logic [LW-1:0]     windows,
  output logic [LW-1:0]     last_dc_cycles,
  // main memory read channel
  output logic              mem_req_valid,
  input  logic              mem_req_ready,
  output logic [MAW-1:0]    mem_req_addr,
  input  logic              mem_rsp_valid,
  input  logic [WORD_BITS-1:0] mem_rsp_data,
  // DC-SRAM
  output logic              sram_re,
  output logic [SAW-1:0]    sram_raddr,
  input  logic [WORD_BITS-1:0] sram_rdata,
  output logic              sram_we,
  output logic [SAW-1:0]    sram_waddr,
  output logic [WORD_BITS-1:0] sram_wdata,
  // processing block
  output logic              inj_valid,
  output logic              inj_pad,
  output logic              inj_tfirst,
  output logic              inj_mfirst,
  output logic              inj_last,
  output logic [TIW-1:0]    inj_tidx,
  output logic [W-1:0]      inj_pm,
  output logic [TIW-1:0]    msb_sel,
  input  logic              pb_spill_re,
  input  logic [DW-1:0]     pb_spill_raddr,
  output logic [W-1:0]      pb_spill_rdata,
  input  logic              pb_spill_we,
  input  logic [DW-1:0]     pb_spill_waddr,
  input  logic [W-1:0]      pb_spill_wdata,
  input  logic              pb_found,
  input  logic [DW-1:0]     pb_found_d,
  input  logic              pb_busy,
  // traceback engine
  output logic              tb_start,
  output logic [DW-1:0]     tb_init_err,
  output logic [TIW:0]      tb_plen,
  output logic [TIW:0]      tb_tlen,
  output logic              tb_last,
  input  logic              tb_done,
  input  logic              tb_fail,
  input  logic [TIW:0]      tb_text_consumed,
  input  logic [TIW:0]      tb_pattern_consumed,
  input  logic [TIW:0]      tb_errors_used
);
  localparam int unsigned PAT_BASE   = DEPTH / 2;
  localparam int unsigned SPILL_BASE = DEPTH - ND;
  localparam int unsigned CYC        = NT * ND;    // injection slots per window
  localparam int unsigned CW         = $clog2(CYC + 1);
  localparam int unsigned W2         = 2 * W;

  typedef enum logic [3:0] {
    C_IDLE, C_FETCH, C_WIN_INIT, C_WIN_LOAD, C_WIN_PREP, C_DC_RUN, C_DC_DRAIN,
    C_TB_START, C_TB_WAIT, C_NEXT, C_FINISH
  } state_e;
  state_e state_q;

  logic [MAW-1:0]  text_addr_q, pat_addr_q;
  logic [LW-1:0]   n_q, m_q, thr_q;
  mode_e           mode_q;
  logic [LW-1:0]   nwt_q, nwtot_q, req_cnt_q, rsp_cnt_q;
  logic [LW-1:0]   cur_text_q, cur_pat_q, total_q;
  logic [TIW:0]    lt_q, lp_q;
  logic            last_q;
  logic [2:0]      ld_cnt_q;
  logic [WORD_BITS-1:0] buf_q [6];
  logic [1:0]      txt_q [W];
  logic [W-1:0]    pm_q  [4];
  logic [CW-1:0]   cnt_q;
  logic            best_v_q;
  logic [DW-1:0]   best_q;
  logic [LW-1:0]   dc_cyc_q;

  // ---------------------------------------------------------------- window
  logic [LW-1:0]      rem_t, rem_p;
  logic [3*WORD_BITS-1:0] tcat, pcat;
  logic [2*W-1:0]     wtext, wpat;
  logic [W-1:0]       pm_full [4];
  logic [W-1:0]       pm_win  [4];
  logic [TIW:0]       shamt;

  assign rem_t = n_q - cur_text_q;
  assign rem_p = m_q - cur_pat_q;
  assign tcat  = {buf_q[2], buf_q[1], buf_q[0]};
  assign pcat  = {buf_q[5], buf_q[4], buf_q[3]};
  assign wtext = W2'(tcat >> (2 * 32'(cur_text_q[4:0])));
  assign wpat  = W2'(pcat >> (2 * 32'(cur_pat_q[4:0])));
  assign shamt = (TIW+1)'(W) - lp_q;

  always_comb begin
    for (int c = 0; c < 4; c++) begin
      for (int j = 0; j < W; j++) pm_full[c][W-1-j] = (wpat[2*j +: 2] != 2'(c));
      pm_win[c] = (pm_full[c] >> shamt) | ~({W{1'b1}} >> shamt);
    end
  end

  // ---------------------------------------------------------- injection
  logic [CW-1:0]  u_slot;     // cycle inside the current tile
  logic [CW-1:0]  tile;
  logic [TIW:0]   step;       // processing step s; text index i = W-1-s
  logic [TIW-1:0] tix;

  assign tile   = CW'(32'(cnt_q) / ND);
  assign u_slot = CW'(32'(cnt_q) % ND);
  assign step   = (TIW+1)'(32'(tile) * P + 32'(u_slot));
  assign tix    = TIW'((TIW+1)'(W - 1) - step);

  always_comb begin
    inj_valid  = (state_q == C_DC_RUN) && (32'(u_slot) < P);
    inj_pad    = ({1'b0, tix} >= lt_q);
    inj_tfirst = (tile == '0) && (u_slot == '0);
    inj_mfirst = (tile != '0) && (u_slot == '0);
    inj_last   = (32'(u_slot) == P - 1) && (32'(tile) + 1 < NT);
    inj_tidx   = tix;
    inj_pm     = pm_q[txt_q[tix]];
  end
  assign msb_sel = TIW'(lp_q - 1'b1);

  // ---------------------------------------------------------- SRAM ports
  always_comb begin
    sram_re    = 1'b0;
    sram_raddr = '0;
    sram_we    = 1'b0;
    sram_waddr = '0;
    sram_wdata = '0;
    case (state_q)
      C_FETCH: begin
        sram_we    = mem_rsp_valid;
        sram_waddr = (rsp_cnt_q < nwt_q) ? SAW'(rsp_cnt_q)
                                         : SAW'(PAT_BASE + 32'(rsp_cnt_q - nwt_q));
        sram_wdata = mem_rsp_data;
      end
      C_WIN_LOAD: begin
        sram_re    = (ld_cnt_q < 3'd6);
        sram_raddr = (ld_cnt_q < 3'd3)
                   ? SAW'(32'(cur_text_q >> 5) + 32'(ld_cnt_q))
                   : SAW'(PAT_BASE + 32'(cur_pat_q >> 5) + 32'(ld_cnt_q) - 3);
      end
      C_DC_RUN, C_DC_DRAIN: begin
        sram_re    = pb_spill_re;
        sram_raddr = SAW'(SPILL_BASE + 32'(pb_spill_raddr));
        sram_we    = pb_spill_we;
        sram_waddr = SAW'(SPILL_BASE + 32'(pb_spill_waddr));
        sram_wdata = WORD_BITS'(pb_spill_wdata);
      end
      default: ;
    endcase
  end
  assign pb_spill_rdata = W'(sram_rdata);

  assign mem_req_valid = (state_q == C_FETCH) && (req_cnt_q < nwtot_q);
  assign mem_req_addr  = (req_cnt_q < nwt_q) ? text_addr_q + MAW'(req_cnt_q)
                                             : pat_addr_q + MAW'(req_cnt_q - nwt_q);

  // ---------------------------------------------------------- control
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q     <= C_IDLE;
      text_addr_q <= '0;
      pat_addr_q  <= '0;
      n_q         <= '0;
      m_q         <= '0;
      thr_q       <= '0;
      mode_q      <= MODE_ALIGN;
      nwt_q       <= '0;
      nwtot_q     <= '0;
      req_cnt_q   <= '0;
      rsp_cnt_q   <= '0;
      cur_text_q  <= '0;
      cur_pat_q   <= '0;
      total_q     <= '0;
      lt_q        <= '0;
      lp_q        <= '0;
      last_q      <= 1'b0;
      ld_cnt_q    <= '0;
      cnt_q       <= '0;
      best_v_q    <= 1'b0;
      best_q      <= '0;
      dc_cyc_q    <= '0;
      last_dc_cycles <= '0;
      windows     <= '0;
      done        <= 1'b0;
      fail        <= 1'b0;
      filter_pass <= 1'b0;
      for (int k = 0; k < 6; k++) buf_q[k] <= '0;
      for (int j = 0; j < W; j++) txt_q[j] <= '0;
      for (int c = 0; c < 4; c++) pm_q[c] <= '1;
    end else begin
      done <= 1'b0;
      case (state_q)
        C_IDLE: begin
          if (start) begin
            text_addr_q <= text_addr;
            pat_addr_q  <= pat_addr;
            n_q         <= text_len;
            m_q         <= pat_len;
            thr_q       <= threshold;
            mode_q      <= mode;
            nwt_q       <= (text_len + LW'(BASES_PER_WORD - 1)) >> 5;
            nwtot_q     <= ((text_len + LW'(BASES_PER_WORD - 1)) >> 5) +
                           ((pat_len + LW'(BASES_PER_WORD - 1)) >> 5);
            req_cnt_q   <= '0;
            rsp_cnt_q   <= '0;
            cur_text_q  <= '0;
            cur_pat_q   <= '0;
            total_q     <= '0;
            windows     <= '0;
            fail        <= 1'b0;
            filter_pass <= 1'b0;
            state_q     <= C_FETCH;
          end
        end
        C_FETCH: begin
          if (mem_req_valid && mem_req_ready) req_cnt_q <= req_cnt_q + 1'b1;
          if (mem_rsp_valid) rsp_cnt_q <= rsp_cnt_q + 1'b1;
          if (rsp_cnt_q == nwtot_q) state_q <= C_WIN_INIT;
        end
        C_WIN_INIT: begin
          lt_q     <= (rem_t >= LW'(W)) ? (TIW+1)'(W) : (TIW+1)'(rem_t);
          lp_q     <= (rem_p >= LW'(W)) ? (TIW+1)'(W) : (TIW+1)'(rem_p);
          last_q   <= (rem_p <= LW'(W));
          ld_cnt_q <= '0;
          state_q  <= C_WIN_LOAD;
        end
        C_WIN_LOAD: begin
          if (ld_cnt_q != 3'd0) buf_q[ld_cnt_q - 1] <= sram_rdata;
          ld_cnt_q <= ld_cnt_q + 1'b1;
          if (ld_cnt_q == 3'd6) state_q <= C_WIN_PREP;
        end
        C_WIN_PREP: begin
          for (int j = 0; j < W; j++) txt_q[j] <= wtext[2*j +: 2];
          for (int c = 0; c < 4; c++) pm_q[c] <= pm_win[c];
          cnt_q    <= '0;
          best_v_q <= 1'b0;
          best_q   <= '0;
          dc_cyc_q <= '0;
          state_q  <= C_DC_RUN;
        end
        C_DC_RUN, C_DC_DRAIN: begin
          dc_cyc_q <= dc_cyc_q + 1'b1;
          if (pb_found && (!best_v_q || pb_found_d < best_q)) begin
            best_v_q <= 1'b1;
            best_q   <= pb_found_d;
          end
          if (state_q == C_DC_RUN) begin
            cnt_q <= cnt_q + 1'b1;
            if (32'(cnt_q) == CYC - 1) state_q <= C_DC_DRAIN;
          end else if (!pb_busy) begin
            last_dc_cycles <= dc_cyc_q;
            if (best_v_q) begin
              state_q <= C_TB_START;
            end else begin
              fail    <= 1'b1;
              state_q <= C_FINISH;
            end
          end
        end
        C_TB_START: state_q <= C_TB_WAIT;
        C_TB_WAIT: begin
          if (tb_done) begin
            if (tb_fail) begin
              fail    <= 1'b1;
              state_q <= C_FINISH;
            end else begin
              total_q    <= total_q + LW'(tb_errors_used);
              cur_text_q <= cur_text_q + LW'(tb_text_consumed);
              cur_pat_q  <= cur_pat_q + LW'(tb_pattern_consumed);
              windows    <= windows + 1'b1;
              state_q    <= C_NEXT;
            end
          end
        end
        C_NEXT: begin
          if (mode_q == MODE_FILTER && total_q > thr_q) state_q <= C_FINISH;
          else if (cur_pat_q < m_q && cur_text_q < n_q) state_q <= C_WIN_INIT;
          else state_q <= C_FINISH;
        end
        C_FINISH: begin
          filter_pass <= !fail && (total_q <= thr_q);
          done        <= 1'b1;
          state_q     <= C_IDLE;
        end
        default: state_q <= C_IDLE;
      endcase
    end
  end

  assign busy        = (state_q != C_IDLE);
  assign edit_dist   = total_q;
  assign tb_start    = (state_q == C_TB_START);
  assign tb_init_err = best_q;
  assign tb_plen     = lp_q;
  assign tb_tlen     = lt_q;
  assign tb_last     = last_q;

  initial begin
    assert (W <= WORD_BITS) else $error("W must not exceed the DC-SRAM word");
    assert (W % P == 0 && ND % P == 0) else $error("W and ND must be multiples of P");
  end
endmodule
