// genasm_top: one GenASM approximate string matching accelerator.
//
// GenASM aligns a query read to a reference region with a bitvector
// (Bitap-style) algorithm split into distance calculation (DC) and traceback
// (TB), one pair of accelerators per memory vault. This module is one such
// accelerator:
//   DC controller  fetches the task's sequences, walks the windows, feeds
//                  the processing block and starts the traceback;
//   DC-SRAM        8 KB buffer for text, query and spill bitvectors;
//   PB             P-PE systolic array computing the Bitap bitvectors;
//   TB-SRAMs       one 1.5 KB single-port buffer per PE, written during DC
//                  and read during TB (the port is muxed between the two);
//   GenASM-TB      traceback engine emitting one CIGAR op per cycle.
// Host side: pulse start with text/query word addresses and lengths, a mode
// (align with CIGAR, edit distance only, or pre-alignment filter with
// threshold) and the scoring order (subs_last). busy stays high until done
// pulses; edit_dist, filter_pass and fail are then valid. Memory side: a
// valid/ready request channel of word addresses and an in-order response
// channel of 64-bit words (32 bases each). The CIGAR stream cigar_valid /
// cigar_op is only driven in MODE_ALIGN. Default parameters are the paper's
// configuration: W = 64 window, O = 24 overlap, P = 64 PEs, 64 distance rows.
// The block split and sizes follow the paper; the host/memory protocol and
// the CIGAR stream port are this design's own.
// rst_n is an asynchronous active-low reset; its only synchronous use is the
// `disable iff` of the assertions below, which lint reports as mixed use.
module genasm_top
  import genasm_pkg::*;
#(
  parameter int unsigned W        = 64,
  parameter int unsigned O        = 24,
  parameter int unsigned P        = 64,
  parameter int unsigned ND       = 64,
  parameter int unsigned DC_DEPTH = 1024,
  parameter int unsigned LW       = 24,
  parameter int unsigned MAW      = 32,
  parameter int unsigned NPASS    = (ND + P - 1) / P,
  parameter int unsigned TIW      = (W  > 1) ? $clog2(W)  : 1,
  parameter int unsigned DW       = (ND > 1) ? $clog2(ND) : 1,
  parameter int unsigned PW       = (P  > 1) ? $clog2(P)  : 1,
  parameter int unsigned AW       = (NPASS*W > 1) ? $clog2(NPASS*W) : 1,
  parameter int unsigned SAW      = (DC_DEPTH > 1) ? $clog2(DC_DEPTH) : 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  logic [MAW-1:0]       text_addr,
  input  logic [LW-1:0]        text_len,
  input  logic [MAW-1:0]       pat_addr,
  input  logic [LW-1:0]        pat_len,
  input  mode_e                mode,
  input  logic                 subs_last,
  input  logic [LW-1:0]        threshold,
  output logic                 busy,
  output logic                 done,
  output logic                 fail,
  output logic [LW-1:0]        edit_dist,
  output logic                 filter_pass,
  output logic [LW-1:0]        windows,
  output logic [LW-1:0]        last_dc_cycles,
  output logic                 mem_req_valid,
  input  logic                 mem_req_ready,
  output logic [MAW-1:0]       mem_req_addr,
  input  logic                 mem_rsp_valid,
  input  logic [WORD_BITS-1:0] mem_rsp_data,
  output logic                 cigar_valid,
  output cigar_op_e            cigar_op
);
  // DC-SRAM
  logic                 s_re, s_we;
  logic [SAW-1:0]       s_raddr, s_waddr;
  logic [WORD_BITS-1:0] s_rdata, s_wdata;
  // PB
  logic                 inj_valid, inj_pad, inj_tfirst, inj_mfirst, inj_last;
  logic [TIW-1:0]       inj_tidx, msb_sel;
  logic [W-1:0]         inj_pm;
  logic                 sp_re, sp_we;
  logic [DW-1:0]        sp_raddr, sp_waddr;
  logic [W-1:0]         sp_rdata, sp_wdata;
  logic [P-1:0]         pb_tb_we;
  logic [P-1:0][AW-1:0]  pb_tb_addr;
  logic [P-1:0][3*W-1:0] pb_tb_wdata;
  logic                 pb_found, pb_busy;
  logic [DW-1:0]        pb_found_d;
  // TB engine
  logic                 tb_start, tb_last, tb_done, tb_fail, tb_rd_en, tb_op_valid;
  logic [DW-1:0]        tb_init_err;
  logic [TIW:0]         tb_plen, tb_tlen, tb_tc, tb_pc, tb_errs;
  logic [PW-1:0]        tb_rd_sel;
  logic [AW-1:0]        tb_rd_addr;
  logic [P-1:0][3*W-1:0] tb_rdata;
  cigar_op_e            tb_op;
  logic                 subs_last_q;
  mode_e                mode_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      subs_last_q <= 1'b0;
      mode_q      <= MODE_ALIGN;
    end else if (start && !busy) begin
      subs_last_q <= subs_last;
      mode_q      <= mode;
    end
  end

  genasm_dc_ctrl #(.W(W), .P(P), .ND(ND), .DEPTH(DC_DEPTH), .LW(LW), .MAW(MAW)) u_ctrl (
    .clk, .rst_n, .start, .text_addr, .text_len, .pat_addr, .pat_len, .mode, .threshold,
    .busy, .done, .fail, .edit_dist, .filter_pass, .windows, .last_dc_cycles,
    .mem_req_valid, .mem_req_ready, .mem_req_addr, .mem_rsp_valid, .mem_rsp_data,
    .sram_re(s_re), .sram_raddr(s_raddr), .sram_rdata(s_rdata),
    .sram_we(s_we), .sram_waddr(s_waddr), .sram_wdata(s_wdata),
    .inj_valid, .inj_pad, .inj_tfirst, .inj_mfirst, .inj_last, .inj_tidx, .inj_pm, .msb_sel,
    .pb_spill_re(sp_re), .pb_spill_raddr(sp_raddr), .pb_spill_rdata(sp_rdata),
    .pb_spill_we(sp_we), .pb_spill_waddr(sp_waddr), .pb_spill_wdata(sp_wdata),
    .pb_found, .pb_found_d, .pb_busy,
    .tb_start, .tb_init_err, .tb_plen, .tb_tlen, .tb_last, .tb_done, .tb_fail,
    .tb_text_consumed(tb_tc), .tb_pattern_consumed(tb_pc), .tb_errors_used(tb_errs)
  );

  dc_sram #(.DEPTH(DC_DEPTH), .WIDTH(WORD_BITS)) u_dc_sram (
    .clk, .re(s_re), .raddr(s_raddr), .rdata(s_rdata),
    .we(s_we), .waddr(s_waddr), .wdata(s_wdata)
  );

  genasm_pb #(.W(W), .P(P), .ND(ND)) u_pb (
    .clk, .rst_n,
    .inj_valid, .inj_pad, .inj_tfirst, .inj_mfirst, .inj_last, .inj_tidx, .inj_pm, .msb_sel,
    .spill_re(sp_re), .spill_raddr(sp_raddr), .spill_rdata(sp_rdata),
    .spill_we(sp_we), .spill_waddr(sp_waddr), .spill_wdata(sp_wdata),
    .tb_we(pb_tb_we), .tb_addr(pb_tb_addr), .tb_wdata(pb_tb_wdata),
    .found(pb_found), .found_d(pb_found_d), .busy(pb_busy)
  );

  // TB-SRAMs: single port shared by the PE write and the traceback read
  for (genvar x = 0; x < P; x++) begin : g_tbs
    logic          rd_here;
    assign rd_here = tb_rd_en && (tb_rd_sel == PW'(x));
    tb_sram #(.DEPTH(NPASS*W), .WIDTH(3*W)) u_tbs (
      .clk,
      .en   (pb_tb_we[x] || rd_here),
      .we   (pb_tb_we[x]),
      .addr (pb_tb_we[x] ? pb_tb_addr[x] : tb_rd_addr),
      .wdata(pb_tb_wdata[x]),
      .rdata(tb_rdata[x])
    );
    a_port_conflict: assert property (@(posedge clk) disable iff (!rst_n)
                                      !(pb_tb_we[x] && rd_here));
  end

  genasm_tb_engine #(.W(W), .O(O), .P(P), .ND(ND)) u_tb (
    .clk, .rst_n, .start(tb_start), .init_err(tb_init_err), .plen(tb_plen), .tlen(tb_tlen),
    .last_win(tb_last), .subs_last(subs_last_q),
    .rd_en(tb_rd_en), .rd_sel(tb_rd_sel), .rd_addr(tb_rd_addr), .rd_data(tb_rdata),
    .op_valid(tb_op_valid), .op(tb_op), .done(tb_done), .fail(tb_fail),
    .text_consumed(tb_tc), .pattern_consumed(tb_pc), .errors_used(tb_errs)
  );

  assign cigar_valid = tb_op_valid && (mode_q == MODE_ALIGN);
  assign cigar_op    = tb_op;
endmodule
