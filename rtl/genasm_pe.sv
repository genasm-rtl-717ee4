// genasm_pe: GenASM-DC processing element (PE) of the systolic array.
//
// A PE holds one processing core and the flip-flops that let neighbouring PEs
// work on independent bitvectors at the same time. PE x computes R[d] for
// d = pass*P + x. In the cycle it sees a step token the PE gets:
//   R[d-1]    from PE x-1's output register (computed one cycle earlier),
//   oldR[d-1] from PE x-1's forwarded oldR register (the oldR that PE x-1 used
//             one cycle earlier, i.e. R[d-1] of the previous text base),
//   oldR[d]   from its own R register (the previous text base), or all ones
//             at the first base of a window, or the DC-SRAM spill value at the
//             first base of a later text tile.
// These are the three numbered dependencies of the GenASM-DC hardware figure;
// forwarding the used oldR (rather than only delaying R[d-1]) is this
// design's way of keeping the second flip-flop right across tile boundaries.
// The step token (valid, pad, flags, text index, pass, pattern mask) is
// registered and passed on with the data, so the array is a pure pipeline of
// one cycle per PE. Padding steps (positions past the end of a short window)
// output all ones and write nothing.
// Combinational side outputs per cycle: one TB-SRAM write {match, ins, del}
// at address pass*W + text index, one spill write of R[d] at the last base of
// a tile, and a "found" flag when the base at text index 0 gives a 0 at the
// sub-pattern MSB (a window alignment with d errors).
// The core's substitution vector is left unconnected here (lint reports it as
// unused): it is not stored, because traceback rebuilds it as deletion << 1.
module genasm_pe #(
  parameter int unsigned W     = 64,
  parameter int unsigned P     = 64,
  parameter int unsigned ND    = 64,
  parameter int unsigned IDX   = 0,
  parameter int unsigned NPASS = (ND + P - 1) / P,
  parameter int unsigned TIW   = (W  > 1) ? $clog2(W)  : 1,
  parameter int unsigned GW    = (NPASS > 1) ? $clog2(NPASS) : 1,
  parameter int unsigned DW    = (ND > 1) ? $clog2(ND) : 1,
  parameter int unsigned AW    = (NPASS*W > 1) ? $clog2(NPASS*W) : 1
) (
  input  logic           clk,
  input  logic           rst_n,
  // step token and data from the previous PE (or the PB input muxes)
  input  logic           in_valid,
  input  logic           in_pad,
  input  logic           in_tfirst,   // first base of the window: oldR[d] = all ones
  input  logic           in_mfirst,   // first base of a later tile: oldR[d] from spill
  input  logic           in_last,     // last base of a tile that has a successor
  input  logic [TIW-1:0] in_tidx,     // text index i inside the window
  input  logic [GW-1:0]  in_pass,
  input  logic [W-1:0]   in_pm,
  input  logic [W-1:0]   in_r,        // R[d-1]
  input  logic [W-1:0]   in_oldr,     // oldR[d-1]
  input  logic [W-1:0]   spill_rdata, // oldR[d] read from DC-SRAM
  input  logic [TIW-1:0] msb_sel,     // sub-pattern length - 1
  // registered token and data towards the next PE
  output logic           out_valid,
  output logic           out_pad,
  output logic           out_tfirst,
  output logic           out_mfirst,
  output logic           out_last,
  output logic [TIW-1:0] out_tidx,
  output logic [GW-1:0]  out_pass,
  output logic [W-1:0]   out_pm,
  output logic [W-1:0]   out_r,
  output logic [W-1:0]   out_oldr,
  // TB-SRAM write port (this PE's own buffer)
  output logic           tb_we,
  output logic [AW-1:0]  tb_addr,
  output logic [3*W-1:0] tb_wdata,
  // DC-SRAM spill write
  output logic           spill_we,
  output logic [DW-1:0]  spill_addr,
  output logic [W-1:0]   spill_wdata,
  // window alignment found at this PE's distance
  output logic           found,
  output logic [DW-1:0]  found_d
);
  logic [W-1:0] r_q;        // own R[d] of the previous step (oldR[d])
  logic [W-1:0] old_r_d;
  logic [W-1:0] del_v, sub_v, ins_v, mat_v, r_v, r_out;
  logic [DW-1:0] d_cur;
  logic          row_zero;

  assign d_cur    = DW'(32'(in_pass) * P + IDX);
  assign row_zero = (IDX == 0) && (in_pass == '0);

  always_comb begin
    if (in_tfirst)      old_r_d = '1;
    else if (in_mfirst) old_r_d = spill_rdata;
    else                old_r_d = r_q;
  end

  genasm_pc #(.W(W)) u_pc (
    .row_zero (row_zero),
    .old_r_dm1(in_oldr),
    .r_dm1    (in_r),
    .old_r_d  (old_r_d),
    .pm       (in_pm),
    .del_o    (del_v),
    .sub_o    (sub_v),
    .ins_o    (ins_v),
    .mat_o    (mat_v),
    .r_o      (r_v)
  );

  assign r_out = in_pad ? '1 : r_v;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid  <= 1'b0;
      out_pad    <= 1'b0;
      out_tfirst <= 1'b0;
      out_mfirst <= 1'b0;
      out_last   <= 1'b0;
      out_tidx   <= '0;
      out_pass   <= '0;
      out_pm     <= '1;
      out_r      <= '1;
      out_oldr   <= '1;
      r_q        <= '1;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        out_pad    <= in_pad;
        out_tfirst <= in_tfirst;
        out_mfirst <= in_mfirst;
        out_last   <= in_last;
        out_tidx   <= in_tidx;
        out_pass   <= in_pass;
        out_pm     <= in_pm;
        out_r      <= r_out;
        out_oldr   <= in_pad ? '1 : old_r_d;
        r_q        <= r_out;
      end
    end
  end

  assign tb_we       = in_valid && !in_pad;
  assign tb_addr     = AW'(32'(in_pass) * W + 32'(in_tidx));
  assign tb_wdata    = {mat_v, ins_v, del_v};
  assign spill_we    = in_valid && in_last;
  assign spill_addr  = d_cur;
  assign spill_wdata = r_out;
  assign found       = in_valid && !in_pad && (in_tidx == '0) && !r_v[msb_sel];
  assign found_d     = d_cur;
endmodule
