// genasm_pc: GenASM processing core (PC), purely combinational.
//
// Computes one step of the Bitap recurrence for one edit distance d and one
// text character (Bitap lines 15-19):
//   D = oldR[d-1]            S = oldR[d-1] << 1
//   I = R[d-1] << 1          M = (oldR[d] << 1) | PM
//   R[d] = D & S & I & M
// A 0 bit means "partial match". The four intermediate vectors are outputs so
// that the PE can store match, insertion and deletion for traceback (the
// substitution vector is recomputed later from the deletion vector).
// For d = 0 (row_zero=1) only the exact-match rule applies; this design forces
// D, S and I to all ones so the same AND yields R[0] = M.
// Interface: W-bit vectors in, W-bit vectors out; no clock, no latency.
module genasm_pc #(
  parameter int unsigned W = 64
) (
  input  logic         row_zero,   // 1 when computing R[0]
  input  logic [W-1:0] old_r_dm1,  // oldR[d-1]
  input  logic [W-1:0] r_dm1,      // R[d-1]
  input  logic [W-1:0] old_r_d,    // oldR[d]
  input  logic [W-1:0] pm,         // pattern mask of the current text base
  output logic [W-1:0] del_o,
  output logic [W-1:0] sub_o,
  output logic [W-1:0] ins_o,
  output logic [W-1:0] mat_o,
  output logic [W-1:0] r_o
);
  always_comb begin
    mat_o = (old_r_d << 1) | pm;
    if (row_zero) begin
      del_o = '1;
      sub_o = '1;
      ins_o = '1;
    end else begin
      del_o = old_r_dm1;
      sub_o = old_r_dm1 << 1;
      ins_o = r_dm1 << 1;
    end
    r_o = del_o & sub_o & ins_o & mat_o;
  end
endmodule
