// tb_genasm_pc: checks the processing core against the Bitap step equations,
// first on the worked 4-bit example (query CTGA, text CGTGA, k = 1) and then on
// random 64-bit vectors compared bit by bit with an independent loop model.
module tb_genasm_pc;
  int checks = 0, failures = 0;

  logic        rz4;
  logic [3:0]  a4, b4, c4, pm4, d4, s4, i4, m4, r4;
  logic        rz;
  logic [63:0] a, b, c, pm, d, s, i, m, r;

  genasm_pc #(.W(4))  u4 (.row_zero(rz4), .old_r_dm1(a4), .r_dm1(b4), .old_r_d(c4), .pm(pm4),
                          .del_o(d4), .sub_o(s4), .ins_o(i4), .mat_o(m4), .r_o(r4));
  genasm_pc #(.W(64)) u64 (.row_zero(rz), .old_r_dm1(a), .r_dm1(b), .old_r_d(c), .pm(pm),
                           .del_o(d), .sub_o(s), .ins_o(i), .mat_o(m), .r_o(r));

  task automatic chk(input logic [63:0] got, input logic [63:0] exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  initial begin
    // Text[4]=A, oldR0=oldR1=1111, PM(A)=1110: R0=1110, R1: D=1111 S=1110 I=1100 M=1110 R=1100
    rz4 = 1; a4 = 4'b1111; b4 = 4'b1111; c4 = 4'b1111; pm4 = 4'b1110; #1;
    chk(64'(r4), 64'(4'b1110), "ex1 R0");
    rz4 = 0; a4 = 4'b1111; b4 = 4'b1110; c4 = 4'b1111; pm4 = 4'b1110; #1;
    chk(64'(d4), 64'(4'b1111), "ex1 D"); chk(64'(s4), 64'(4'b1110), "ex1 S");
    chk(64'(i4), 64'(4'b1100), "ex1 I"); chk(64'(m4), 64'(4'b1110), "ex1 M");
    chk(64'(r4), 64'(4'b1100), "ex1 R1");
    // Text[1]=G: oldR0=1011 oldR1=0000 R0=1111 PM(G)=1101 -> R1=0000
    rz4 = 0; a4 = 4'b1011; b4 = 4'b1111; c4 = 4'b0000; pm4 = 4'b1101; #1;
    chk(64'(s4), 64'(4'b0110), "ex4 S"); chk(64'(r4), 64'(4'b0000), "ex4 R1");
    // Text[0]=C: oldR0=1111 oldR1=0000 R0=1111 PM(C)=0111 -> R1=0110
    rz4 = 0; a4 = 4'b1111; b4 = 4'b1111; c4 = 4'b0000; pm4 = 4'b0111; #1;
    chk(64'(m4), 64'(4'b0111), "ex5 M"); chk(64'(r4), 64'(4'b0110), "ex5 R1");
    // random, bit-level model
    for (int n = 0; n < 500; n++) begin
      logic [63:0] ed, es, ei, em, er;
      rz = ($urandom_range(0, 7) == 0);
      a = {$urandom, $urandom}; b = {$urandom, $urandom};
      c = {$urandom, $urandom}; pm = {$urandom, $urandom};
      #1;
      for (int k = 0; k < 64; k++) begin
        em[k] = ((k == 0) ? 1'b0 : c[k-1]) | pm[k];
        ed[k] = rz ? 1'b1 : a[k];
        es[k] = rz ? 1'b1 : ((k == 0) ? 1'b0 : a[k-1]);
        ei[k] = rz ? 1'b1 : ((k == 0) ? 1'b0 : b[k-1]);
        er[k] = ed[k] & es[k] & ei[k] & em[k];
      end
      chk(d, ed, "rand D"); chk(s, es, "rand S"); chk(i, ei, "rand I");
      chk(m, em, "rand M"); chk(r, er, "rand R");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
