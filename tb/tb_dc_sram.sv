// tb_dc_sram: writes random words to the DC-SRAM, reads them back through the
// separate read port and checks the one-cycle read latency, that rdata holds
// when re is low, and read-before-write on a same-address collision.
module tb_dc_sram;
  int checks = 0, failures = 0;
  logic clk = 0;
  logic re, we;
  logic [9:0] raddr, waddr;
  logic [63:0] rdata, wdata;
  logic [63:0] model [1024];
  always #5 clk = ~clk;

  dc_sram u_dut (.clk, .re, .raddr, .rdata, .we, .waddr, .wdata);

  initial begin
    re = 0; we = 0; raddr = 0; waddr = 0; wdata = 0;
    for (int k = 0; k < 1024; k++) begin
      @(negedge clk);
      we = 1; waddr = 10'(k); wdata = {$urandom, $urandom}; model[k] = wdata;
    end
    @(negedge clk); we = 0;
    for (int n = 0; n < 300; n++) begin
      int a;
      a = $urandom_range(0, 1023);
      @(negedge clk); re = 1; raddr = 10'(a);
      // same-address write in the same cycle must not affect this read
      we = 1; waddr = 10'(a); wdata = ~model[a];
      @(negedge clk); re = 0; we = 0;
      checks++;
      if (rdata !== model[a]) begin failures++; $display("FAIL read %0d", a); end
      model[a] = ~model[a];
      @(negedge clk);
      checks++;
      if (rdata !== ~model[a]) begin failures++; $display("FAIL hold %0d", a); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
