// tb_tb_sram: fills the 64 x 192-bit TB-SRAM through its single port,
// reads every word back in random order and checks data, latency and that a
// write cycle leaves rdata unchanged.
module tb_tb_sram;
  int checks = 0, failures = 0;
  logic clk = 0;
  logic en, we;
  logic [5:0] addr;
  logic [191:0] wdata, rdata;
  logic [191:0] model [64];
  always #5 clk = ~clk;

  tb_sram u_dut (.clk, .en, .we, .addr, .wdata, .rdata);

  initial begin
    en = 0; we = 0; addr = 0; wdata = 0;
    for (int k = 0; k < 64; k++) begin
      @(negedge clk);
      en = 1; we = 1; addr = 6'(k);
      wdata = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
      model[k] = wdata;
    end
    for (int n = 0; n < 200; n++) begin
      int a;
      logic [191:0] held;
      a = $urandom_range(0, 63);
      @(negedge clk); en = 1; we = 0; addr = 6'(a);
      @(negedge clk); en = 0;
      checks++;
      if (rdata !== model[a]) begin failures++; $display("FAIL read %0d", a); end
      held = rdata;
      en = 1; we = 1; addr = 6'($urandom_range(0, 63)); wdata = model[addr];
      @(negedge clk); en = 0; we = 0;
      checks++;
      if (rdata !== held) begin failures++; $display("FAIL write disturbed rdata"); end
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
