// tb_genasm_pe: drives one PE (index 1 of 2, W = 8, ND = 4, so two passes)
// with random step tokens and neighbour data and compares, cycle by cycle,
// its TB-SRAM write, spill write, found flag and registered outputs with a
// model built from the Bitap step equations, including the choice of oldR[d]
// (all ones, spill value, or the PE's own previous R) and padding steps.
module tb_genasm_pe;
  localparam int W = 8, P = 2, ND = 4;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, in_pad, in_tfirst, in_mfirst, in_last;
  logic [2:0] in_tidx, msb_sel, out_tidx;
  logic [0:0] in_pass, out_pass;
  logic [W-1:0] in_pm, in_r, in_oldr, spill_rdata;
  logic out_valid, out_pad, out_tfirst, out_mfirst, out_last;
  logic [W-1:0] out_pm, out_r, out_oldr, spill_wdata;
  logic tb_we, spill_we, found;
  logic [3:0] tb_addr;
  logic [3*W-1:0] tb_wdata;
  logic [1:0] spill_addr, found_d;

  genasm_pe #(.W(W), .P(P), .ND(ND), .IDX(1)) u_dut (.*);

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    logic [W-1:0] own_r, oldd, m, ins, del, r, eoldr;
    logic [W-1:0] exp_r, exp_oldr, exp_pm;
    logic exp_valid;
    {in_valid, in_pad, in_tfirst, in_mfirst, in_last} = '0;
    in_tidx = 0; in_pass = 0; in_pm = 0; in_r = 0; in_oldr = 0; spill_rdata = 0; msb_sel = 7;
    repeat (2) @(negedge clk);
    rst_n = 1;
    own_r = '1; exp_valid = 0; exp_r = '1; exp_oldr = '1; exp_pm = '1;
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      // outputs registered from the previous step
      chk(out_valid == exp_valid, "out_valid");
      if (exp_valid) begin
        chk(out_r == exp_r, $sformatf("out_r %b exp %b", out_r, exp_r));
        chk(out_oldr == exp_oldr, "out_oldr");
        chk(out_pm == exp_pm, "out_pm");
      end
      in_valid = ($urandom_range(0, 4) != 0);
      in_pad = ($urandom_range(0, 5) == 0);
      case ($urandom_range(0, 3))
        0: begin in_tfirst = 1; in_mfirst = 0; end
        1: begin in_tfirst = 0; in_mfirst = 1; end
        default: begin in_tfirst = 0; in_mfirst = 0; end
      endcase
      in_last = 1'($urandom_range(0, 1));
      in_tidx = 3'($urandom_range(0, 7)); in_pass = 1'($urandom_range(0, 1));
      in_pm = 8'($urandom); in_r = 8'($urandom); in_oldr = 8'($urandom);
      spill_rdata = 8'($urandom); msb_sel = 3'($urandom_range(0, 7));
      #1;
      oldd = in_tfirst ? '1 : (in_mfirst ? spill_rdata : own_r);
      m = (oldd << 1) | in_pm;
      del = in_oldr; ins = in_r << 1;
      r = del & (in_oldr << 1) & ins & m;
      if (in_valid) begin
        chk(tb_we == !in_pad, "tb_we");
        chk(tb_addr == 4'(in_pass * W + in_tidx), "tb_addr");
        chk(tb_wdata == {m, ins, del}, "tb_wdata");
        chk(spill_we == in_last, "spill_we");
        chk(spill_addr == 2'(in_pass * P + 1), "spill_addr");
        chk(spill_wdata == (in_pad ? '1 : r), "spill_wdata");
        chk(found == (!in_pad && in_tidx == 0 && !r[msb_sel]), "found");
        exp_r = in_pad ? '1 : r;
        exp_oldr = in_pad ? '1 : oldd;
        exp_pm = in_pm;
        own_r = exp_r;
      end else begin
        chk(!tb_we && !spill_we && !found, "idle outputs");
      end
      exp_valid = in_valid;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
