// tb_genasm_pb: processing block test with W = 16, P = 4, ND = 16: four text
// tiles and four passes around the cyclic array, so the feedback path and the
// spill write/read path are used. The testbench plays the DC controller: it
// injects one base per cycle for the first P cycles of every ND-cycle tile
// slot, serves spill reads from a behavioural memory with one cycle latency,
// and records every TB-SRAM write. Checks against the reference Bitap model:
// every stored {match, insertion, deletion} vector, the window distance
// reported through found/found_d, that no TB-SRAM entry is written twice or
// left unwritten, spill traffic counts and the run length: NT*ND injection slots, one input register, P PE stages and
// the cycle in which busy falls, NT*ND + P + 1 cycles.
// Windows shorter than W (padding) are included.
module tb_genasm_pb;
  import genasm_ref_pkg::*;
  localparam int W = 16, P = 4, ND = 16, NPASS = ND / P, NT = W / P;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic inj_valid, inj_pad, inj_tfirst, inj_mfirst, inj_last;
  logic [3:0] inj_tidx, msb_sel;
  logic [W-1:0] inj_pm;
  logic spill_re, spill_we, found, busy;
  logic [3:0] spill_raddr, spill_waddr, found_d;
  logic [W-1:0] spill_rdata, spill_wdata;
  logic [P-1:0] tb_we;
  logic [P-1:0][5:0] tb_addr;
  logic [P-1:0][3*W-1:0] tb_wdata;
  logic [W-1:0] spill_mem [ND];
  logic [3*W-1:0] cap [P][NPASS*W];
  int wr_cnt [P][NPASS*W];
  int n_spill_rd, n_spill_wr, best;

  genasm_pb #(.W(W), .P(P), .ND(ND)) u_dut (
    .clk, .rst_n, .inj_valid, .inj_pad, .inj_tfirst, .inj_mfirst, .inj_last, .inj_tidx, .inj_pm,
    .msb_sel, .spill_re, .spill_raddr, .spill_rdata, .spill_we, .spill_waddr, .spill_wdata,
    .tb_we, .tb_addr, .tb_wdata, .found, .found_d, .busy);

  always_ff @(posedge clk) if (rst_n) begin
    if (spill_re) begin spill_rdata <= spill_mem[spill_raddr]; n_spill_rd++; end
    if (spill_we) begin spill_mem[spill_waddr] <= spill_wdata; n_spill_wr++; end
    for (int x = 0; x < P; x++)
      if (tb_we[x]) begin cap[x][tb_addr[x]] <= tb_wdata[x]; wr_cnt[x][tb_addr[x]]++; end
    if (found && (best < 0 || int'(found_d) < best)) best <= int'(found_d);
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    seq_t txt, pat;
    logic [W-1:0] pm [4];
    int lt, lp, e, cyc;
    inj_valid = 0; inj_pad = 0; inj_tfirst = 0; inj_mfirst = 0; inj_last = 0;
    inj_tidx = 0; inj_pm = 0; msb_sel = 0;
    n_spill_rd = 0; n_spill_wr = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 40; n++) begin
      txt = {}; pat = {};
      lt = (n % 3 == 0) ? $urandom_range(2, W) : W;
      lp = (n % 4 == 0) ? $urandom_range(2, W) : W;
      for (int k = 0; k < W; k++) pat.push_back($urandom_range(0, 3));
      for (int k = 0; k < W; k++)
        txt.push_back(($urandom_range(0, 4) == 0) ? $urandom_range(0, 3) : pat[k]);
      e = ref_window(txt, 0, lt, pat, 0, lp, W, ND);
      for (int c = 0; c < 4; c++) pm[c] = W'(pm_of(pat, lp, c));
      for (int x = 0; x < P; x++) for (int a = 0; a < NPASS*W; a++) wr_cnt[x][a] = 0;
      best = -1;
      msb_sel = 4'(lp - 1);
      cyc = 0;
      for (int j = 0; j < NT; j++) begin
        for (int u = 0; u < ND; u++) begin
          @(negedge clk);
          cyc++;
          inj_valid = (u < P);
          if (u < P) begin
            int i;
            i = W - 1 - (j * P + u);
            inj_tidx = 4'(i); inj_pad = (i >= lt);
            inj_pm = pm[txt[i]];
            inj_tfirst = (j == 0 && u == 0); inj_mfirst = (j > 0 && u == 0);
            inj_last = (u == P - 1 && j < NT - 1);
          end
        end
      end
      @(negedge clk); inj_valid = 0;
      while (busy && cyc < 1000) begin @(negedge clk); cyc++; end
      chk(cyc == NT * ND + P + 1, $sformatf("run %0d cycles %0d", n, cyc));
      chk(best == e, $sformatf("run %0d distance %0d exp %0d", n, best, e));
      for (int i = 0; i < W; i++)
        for (int d = 0; d < ND; d++) begin
          int x, a;
          x = d % P; a = (d / P) * W + i;
          if (i < lt) begin
            chk(wr_cnt[x][a] == 1, $sformatf("run %0d i %0d d %0d written %0d times", n, i, d, wr_cnt[x][a]));
            chk(cap[x][a] == {v_mat[i][d][W-1:0], v_ins[i][d][W-1:0], v_del[i][d][W-1:0]},
                $sformatf("run %0d i %0d d %0d vectors", n, i, d));
          end else begin
            chk(wr_cnt[x][a] == 0, $sformatf("run %0d pad i %0d d %0d written", n, i, d));
          end
        end
    end
    chk(n_spill_wr == 40 * (NT - 1) * ND, $sformatf("spill writes %0d", n_spill_wr));
    chk(n_spill_rd == 40 * (NT - 1) * ND, $sformatf("spill reads %0d", n_spill_rd));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [63:0] pm_of(seq_t pat, int lp, int c);
    logic [63:0] v;
    v = '1;
    for (int b = 0; b < lp; b++) v[b] = (pat[lp - 1 - b] != c);
    return v;
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
