// tb_genasm_tb_engine: traceback engine test with W = 8, P = 2, ND = 8, so the
// TB-SRAM index and address both depend on curError. The TB-SRAM contents are
// produced by the reference Bitap model and served by behavioural single-port
// memories with one cycle read latency. Checks:
//  - the three worked examples (query CTGA against text CGTGA from locations
//    0, 1, 2 give M D M M M, S M M M and I M M M);
//  - random windows in both scoring orders and both window kinds against the
//    reference traceback: op sequence, consumed counts, errors;
//  - one operation per cycle (done is seen in the cycle after the last op).
module tb_genasm_tb_engine;
  import genasm_pkg::*;
  import genasm_ref_pkg::*;
  localparam int W = 8, O = 3, P = 2, ND = 8, NPASS = ND / P;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, last_win, subs_last, rd_en, op_valid, done, fail;
  logic [2:0] init_err;
  logic [3:0] plen, tlen, tc, pc, errs;
  logic [0:0] rd_sel;
  logic [4:0] rd_addr;
  logic [P-1:0][3*W-1:0] rd_data;
  cigar_op_e op;
  logic [3*W-1:0] mem [P][NPASS*W];

  genasm_tb_engine #(.W(W), .O(O), .P(P), .ND(ND)) u_dut (
    .clk, .rst_n, .start, .init_err, .plen, .tlen, .last_win, .subs_last,
    .rd_en, .rd_sel, .rd_addr, .rd_data, .op_valid, .op, .done, .fail,
    .text_consumed(tc), .pattern_consumed(pc), .errors_used(errs));

  always_ff @(posedge clk)
    for (int x = 0; x < P; x++)
      if (rd_en && rd_sel == 1'(x)) rd_data[x] <= mem[x][rd_addr];

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic load(int lt);
    for (int i = 0; i < W; i++)
      for (int d = 0; d < ND; d++)
        mem[d % P][(d / P) * W + i] = (i < lt) ? {v_mat[i][d][W-1:0], v_ins[i][d][W-1:0], v_del[i][d][W-1:0]}
                                                : '1;
  endtask

  // run one traceback and compare with an expected op list
  task automatic run(int e0, int lp, int lt, bit last, bit sl, int exp_ops[$], int etc, int epc,
                     int eerr, string tag);
    int got[$];
    int cyc;
    @(negedge clk);
    start = 1; init_err = 3'(e0); plen = 4'(lp); tlen = 4'(lt); last_win = last; subs_last = sl;
    @(negedge clk);
    start = 0;
    cyc = 0;
    while (!done && cyc < 100) begin
      if (op_valid) got.push_back(int'(op));
      @(negedge clk);
      cyc++;
    end
    chk(!fail, {tag, " no fail"});
    chk(got == exp_ops, $sformatf("%s ops got %p exp %p", tag, got, exp_ops));
    chk(int'(tc) == etc && int'(pc) == epc && int'(errs) == eerr,
        $sformatf("%s counts %0d/%0d/%0d exp %0d/%0d/%0d", tag, tc, pc, errs, etc, epc, eerr));
    chk(cyc == exp_ops.size(), $sformatf("%s cycles %0d for %0d ops", tag, cyc, exp_ops.size()));
  endtask

  initial begin
    seq_t txt, pat;
    int e, tcn, pcn, er, n_ext;
    int ops[$];
    start = 0; init_err = 0; plen = 0; tlen = 0; last_win = 0; subs_last = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // worked examples: C=1 G=2 T=3 A=0
    txt = '{1, 2, 3, 2, 0}; pat = '{1, 3, 2, 0};
    for (int loc = 0; loc < 3; loc++) begin
      seq_t sub;
      sub = txt[loc:4];
      e = ref_window(sub, 0, sub.size(), pat, 0, 4, W, ND);
      chk(e == 1, $sformatf("example %0d distance %0d", loc, e));
      load(sub.size());
      case (loc)
        0: run(1, 4, 5, 1, 0, '{0, 3, 0, 0, 0}, 5, 4, 1, "example del");
        1: run(1, 4, 4, 1, 0, '{1, 0, 0, 0}, 4, 4, 1, "example subs");
        2: run(1, 4, 3, 1, 0, '{2, 0, 0, 0}, 3, 4, 1, "example ins");
        default: ;
      endcase
    end
    // random windows
    n_ext = 0;
    for (int n = 0; n < 300; n++) begin
      int lt, lp;
      bit last, sl;
      txt = {}; pat = {};
      lt = $urandom_range(3, W); lp = $urandom_range(2, W);
      last = (lp < W) ? 1'b1 : 1'($urandom_range(0, 1));
      sl = 1'($urandom_range(0, 1));
      for (int k = 0; k < W; k++) pat.push_back($urandom_range(0, 3));
      for (int k = 0; k < W; k++)
        txt.push_back(($urandom_range(0, 3) == 0 || k >= lp) ? $urandom_range(0, 3) : pat[k]);
      e = ref_window(txt, 0, lt, pat, 0, lp, W, ND);
      if (e < 0) continue;
      ops = {};
      if (!ref_trace(e, lp, lt, last, W, O, sl, ops, tcn, pcn, er)) continue;
      for (int k = 1; k < ops.size(); k++) if (ops[k] == ops[k-1] && ops[k] >= 2) n_ext++;
      load(lt);
      run(e, lp, lt, last, sl, ops, tcn, pcn, er, $sformatf("rand %0d", n));
    end
    chk(n_ext > 0, "gap extension seen");
    $display("gap extensions seen: %0d", n_ext);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
