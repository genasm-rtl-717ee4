// tb_genasm_top_full: the accelerator at its default size (W = 64, O = 24,
// 64 PEs, 64 distance rows, 8 KB DC-SRAM, 64 x 1.5 KB TB-SRAMs), run on the
// read lengths and error rates of the evaluation: short reads of 100, 150 and
// 250 bases at 5% error, long reads of 1,000 and 10,000 bases at 15% error
// against regions 15% longer, and the pre-alignment filter pairs (100 bases
// with threshold 5, 250 bases with threshold 15), each once similar and once
// dissimilar. Reads and regions are generated here.
// Checks: CIGAR, distance and window count equal the reference model; the
// CIGAR is consistent with the two sequences and consumes the whole read;
// every window's DC phase takes 64 + 64 + 1 cycles (64 bases injected,
// 64 PE stages, one input register); each PE writes one 24-byte TB-SRAM
// word per base of the window (64, fewer only in a short final window); the traceback emits one CIGAR op per cycle. Total cycles
// per task are printed; for the 1 Kbp and 10 Kbp reads they must stay within
// 25% of 1e9 / (236,686 and 23,669 alignments per second), the published
// single-accelerator throughput at 1 GHz. In filter mode filter_pass must
// equal (reference total <= threshold), no CIGAR may appear, and both
// outcomes must occur.
module tb_genasm_top_full;
  import genasm_pkg::*;
  import genasm_ref_pkg::*;
  localparam int TBASE = 64, PBASE = 1024;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, subs_last, busy, done, fail, filter_pass, cigar_valid;
  logic [31:0] text_addr, pat_addr;
  logic [23:0] text_len, pat_len, threshold, edit_dist, windows, last_dc_cycles;
  mode_e mode;
  cigar_op_e cigar_op;
  logic mem_req_valid, mem_req_ready, mem_rsp_valid;
  logic [31:0] mem_req_addr;
  logic [63:0] mem_rsp_data;

  genasm_top u_dut (.*);

  logic [63:0] mem [2048];
  always_ff @(posedge clk) begin
    mem_rsp_valid <= rst_n && mem_req_valid && mem_req_ready;
    mem_rsp_data  <= mem[mem_req_addr[10:0]];
  end
  assign mem_req_ready = 1'b1;

  // per-window DC measurements
  int pe0_writes, tb_busy_cycles, tb_ops, dc_bad;
  always_ff @(posedge clk) if (rst_n) begin
    if (u_dut.pb_tb_we[0]) pe0_writes++;
    if (u_dut.u_tb.state_q == u_dut.u_tb.S_RUN) tb_busy_cycles++;
    if (u_dut.tb_op_valid) tb_ops++;
    if (u_dut.tb_start && u_dut.last_dc_cycles != 24'(64 + 64 + 1)) dc_bad++;
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic store(seq_t s, int base);
    for (int w = 0; w < (s.size() + 31) / 32 + 1; w++) mem[base + w] = '0;
    for (int k = 0; k < s.size(); k++) mem[base + k / 32][2 * (k % 32) +: 2] = 2'(s[k]);
  endtask

  initial begin
    int lens[11] = '{100, 150, 250, 1000, 10000, 100, 100, 250, 250, 100, 250};
    int errs[11] = '{5, 5, 5, 15, 15, 2, 12, 3, 15, 25, 25};
    int thr[11]  = '{0, 0, 0, 0, 0, 5, 5, 15, 15, 5, 15};
    int paper_cyc[11] = '{0, 0, 0, 4225, 42249, 0, 0, 0, 0, 0, 0};
    int n_pass = 0, n_reject = 0;
    start = 0; subs_last = 0; text_addr = TBASE; pat_addr = PBASE; text_len = 0; pat_len = 0;
    threshold = 0; mode = MODE_ALIGN;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 11; t++) begin
      seq_t pat, txt;
      int m, ops[$], got[$], total, nwin, ok, pi, ti, cyc, extra;
      pat = {}; txt = {}; got = {}; ops = {};
      m = lens[t];
      for (int k = 0; k < m; k++) pat.push_back($urandom_range(0, 3));
      for (int k = 0; k < m; k++) begin
        int r;
        r = $urandom_range(0, 999);
        if (r < errs[t] * 10 / 3) txt.push_back((pat[k] + $urandom_range(1, 3)) % 4);
        else if (r < errs[t] * 20 / 3) ;
        else if (r < errs[t] * 10) begin txt.push_back($urandom_range(0, 3)); txt.push_back(pat[k]); end
        else txt.push_back(pat[k]);
      end
      // reference region of m + k bases (k = error budget)
      extra = m + m * errs[t] / 100 - txt.size();
      for (int k = 0; k < extra; k++) txt.push_back($urandom_range(0, 3));
      store(txt, TBASE); store(pat, PBASE);
      ok = ref_align(txt, pat, 64, 24, 64, 1'b0, ops, total, nwin);
      pe0_writes = 0; tb_busy_cycles = 0; tb_ops = 0; dc_bad = 0;
      @(negedge clk);
      start = 1; text_len = 24'(txt.size()); pat_len = 24'(m);
      mode = (thr[t] > 0) ? MODE_FILTER : MODE_ALIGN; threshold = 24'(thr[t]);
      @(negedge clk); start = 0;
      cyc = 0;
      while (!done && cyc < 2000000) begin
        if (cigar_valid) got.push_back(int'(cigar_op));
        @(negedge clk); cyc++;
      end
      $display("task %0d: read %0d bases, region %0d bases, %0d windows, distance %0d, %0d cycles",
               t, m, txt.size(), windows, edit_dist, cyc);
      chk(done, $sformatf("task %0d completes", t));
      chk(tb_ops == tb_busy_cycles, $sformatf("task %0d TB %0d ops in %0d cycles", t, tb_ops, tb_busy_cycles));
      chk(dc_bad == 0, $sformatf("task %0d DC phase length", t));
      if (thr[t] > 0) begin
        $display("task %0d: filter threshold %0d, reference total %0d, pass %0d", t, thr[t], total, filter_pass);
        chk(filter_pass == (ok && total <= thr[t]), $sformatf("task %0d filter decision", t));
        chk(got.size() == 0, $sformatf("task %0d filter emitted CIGAR", t));
        if (filter_pass) n_pass++; else n_reject++;
        continue;
      end
      chk(!fail && ok, $sformatf("task %0d aligns", t));
      if (paper_cyc[t] > 0)
        chk(cyc * 4 <= paper_cyc[t] * 5, $sformatf("task %0d %0d cycles vs published %0d", t, cyc, paper_cyc[t]));
      chk(got == ops, $sformatf("task %0d CIGAR equals reference (%0d vs %0d ops)", t, got.size(), ops.size()));
      chk(int'(edit_dist) == total && int'(windows) == nwin,
          $sformatf("task %0d distance %0d/%0d windows %0d/%0d", t, edit_dist, total, windows, nwin));
      pi = 0; ti = 0;
      foreach (got[k]) begin
        if (got[k] == 0) chk(txt[ti] == pat[pi], $sformatf("task %0d M at %0d", t, k));
        if (got[k] == 1) chk(txt[ti] != pat[pi], $sformatf("task %0d S at %0d", t, k));
        if (got[k] != 2) ti++;
        if (got[k] != 3) pi++;
      end
      chk(pi == m, $sformatf("task %0d consumes the read", t));
      chk(pe0_writes <= 64 * int'(windows) && pe0_writes > 64 * (int'(windows) - 1),
          $sformatf("task %0d PE writes %0d for %0d windows", t, pe0_writes, windows));
    end
    chk(n_pass > 0 && n_reject > 0, $sformatf("filter passed %0d and rejected %0d pairs", n_pass, n_reject));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
