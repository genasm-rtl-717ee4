// tb_genasm_top: end-to-end test of one GenASM accelerator at reduced size
// (W = 16, O = 6, P = 4, ND = 16, 4 KB DC-SRAM), so that every window takes
// four text tiles and four passes around the cyclic PE array.
// A behavioural main memory with random request stalls and response delays
// holds random queries and mutated copies of them (substitutions, insertions,
// deletions) as reference regions. Each task runs in one of the three modes
// and one of the two scoring orders. Checks:
//  - CIGAR stream, edit distance and window count equal the reference model
//    of the windowed Bitap + traceback algorithm;
//  - independently of that model: every M pairs equal bases, every S unequal
//    ones, the CIGAR consumes the whole query, the number of S/I/D equals
//    the reported distance, and that distance is never below the exact
//    dynamic-programming distance;
//  - edit-distance and filter modes emit no CIGAR; the filter verdict is
//    right and the filter stops early when the threshold is passed.
// Mechanisms counted (each must occur): cyclic feedback, spill write/read,
// padded (short) text window, short last sub-pattern, multi-window task,
// gap-extend choice, substitution-last order, filter early stop, memory stall.
module tb_genasm_top;
  import genasm_pkg::*;
  import genasm_ref_pkg::*;
  localparam int W = 16, O = 6, P = 4, ND = 16, DEPTH = 256;
  localparam int TBASE = 100, PBASE = 900;

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

  genasm_top #(.W(W), .O(O), .P(P), .ND(ND), .DC_DEPTH(DEPTH)) u_dut (.*);

  // ---------------------------------------------------------- main memory
  logic [63:0] mem [2048];
  logic [63:0] rspq [$];
  int stalls;
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      mem_rsp_valid <= 1'b0;
    end else begin
      if (mem_req_valid && mem_req_ready) rspq.push_back(mem[mem_req_addr[10:0]]);
      if (rspq.size() > 0 && $urandom_range(0, 2) != 0) begin
        mem_rsp_valid <= 1'b1;
        mem_rsp_data  <= rspq.pop_front();
      end else begin
        mem_rsp_valid <= 1'b0;
      end
      mem_req_ready <= ($urandom_range(0, 3) != 0);
      if (mem_req_valid && !mem_req_ready) stalls++;
    end
  end

  // ---------------------------------------------------------- mechanisms
  int n_fb, n_spill_rd, n_spill_wr, n_pad, n_shortp, n_multi, n_ext, n_sl, n_early, n_edit;
  always_ff @(posedge clk) if (rst_n) begin
    if (u_dut.u_pb.fb_valid && !u_dut.u_pb.iq_valid) n_fb++;
    if (u_dut.u_pb.spill_re) n_spill_rd++;
    if (u_dut.u_pb.spill_we) n_spill_wr++;
    if (u_dut.inj_valid && u_dut.inj_pad) n_pad++;
    if (u_dut.tb_start && u_dut.tb_plen < 5'(W)) n_shortp++;
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
    int ntask;
    stalls = 0;
    start = 0; subs_last = 0; text_addr = TBASE; pat_addr = PBASE; text_len = 0; pat_len = 0;
    threshold = 0; mode = MODE_ALIGN; mem_req_ready = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    ntask = 60;
    for (int t = 0; t < ntask; t++) begin
      seq_t pat, txt;
      int m, errpct, ops[$], got[$], total, nwin, ok, lower, pi, ti, nerr, cyc;
      bit sl;
      mode_e md;
      pat = {}; txt = {}; got = {};
      m = (t % 5 == 0) ? $urandom_range(4, 15) : $urandom_range(16, 150);
      errpct = $urandom_range(0, 12);
      for (int k = 0; k < m; k++) pat.push_back($urandom_range(0, 3));
      for (int k = 0; k < m; k++) begin
        int r;
        r = $urandom_range(0, 99);
        if (r < errpct / 3 + 1 && errpct > 0) txt.push_back(($urandom_range(1, 3) + pat[k]) % 4);
        else if (r < 2 * (errpct / 3) + 1 && errpct > 0) ;                  // deleted from text
        else if (r < errpct) begin txt.push_back($urandom_range(0, 3)); txt.push_back(pat[k]); end
        else txt.push_back(pat[k]);
      end
      for (int k = 0; k < $urandom_range(0, 6); k++) txt.push_back($urandom_range(0, 3));
      if (txt.size() == 0) txt.push_back(0);
      store(txt, TBASE); store(pat, PBASE);
      sl = (t % 4 == 3);
      md = (t % 6 == 4) ? MODE_EDIT : ((t % 6 == 5) ? MODE_FILTER : MODE_ALIGN);
      ops = {};
      ok = ref_align(txt, pat, W, O, ND, sl, ops, total, nwin);
      lower = ref_semiglobal(txt, pat);
      @(negedge clk);
      start = 1; text_len = 24'(txt.size()); pat_len = 24'(m); subs_last = sl; mode = md;
      threshold = 24'($urandom_range(0, 12));
      @(negedge clk); start = 0;
      cyc = 0;
      while (!done && cyc < 200000) begin
        if (cigar_valid) got.push_back(int'(cigar_op));
        @(negedge clk); cyc++;
      end
      chk(done, $sformatf("task %0d finished", t));
      chk(fail == !ok, $sformatf("task %0d fail flag %0d ref ok %0d", t, fail, ok));
      if (!ok) continue;
      if (md == MODE_ALIGN) begin
        chk(got == ops, $sformatf("task %0d CIGAR mismatch (%0d vs %0d ops)", t, got.size(), ops.size()));
        chk(int'(edit_dist) == total, $sformatf("task %0d distance %0d ref %0d", t, edit_dist, total));
        chk(int'(windows) == nwin, $sformatf("task %0d windows %0d ref %0d", t, windows, nwin));
        // model-free checks on the CIGAR itself
        pi = 0; ti = 0; nerr = 0;
        foreach (got[k]) begin
          case (got[k])
            0: begin chk(ti < txt.size() && pi < m && txt[ti] == pat[pi], $sformatf("task %0d M at %0d", t, k)); ti++; pi++; end
            1: begin chk(ti < txt.size() && pi < m && txt[ti] != pat[pi], $sformatf("task %0d S at %0d", t, k)); ti++; pi++; nerr++; end
            2: begin pi++; nerr++; end
            default: begin ti++; nerr++; end
          endcase
          if (k > 0 && got[k] == got[k-1] && got[k] >= 2) n_ext++;
        end
        chk(pi == m, $sformatf("task %0d CIGAR consumes %0d of %0d query bases", t, pi, m));
        chk(nerr == int'(edit_dist), $sformatf("task %0d CIGAR errors %0d", t, nerr));
        chk(int'(edit_dist) >= lower, $sformatf("task %0d distance %0d below optimum %0d", t, edit_dist, lower));
        if (nwin > 1) n_multi++;
        if (sl) n_sl++;
      end else if (md == MODE_EDIT) begin
        chk(got.size() == 0, $sformatf("task %0d edit mode emitted CIGAR", t));
        chk(int'(edit_dist) == total, $sformatf("task %0d edit distance %0d ref %0d", t, edit_dist, total));
        n_edit++;
      end else begin
        chk(got.size() == 0, $sformatf("task %0d filter mode emitted CIGAR", t));
        chk(filter_pass == (total <= int'(threshold)),
            $sformatf("task %0d filter verdict %0d total %0d thr %0d", t, filter_pass, total, threshold));
        if (int'(windows) < nwin) n_early++;
      end
    end
    $display("mechanisms: feedback=%0d spill_wr=%0d spill_rd=%0d pad=%0d short_pattern=%0d multi_window=%0d gap_extend=%0d subs_last=%0d filter_early=%0d edit_mode=%0d mem_stall=%0d",
             n_fb, n_spill_wr, n_spill_rd, n_pad, n_shortp, n_multi, n_ext, n_sl, n_early, n_edit, stalls);
    chk(n_fb > 0, "cyclic feedback used");
    chk(n_spill_wr > 0 && n_spill_rd > 0, "spill used");
    chk(n_pad > 0, "padded window seen");
    chk(n_shortp > 0, "short last sub-pattern seen");
    chk(n_multi > 0, "multi-window task seen");
    chk(n_ext > 0, "gap extension seen");
    chk(n_sl > 0, "substitution-last order used");
    chk(n_early > 0, "filter early stop seen");
    chk(n_edit > 0, "edit-distance mode used");
    chk(stalls > 0, "memory stall seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
