// tb_genasm_dc_ctrl: DC controller test (W = 16, P = 4, ND = 16, 4 KB
// DC-SRAM) with the real DC-SRAM and processing block around it and a
// behavioural traceback engine that, after a few cycles, reports W-O consumed
// text and query bases (the whole sub-pattern in the last window) and as many
// errors as the distance it was started with. Checks:
//  - memory requests: the text words then the query words, in order;
//  - the injected step tokens of every window: text index order (last base
//    first), padding, tile flags, and the pattern mask of each base, computed
//    here from the sequences;
//  - the distance handed to the traceback equals the reference Bitap model;
//  - sub-pattern/sub-text lengths and last-window flag per window, the number
//    of windows and the summed distance; filter verdict and early stop.
module tb_genasm_dc_ctrl;
  import genasm_pkg::*;
  import genasm_ref_pkg::*;
  localparam int W = 16, O = 6, P = 4, ND = 16, DEPTH = 256, NT = W / P;
  localparam int TBASE = 40, PBASE = 300;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, busy, done, fail, filter_pass;
  logic [31:0] text_addr, pat_addr, mem_req_addr;
  logic [23:0] text_len, pat_len, threshold, edit_dist, windows, last_dc_cycles;
  mode_e mode;
  logic mem_req_valid, mem_req_ready, mem_rsp_valid;
  logic [63:0] mem_rsp_data, s_rdata, s_wdata;
  logic s_re, s_we;
  logic [7:0] s_raddr, s_waddr;
  logic inj_valid, inj_pad, inj_tfirst, inj_mfirst, inj_last;
  logic [3:0] inj_tidx, msb_sel;
  logic [W-1:0] inj_pm, sp_rdata, sp_wdata;
  logic sp_re, sp_we, pb_found, pb_busy;
  logic [3:0] sp_raddr, sp_waddr, pb_found_d;
  logic [P-1:0] tbw;
  logic [P-1:0][5:0] tba;
  logic [P-1:0][3*W-1:0] tbd;
  logic tb_start, tb_last, tb_done, tb_fail;
  logic [3:0] tb_init_err;
  logic [4:0] tb_plen, tb_tlen, tb_tc, tb_pc, tb_errs;

  genasm_dc_ctrl #(.W(W), .P(P), .ND(ND), .DEPTH(DEPTH)) u_dut (
    .clk, .rst_n, .start, .text_addr, .text_len, .pat_addr, .pat_len, .mode, .threshold,
    .busy, .done, .fail, .edit_dist, .filter_pass, .windows, .last_dc_cycles,
    .mem_req_valid, .mem_req_ready, .mem_req_addr, .mem_rsp_valid, .mem_rsp_data,
    .sram_re(s_re), .sram_raddr(s_raddr), .sram_rdata(s_rdata),
    .sram_we(s_we), .sram_waddr(s_waddr), .sram_wdata(s_wdata),
    .inj_valid, .inj_pad, .inj_tfirst, .inj_mfirst, .inj_last, .inj_tidx, .inj_pm, .msb_sel,
    .pb_spill_re(sp_re), .pb_spill_raddr(sp_raddr), .pb_spill_rdata(sp_rdata),
    .pb_spill_we(sp_we), .pb_spill_waddr(sp_waddr), .pb_spill_wdata(sp_wdata),
    .pb_found, .pb_found_d, .pb_busy,
    .tb_start, .tb_init_err, .tb_plen, .tb_tlen, .tb_last, .tb_done, .tb_fail,
    .tb_text_consumed(tb_tc), .tb_pattern_consumed(tb_pc), .tb_errors_used(tb_errs));
  dc_sram #(.DEPTH(DEPTH)) u_sram (.clk, .re(s_re), .raddr(s_raddr), .rdata(s_rdata),
                                   .we(s_we), .waddr(s_waddr), .wdata(s_wdata));
  genasm_pb #(.W(W), .P(P), .ND(ND)) u_pb (
    .clk, .rst_n, .inj_valid, .inj_pad, .inj_tfirst, .inj_mfirst, .inj_last, .inj_tidx, .inj_pm,
    .msb_sel, .spill_re(sp_re), .spill_raddr(sp_raddr), .spill_rdata(sp_rdata),
    .spill_we(sp_we), .spill_waddr(sp_waddr), .spill_wdata(sp_wdata),
    .tb_we(tbw), .tb_addr(tba), .tb_wdata(tbd), .found(pb_found), .found_d(pb_found_d),
    .busy(pb_busy));

  // behavioural main memory, one-cycle response, ready every other cycle
  logic [63:0] mem [1024];
  int req_log[$];
  always_ff @(posedge clk) begin
    mem_rsp_valid <= rst_n && mem_req_valid && mem_req_ready;
    mem_rsp_data  <= mem[mem_req_addr[9:0]];
    if (rst_n && mem_req_valid && mem_req_ready) req_log.push_back(int'(mem_req_addr));
    mem_req_ready <= !mem_req_ready;
  end

  // behavioural traceback engine
  int tb_wait;
  always_ff @(posedge clk) begin
    tb_done <= 1'b0;
    if (tb_start) tb_wait <= 3;
    else if (tb_wait > 0) begin
      tb_wait <= tb_wait - 1;
      if (tb_wait == 1) begin
        tb_done <= 1'b1;
        tb_pc   <= tb_last ? tb_plen : 5'(W - O);
        tb_tc   <= tb_last ? ((tb_plen < tb_tlen) ? tb_plen : tb_tlen) : 5'(W - O);
        tb_errs <= 5'(tb_init_err);
      end
    end
  end
  assign tb_fail = 1'b0;

  // token capture
  int tok_idx[$], tok_pad[$], tok_tf[$], tok_mf[$], tok_last[$];
  logic [W-1:0] tok_pm[$];
  always_ff @(posedge clk) if (rst_n && inj_valid) begin
    tok_idx.push_back(int'(inj_tidx)); tok_pad.push_back(int'(inj_pad));
    tok_tf.push_back(int'(inj_tfirst)); tok_mf.push_back(int'(inj_mfirst));
    tok_last.push_back(int'(inj_last)); tok_pm.push_back(inj_pm);
  end
  int tbs_err[$], tbs_pl[$], tbs_tl[$], tbs_last[$];
  always_ff @(posedge clk) if (rst_n && tb_start) begin
    tbs_err.push_back(int'(tb_init_err)); tbs_pl.push_back(int'(tb_plen));
    tbs_tl.push_back(int'(tb_tlen)); tbs_last.push_back(int'(tb_last));
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic store(seq_t s, int base);
    for (int w = 0; w < (s.size() + 31) / 32 + 1; w++) mem[base + w] = '0;
    for (int k = 0; k < s.size(); k++) mem[base + k / 32][2 * (k % 32) +: 2] = 2'(s[k]);
  endtask

  int n_early;
  initial begin
    n_early = 0;
    start = 0; text_addr = TBASE; pat_addr = PBASE; text_len = 0; pat_len = 0;
    threshold = 0; mode = MODE_ALIGN; mem_req_ready = 0; tb_wait = 0;
    tb_pc = 0; tb_tc = 0; tb_errs = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 30; t++) begin
      seq_t pat, txt;
      int m, n, ct, cp, win, total, cyc, nwt, nwp, tk;
      bit filt, stopped;
      pat = {}; txt = {};
      m = $urandom_range(3, 90); n = m + $urandom_range(0, 8);
      for (int k = 0; k < m; k++) pat.push_back($urandom_range(0, 3));
      for (int k = 0; k < n; k++)
        txt.push_back((k < m && $urandom_range(0, 9) != 0) ? pat[k] : $urandom_range(0, 3));
      store(txt, TBASE); store(pat, PBASE);
      req_log = {}; tok_idx = {}; tok_pad = {}; tok_tf = {}; tok_mf = {}; tok_last = {};
      tok_pm = {}; tbs_err = {}; tbs_pl = {}; tbs_tl = {}; tbs_last = {};
      filt = (t % 3 == 2);
      @(negedge clk);
      start = 1; text_len = 24'(n); pat_len = 24'(m); mode = filt ? MODE_FILTER : MODE_EDIT;
      threshold = 24'($urandom_range(0, 6));
      @(negedge clk); start = 0;
      cyc = 0;
      while (!done && cyc < 100000) begin @(negedge clk); cyc++; end
      chk(done && !fail, $sformatf("task %0d done", t));
      nwt = (n + 31) / 32; nwp = (m + 31) / 32;
      chk(req_log.size() == nwt + nwp, $sformatf("task %0d %0d requests", t, req_log.size()));
      for (int k = 0; k < req_log.size(); k++)
        chk(req_log[k] == ((k < nwt) ? TBASE + k : PBASE + k - nwt), $sformatf("task %0d request %0d", t, k));
      // walk the windows as the controller should
      ct = 0; cp = 0; win = 0; total = 0; tk = 0; stopped = 0;
      while (cp < m && ct < n && !stopped) begin
        int lt, lp, e;
        bit last;
        lt = (n - ct >= W) ? W : n - ct;
        lp = (m - cp >= W) ? W : m - cp;
        last = (m - cp <= W);
        e = ref_window(txt, ct, lt, pat, cp, lp, W, ND);
        chk(win < tbs_err.size() && tbs_err[win] == e && tbs_pl[win] == lp && tbs_tl[win] == lt &&
            tbs_last[win] == int'(last), $sformatf("task %0d window %0d handoff", t, win));
        for (int s = 0; s < W; s++) begin
          int i, tt, j;
          logic [W-1:0] epm;
          i = W - 1 - s; j = s / P; tt = s % P;
          epm = '1;
          if (i < lt) for (int b = 0; b < lp; b++) epm[b] = (pat[cp + lp - 1 - b] != txt[ct + i]);
          chk(tk < tok_idx.size() && tok_idx[tk] == i && tok_pad[tk] == int'(i >= lt) &&
              tok_tf[tk] == int'(j == 0 && tt == 0) && tok_mf[tk] == int'(j > 0 && tt == 0) &&
              tok_last[tk] == int'(tt == P - 1 && j < NT - 1),
              $sformatf("task %0d window %0d token %0d flags", t, win, s));
          if (i < lt) chk(tk < tok_pm.size() && tok_pm[tk] == epm,
                          $sformatf("task %0d window %0d token %0d mask", t, win, s));
          tk++;
        end
        total += e; win++;
        if (last) begin cp += lp; ct += (lp < lt) ? lp : lt; end
        else begin cp += W - O; ct += W - O; end
        if (filt && total > int'(threshold)) begin stopped = 1; n_early++; end
      end
      chk(int'(windows) == win, $sformatf("task %0d windows %0d exp %0d", t, windows, win));
      chk(int'(edit_dist) == total, $sformatf("task %0d total %0d exp %0d", t, edit_dist, total));
      if (filt) chk(filter_pass == (total <= int'(threshold)), $sformatf("task %0d verdict", t));
    end
    chk(n_early > 0, "filter early stop seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (500000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
