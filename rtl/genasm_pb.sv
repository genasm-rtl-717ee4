// genasm_pb: GenASM-DC processing block (PB), a linear cyclic systolic array.
//
// P processing elements are chained; PE x works on edit distance
// d = pass*P + x. The DC controller injects one step token per cycle (a text
// base with its pattern mask) for the first P bases of a text tile; the token
// then ripples one PE per cycle, so PE x handles base tt of the tile in cycle
// tt + x (the diagonal wavefront of the unrolled Bitap loop). When the window
// needs more distance rows than PEs (ND > P), the last PE's outputs loop back
// into PE 1 through the input muxes and the same bases are processed again
// for rows P..2P-1, and so on (pass = 1, 2, ...). The controller leaves ND
// cycles between tiles so the feedback never collides with new input.
// Across text tiles a PE needs oldR[d] of the previous tile's last base: the
// PE that processes a tile's last base writes R[d] to the DC-SRAM spill area
// (address d) and the PE that processes the next tile's first base reads it.
// With this schedule at most one spill read and one spill write happen per
// cycle. The read is requested one cycle ahead because the SRAM read takes a
// cycle. In the default configuration (P = ND = W = 64) there is a single
// pass and a single tile, so the feedback and spill paths stay idle.
// Each PE also writes {match, insertion, deletion} to its own TB-SRAM every
// step. found/found_d report the smallest distance whose R has a 0 at the
// sub-pattern MSB after text index 0 in this cycle.
// The tile and pass schedule follows the paper's four-thread example; the
// token format and the one-cycle-ahead spill request are this design's own.
// rst_n is an asynchronous active-low reset; its only synchronous use is the
// `disable iff` of the assertions below, which lint reports as mixed use.
module genasm_pb #(
  parameter int unsigned W     = 64,
  parameter int unsigned P     = 64,
  parameter int unsigned ND    = 64,
  parameter int unsigned NPASS = (ND + P - 1) / P,
  parameter int unsigned TIW   = (W  > 1) ? $clog2(W)  : 1,
  parameter int unsigned GW    = (NPASS > 1) ? $clog2(NPASS) : 1,
  parameter int unsigned DW    = (ND > 1) ? $clog2(ND) : 1,
  parameter int unsigned AW    = (NPASS*W > 1) ? $clog2(NPASS*W) : 1
) (
  input  logic           clk,
  input  logic           rst_n,
  // step token from the DC controller
  input  logic           inj_valid,
  input  logic           inj_pad,
  input  logic           inj_tfirst,
  input  logic           inj_mfirst,
  input  logic           inj_last,
  input  logic [TIW-1:0] inj_tidx,
  input  logic [W-1:0]   inj_pm,
  input  logic [TIW-1:0] msb_sel,
  // DC-SRAM spill port (addresses are distance rows)
  output logic           spill_re,
  output logic [DW-1:0]  spill_raddr,
  input  logic [W-1:0]   spill_rdata,
  output logic           spill_we,
  output logic [DW-1:0]  spill_waddr,
  output logic [W-1:0]   spill_wdata,
  // TB-SRAM write ports, one per PE
  output logic [P-1:0]            tb_we,
  output logic [P-1:0][AW-1:0]    tb_addr,
  output logic [P-1:0][3*W-1:0]   tb_wdata,
  // results
  output logic           found,
  output logic [DW-1:0]  found_d,
  output logic           busy
);
  // registered controller input (the PB input flops)
  logic           iq_valid, iq_pad, iq_tfirst, iq_mfirst, iq_last;
  logic [TIW-1:0] iq_tidx;
  logic [W-1:0]   iq_pm;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      iq_valid  <= 1'b0;
      iq_pad    <= 1'b0;
      iq_tfirst <= 1'b0;
      iq_mfirst <= 1'b0;
      iq_last   <= 1'b0;
      iq_tidx   <= '0;
      iq_pm     <= '1;
    end else begin
      iq_valid  <= inj_valid;
      iq_pad    <= inj_pad;
      iq_tfirst <= inj_tfirst;
      iq_mfirst <= inj_mfirst;
      iq_last   <= inj_last;
      iq_tidx   <= inj_tidx;
      iq_pm     <= inj_pm;
    end
  end

  // per-PE input (in_*) and registered output (o_*) signals
  logic [P-1:0]           in_valid, in_pad, in_tfirst, in_mfirst, in_last;
  logic [P-1:0][TIW-1:0]  in_tidx;
  logic [P-1:0][GW-1:0]   in_pass;
  logic [P-1:0][W-1:0]    in_pm, in_r, in_oldr;
  logic [P-1:0]           o_valid, o_pad, o_tfirst, o_mfirst, o_last;
  logic [P-1:0][TIW-1:0]  o_tidx;
  logic [P-1:0][GW-1:0]   o_pass;
  logic [P-1:0][W-1:0]    o_pm, o_r, o_oldr;
  logic [P-1:0]           s_we, f_hit;
  logic [P-1:0][DW-1:0]   s_addr, f_d;
  logic [P-1:0][W-1:0]    s_data;

  // feedback from the last PE continues with the next pass
  logic fb_valid;
  assign fb_valid = o_valid[P-1] && (32'(o_pass[P-1]) + 1 < NPASS);

  always_comb begin
    if (iq_valid) begin
      in_valid[0]  = 1'b1;
      in_pad[0]    = iq_pad;
      in_tfirst[0] = iq_tfirst;
      in_mfirst[0] = iq_mfirst;
      in_last[0]   = iq_last;
      in_tidx[0]   = iq_tidx;
      in_pass[0]   = '0;
      in_pm[0]     = iq_pm;
      in_r[0]      = '1;
      in_oldr[0]   = '1;
    end else begin
      in_valid[0]  = fb_valid;
      in_pad[0]    = o_pad[P-1];
      in_tfirst[0] = o_tfirst[P-1];
      in_mfirst[0] = o_mfirst[P-1];
      in_last[0]   = o_last[P-1];
      in_tidx[0]   = o_tidx[P-1];
      in_pass[0]   = GW'(32'(o_pass[P-1]) + 1);
      in_pm[0]     = o_pm[P-1];
      in_r[0]      = o_r[P-1];
      in_oldr[0]   = o_oldr[P-1];
    end
    for (int x = 1; x < P; x++) begin
      in_valid[x]  = o_valid[x-1];
      in_pad[x]    = o_pad[x-1];
      in_tfirst[x] = o_tfirst[x-1];
      in_mfirst[x] = o_mfirst[x-1];
      in_last[x]   = o_last[x-1];
      in_tidx[x]   = o_tidx[x-1];
      in_pass[x]   = o_pass[x-1];
      in_pm[x]     = o_pm[x-1];
      in_r[x]      = o_r[x-1];
      in_oldr[x]   = o_oldr[x-1];
    end
  end

  for (genvar x = 0; x < P; x++) begin : g_pe
    genasm_pe #(.W(W), .P(P), .ND(ND), .IDX(x)) u_pe (
      .clk        (clk),
      .rst_n      (rst_n),
      .in_valid   (in_valid[x]),
      .in_pad     (in_pad[x]),
      .in_tfirst  (in_tfirst[x]),
      .in_mfirst  (in_mfirst[x]),
      .in_last    (in_last[x]),
      .in_tidx    (in_tidx[x]),
      .in_pass    (in_pass[x]),
      .in_pm      (in_pm[x]),
      .in_r       (in_r[x]),
      .in_oldr    (in_oldr[x]),
      .spill_rdata(spill_rdata),
      .msb_sel    (msb_sel),
      .out_valid  (o_valid[x]),
      .out_pad    (o_pad[x]),
      .out_tfirst (o_tfirst[x]),
      .out_mfirst (o_mfirst[x]),
      .out_last   (o_last[x]),
      .out_tidx   (o_tidx[x]),
      .out_pass   (o_pass[x]),
      .out_pm     (o_pm[x]),
      .out_r      (o_r[x]),
      .out_oldr   (o_oldr[x]),
      .tb_we      (tb_we[x]),
      .tb_addr    (tb_addr[x]),
      .tb_wdata   (tb_wdata[x]),
      .spill_we   (s_we[x]),
      .spill_addr (s_addr[x]),
      .spill_wdata(s_data[x]),
      .found      (f_hit[x]),
      .found_d    (f_d[x])
    );
  end

  // Spill read request for the PE that sees a tile-first token next cycle.
  // PE x (x >= 1) receives next cycle the token PE x-1 holds now; PE 0
  // receives either the controller input or the last PE's token.
  always_comb begin
    spill_re    = 1'b0;
    spill_raddr = '0;
    if (inj_valid && inj_mfirst) begin
      spill_re    = 1'b1;
      spill_raddr = '0;
    end else if (!inj_valid && in_valid[P-1] && in_mfirst[P-1] &&
                 (32'(in_pass[P-1]) + 1 < NPASS)) begin
      spill_re    = 1'b1;
      spill_raddr = DW'((32'(in_pass[P-1]) + 1) * P);
    end
    for (int x = 1; x < P; x++) begin
      if (in_valid[x-1] && in_mfirst[x-1]) begin
        spill_re    = 1'b1;
        spill_raddr = DW'(32'(in_pass[x-1]) * P + x);
      end
    end
  end

  always_comb begin
    spill_we    = 1'b0;
    spill_waddr = '0;
    spill_wdata = '1;
    for (int x = 0; x < P; x++) begin
      if (s_we[x]) begin
        spill_we    = 1'b1;
        spill_waddr = s_addr[x];
        spill_wdata = s_data[x];
      end
    end
  end

  // smallest distance with an alignment in this cycle
  always_comb begin
    found   = 1'b0;
    found_d = '0;
    for (int x = P-1; x >= 0; x--) begin
      if (f_hit[x] && (!found || f_d[x] < found_d)) begin
        found   = 1'b1;
        found_d = f_d[x];
      end
    end
  end

  assign busy = iq_valid || (|o_valid);

  // the schedule must never present new input while the last PE feeds back
  a_no_collision: assert property (@(posedge clk) disable iff (!rst_n)
                                   !(iq_valid && fb_valid));
  a_one_spill_write: assert property (@(posedge clk) disable iff (!rst_n)
                                      $onehot0(s_we));
endmodule
