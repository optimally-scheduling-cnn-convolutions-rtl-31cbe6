// tb_hwc: end-to-end test of the HWC at its default parameters.
//
// The HWC is attached to a behavioural TCDM with three ports and configured
// through its register port like a host core would. Each test layer gets
// random input maps and weights; the testbench computes the convolution
// itself (zero padding, stride, 32-bit wrap-around sums, shift and
// saturation to the data width) and compares every output byte, and checks
// that the bytes just past the output array are untouched. It also checks
// the HWC's counters against values worked out from the schedule: the
// number of SIMD cycles (tiles x C x iss x R x mss x R) and the number of
// 32-bit words moved on each of the I, W and O ports.
// Mechanisms that must be seen at least once: TCDM stall, zero padding,
// partial tile (fewer output maps, lines or columns than the tile), 16-bit
// mode, output saturation, refusal of a configuration that does not fit
// the buffers, I window mode (all input rows of a tile loaded once per
// input map, checked through the I word count), and both buffering modes:
// double-buffered layers (SIMD steps issued while the I or W port is
// loading the next kernel row) and single-buffered ones (no such overlap),
// each checked against the controller's rule: the W rows fit half the W
// buffer and the I segment fits half the I buffer or the layer is in
// window mode.
module tb_hwc;
  import hwc_pkg::*;

  localparam int unsigned MEMB = 65536;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  cfg_req_t  cfg_req;
  cfg_rsp_t  cfg_rsp;
  tcdm_req_t treq [3];
  tcdm_rsp_t trsp [3];
  logic      evt;
  int unsigned stalls;

  hwc dut (
    .clk_i(clk), .rst_ni(rst_n),
    .cfg_req_i(cfg_req), .cfg_rsp_o(cfg_rsp),
    .tcdm_i_req_o(treq[0]), .tcdm_i_rsp_i(trsp[0]),
    .tcdm_w_req_o(treq[1]), .tcdm_w_rsp_i(trsp[1]),
    .tcdm_o_req_o(treq[2]), .tcdm_o_rsp_i(trsp[2]),
    .evt_o(evt)
  );

  tcdm_model #(.BYTES(MEMB), .NP(3)) u_mem (.clk_i(clk), .req_i(treq), .rsp_o(trsp), .stalls_o(stalls));

  int checks = 0, failures = 0;
  int n_stall = 0, n_pad = 0, n_partial = 0, n_p16 = 0, n_sat = 0, n_err = 0, n_dbl = 0, n_single = 0, n_win = 0;
  longint ovl_cyc = 0;

  // SIMD step issued while a load port is busy: loads overlap computing
  always @(posedge clk) if (dut.op.valid && (treq[0].req || treq[1].req)) ovl_cyc++;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  task automatic cfg_wr(input logic [4:0] a, input logic [31:0] d);
    @(negedge clk);
    cfg_req = '{req: 1'b1, we: 1'b1, addr: a, wdata: d};
    @(negedge clk);
    cfg_req = '0;
  endtask

  task automatic cfg_rd(input logic [4:0] a, output logic [31:0] d);
    @(negedge clk);
    cfg_req = '{req: 1'b1, we: 1'b0, addr: a, wdata: '0};
    @(negedge clk);
    cfg_req = '0;
    d = cfg_rsp.rdata;
  endtask

  function automatic int words_of(input longint a, input longint n);
    if (n <= 0) return 0;
    return int'(((a + n - 1) >> 2) - (a >> 2) + 1);
  endfunction

  // element read from the model memory, signed
  function automatic int rd_el(input int addr, input bit p16);
    if (p16) return int'($signed({u_mem.mem[addr+1], u_mem.mem[addr]}));
    return int'($signed(u_mem.mem[addr]));
  endfunction

  task automatic run_layer(input int H, E, C, M, R, S, PAD, MSS, ISS, bit P16, int SHIFT,
                           int STALL, int IB, WB, OB, bit expect_err);
    int eb, nl, vmax;
    logic [31:0] d;
    longint cyc0, ov0;
    bit dbl;
    int exp_mac, exp_iw, exp_ww, exp_ow;
    bit win;
    eb   = P16 ? 2 : 1;
    nl   = P16 ? LANES / 2 : LANES;
    vmax = P16 ? 1024 : 128;
    u_mem.stall_pct = STALL;
    for (int i = 0; i < MEMB; i++) u_mem.mem[i] = 8'hA5;
    for (int i = 0; i < C * H * H; i++) begin
      int v;
      v = $urandom_range(0, 2 * vmax - 1) - vmax;
      u_mem.mem[IB + eb*i] = v[7:0];
      if (P16) u_mem.mem[IB + eb*i + 1] = v[15:8];
    end
    for (int i = 0; i < M * C * R * R; i++) begin
      int v;
      v = $urandom_range(0, 2 * vmax - 1) - vmax;
      u_mem.mem[WB + eb*i] = v[7:0];
      if (P16) u_mem.mem[WB + eb*i + 1] = v[15:8];
    end
    cfg_wr(REG_I_BASE, IB); cfg_wr(REG_W_BASE, WB); cfg_wr(REG_O_BASE, OB);
    cfg_wr(REG_H, H); cfg_wr(REG_E, E); cfg_wr(REG_C, C); cfg_wr(REG_M, M);
    cfg_wr(REG_R, R); cfg_wr(REG_S, S); cfg_wr(REG_PAD, PAD);
    cfg_wr(REG_MSS, MSS); cfg_wr(REG_ISS, ISS); cfg_wr(REG_PREC, P16); cfg_wr(REG_SHIFT, SHIFT);
    cyc0 = stalls;
    ov0  = ovl_cyc;
    win  = (((ISS - 1) * S + R) * ((nl - 1) * S + R) * eb <= IBUF_BYTES) && ((ISS - 1) * S + R < ISS * R);
    dbl  = (win || (((nl - 1) * S + R) * eb <= IBUF_BYTES / 2)) && (MSS * R * eb <= WBUF_BYTES / 2);
    cfg_wr(REG_CTRL, 1);
    fork
      begin : wait_evt
        @(posedge evt);
      end
      begin : to
        repeat (2_000_000) @(posedge clk);
      end
    join_any
    disable fork;
    repeat (3) @(negedge clk);
    cfg_rd(REG_CTRL, d);
    check(d[1] == 1'b1 && d[0] == 1'b0, "done set, busy clear");
    check(d[2] == expect_err, $sformatf("err flag %0d expected %0d", d[2], expect_err));
    if (expect_err) begin
      n_err++;
      check(u_mem.mem[OB] == 8'hA5, "refused layer writes nothing");
      return;
    end
    if (stalls > cyc0) n_stall++;
    if (PAD > 0) n_pad++;
    if (P16) n_p16++;
    if (win) n_win++;
    if (ovl_cyc > ov0) n_dbl++; else n_single++;
    if (!dbl || MSS * R >= 4)
      check(dbl == (ovl_cyc > ov0), $sformatf("loads overlapped SIMD steps in %0d cycles, double-buffered %0d", ovl_cyc - ov0, dbl));
    if ((M % MSS) != 0 || (E % ISS) != 0 || (E % nl) != 0) n_partial++;

    // outputs
    for (int m = 0; m < M; m++)
      for (int y = 0; y < E; y++)
        for (int x = 0; x < E; x++) begin
          logic signed [31:0] acc, sh;
          int q, got, qmax;
          acc = 0;
          for (int c = 0; c < C; c++)
            for (int k = 0; k < R; k++)
              for (int l = 0; l < R; l++) begin
                int iy, ix;
                iy = y * S + k - PAD;
                ix = x * S + l - PAD;
                if (iy >= 0 && iy < H && ix >= 0 && ix < H)
                  acc += rd_el(IB + eb * ((c * H + iy) * H + ix), P16) *
                         rd_el(WB + eb * (((m * C + c) * R + k) * R + l), P16);
              end
          sh   = acc >>> SHIFT;
          qmax = P16 ? 32767 : 127;
          q    = (sh > qmax) ? qmax : (sh < -qmax - 1) ? -qmax - 1 : sh;
          if (sh > qmax || sh < -qmax - 1) n_sat++;
          got  = rd_el(OB + eb * ((m * E + y) * E + x), P16);
          check(got == q, $sformatf("O[%0d][%0d][%0d] = %0d, expected %0d", m, y, x, got, q));
        end
    for (int i = 0; i < 4; i++)
      check(u_mem.mem[OB + eb * M * E * E + i] == 8'hA5, "no write past the output array");
    if (OB > 0) check(u_mem.mem[OB - 1] == 8'hA5, "no write before the output array");

    // counters against the schedule
    // the controller's window-mode rule: all (ISS-1)*S+R input rows of a
    // tile fit the I buffer and are fewer than ISS*R row loads
    win = (((ISS - 1) * S + R) * ((nl - 1) * S + R) * eb <= IBUF_BYTES) && ((ISS - 1) * S + R < ISS * R);
    exp_mac = 0; exp_iw = 0; exp_ww = 0; exp_ow = 0;
    for (int mm = 0; mm < M; mm += MSS)
      for (int yy = 0; yy < E; yy += ISS)
        for (int xx = 0; xx < E; xx += nl) begin
          int ms, is, nc, lseg, ix0, lo, hi;
          ms   = (M - mm < MSS) ? M - mm : MSS;
          is   = (E - yy < ISS) ? E - yy : ISS;
          nc   = (E - xx < nl) ? E - xx : nl;
          lseg = (nl - 1) * S + R;
          ix0  = xx * S - PAD;
          lo   = (ix0 < 0) ? 0 : ix0;
          hi   = (ix0 + lseg > H) ? H : ix0 + lseg;
          exp_mac += C * is * R * ms * R;
          for (int c = 0; c < C; c++) begin
            // window mode: every input row of the tile once per input map
            if (win)
              for (int rr = 0; rr < (is - 1) * S + R; rr++) begin
                int iy;
                iy = yy * S + rr - PAD;
                if (iy >= 0 && iy < H && hi > lo)
                  exp_iw += words_of(IB + eb * ((c * H + iy) * H + lo), eb * (hi - lo));
              end
            for (int yl = 0; yl < is; yl++)
              for (int k = 0; k < R; k++) begin
                int iy;
                iy = (yy + yl) * S + k - PAD;
                if (!win && iy >= 0 && iy < H && hi > lo)
                  exp_iw += words_of(IB + eb * ((c * H + iy) * H + lo), eb * (hi - lo));
                for (int ml = 0; ml < ms; ml++)
                  exp_ww += words_of(WB + eb * ((((mm + ml) * C + c) * R + k) * R), eb * R);
              end
          end
          for (int ml = 0; ml < ms; ml++)
            for (int yl = 0; yl < is; yl++)
              exp_ow += words_of(OB + eb * (((mm + ml) * E + yy + yl) * E + xx), eb * nc);
        end
    cfg_rd(REG_MACCYC, d); check(d == exp_mac, $sformatf("SIMD cycles %0d expected %0d", d, exp_mac));
    cfg_rd(REG_IWORDS, d); check(d == exp_iw,  $sformatf("I words %0d expected %0d", d, exp_iw));
    cfg_rd(REG_WWORDS, d); check(d == exp_ww,  $sformatf("W words %0d expected %0d", d, exp_ww));
    cfg_rd(REG_OWORDS, d); check(d == exp_ow,  $sformatf("O words %0d expected %0d", d, exp_ow));
    begin
      logic [31:0] cyc;
      cfg_rd(REG_CYC, cyc);
      check(cyc >= exp_mac, "total cycles cover the SIMD cycles");
      $display("layer H=%0d E=%0d C=%0d M=%0d R=%0d S=%0d p16=%0d: %0d cycles, %0d SIMD cycles (%0d%%), words I/W/O %0d/%0d/%0d",
               H, E, C, M, R, S, P16, cyc, exp_mac, 100 * exp_mac / cyc, exp_iw, exp_ww, exp_ow);
    end
  endtask

  initial begin : watchdog
    repeat (3_000_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cfg_req = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    //        H   E   C  M  R  S PAD MSS ISS P16 SH STALL IB      WB      OB       err
    run_layer(10, 10, 3, 5, 3, 1, 1, 4,  4,  0,  9, 0,    'h0001, 'h3001, 'h8003,  0);
    run_layer(23, 11, 2, 3, 5, 2, 1, 3,  5,  0,  9, 30,   'h0002, 'h3000, 'h8001,  0);
    run_layer(12, 10, 2, 3, 3, 1, 0, 2,  8,  1,  7, 20,   'h0002, 'h3002, 'h8002,  0);
    run_layer(20, 20, 2, 2, 1, 1, 0, 2,  8,  0,  0, 10,   'h0003, 'h3001, 'h8000,  0);
    run_layer(27, 5,  2, 2, 11, 4, 0, 2, 3,  0,  10, 0,   'h0000, 'h3000, 'h8000,  0);
    run_layer(9,  9,  4, 6, 3, 1, 1, 6,  2,  1,  7, 50,   'h0010, 'h3006, 'h8004,  0);
    run_layer(10, 10, 3, 5, 3, 1, 1, 8,  4,  0,  4, 0,    'h0001, 'h3001, 'h8003,  1);
    $display("mechanisms: stall=%0d pad=%0d partial_tile=%0d p16=%0d saturate=%0d refused=%0d double_buffered=%0d single_buffered=%0d window=%0d",
             n_stall, n_pad, n_partial, n_p16, n_sat, n_err, n_dbl, n_single, n_win);
    check(n_win > 0, "window-mode layer seen");
    check(n_dbl > 0, "double-buffered layer seen");
    check(n_single > 0, "single-buffered layer seen");
    check(n_stall > 0, "TCDM stall seen");
    check(n_pad > 0, "zero padding seen");
    check(n_partial > 0, "partial tile seen");
    check(n_p16 > 0, "16-bit mode seen");
    check(n_sat > 0, "saturation seen");
    check(n_err > 0, "refused configuration seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
