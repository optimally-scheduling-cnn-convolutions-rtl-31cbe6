// tb_hwc_layers: runs convolution layers of published CNNs on the HWC at
// its default parameters, at their full published shapes with random
// data: ZFNet layer 6 (6x6 maps, 256 -> 256 maps, 3x3) with 8-bit and with
// 16-bit data, AlexNet layer 1 (224x224 input padded by 2, 11x11 kernels,
// stride 4, 3 -> 96 maps), AlexNet layer 3 (27x27 -> 13x13, 3x3, stride 2,
// 256 -> 384 maps) and the 1x1 layer of ResNet stage 3 (28x28, 256 -> 128
// maps). Padding of AlexNet 1 and ZFNet 6 is chosen to give the published
// output sizes. For each layer it
// prints the cycle count, SIMD utilisation and the TCDM words moved per
// port, next to the element traffic the schedule implies.
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
// mode, output saturation, and refusal of a configuration that does not fit
// the buffers.
module tb_hwc_layers;
  import hwc_pkg::*;

  localparam int unsigned MEMB = 1 << 21;

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
  int n_stall = 0, n_pad = 0, n_partial = 0, n_p16 = 0, n_sat = 0, n_err = 0;

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
    longint cyc0;
    int exp_mac, exp_iw, exp_ww, exp_ow;
    bit win;
    eb   = P16 ? 2 : 1;
    nl   = P16 ? LANES / 2 : LANES;
    vmax = P16 ? 1024 : 128;
    u_mem.stall_pct = STALL;
    for (int i = 0; i < eb * M * E * E + 8; i++) u_mem.mem[OB - 4 + i] = 8'hA5;
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
    cfg_wr(REG_CTRL, 1);
    fork
      begin : wait_evt
        @(posedge evt);
      end
      begin : to
        repeat (60_000_000) @(posedge clk);
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
    check(u_mem.mem[OB - 1] == 8'hA5, "no write before the output array");

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
    repeat (100_000_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cfg_req = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    //        H    E   C    M    R   S PAD MSS ISS P16 SH  STALL IB        WB        OB        err
    run_layer(6,   6,  256, 256, 3,  1, 1, 8,  2,  0,  13, 10,   'h00000, 'h10000, 'hC0000, 0);  // ZFNet 6
    run_layer(224, 55, 3,   96,  11, 4, 2, 11, 1,  0,  12, 10,   'h00000, 'hA0000, 'hB0000, 0);  // AlexNet 1
    run_layer(28,  28, 256, 128, 1,  1, 0, 16, 1,  0,  12, 10,   'h00000, 'h40000, 'hC0000, 0);  // ResNet 3, 1x1 256->128
    run_layer(27,  13, 256, 384, 3,  2, 0, 8,  2,  0,  13, 10,   'h00000, 'h40000, 'h120000, 0); // AlexNet 3, stride 2
    run_layer(6,   6,  256, 256, 3,  1, 1, 6,  2,  1,  11, 10,   'h00001, 'h10000, 'h140002, 0); // ZFNet 6, 16-bit data
    $display("mechanisms: stall=%0d pad=%0d partial_tile=%0d saturate=%0d", n_stall, n_pad, n_partial, n_sat);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
