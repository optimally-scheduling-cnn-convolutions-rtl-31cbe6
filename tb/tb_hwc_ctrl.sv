// tb_hwc_ctrl: tests the controller alone. The testbench plays the two load
// units, the datapath's busy flag and the store unit (each busy for a random
// number of cycles after a command) and, for several layer shapes, walks
// the loop nest itself to build the expected streams of I load commands,
// W load commands, SIMD steps (row, first/last/init flags, kernel column,
// output map) and store starts. Every event the controller issues is
// compared in order with those streams, including where in the buffers
// each load writes and each SIMD step reads (window mode, where all input
// rows of a tile are loaded once per input map, and buffer halves). When both row buffers fit twice the
// controller double-buffers: the testbench then expects the halves to
// alternate per kernel row and counts SIMD steps issued while a load is in
// flight (there must be some when a kernel row has 4 or more steps); otherwise no SIMD step may overlap a load.
// It also checks that the SIMD steps of a kernel row come in consecutive
// cycles (runs of a multiple of mss*R steps), that done comes once per
// layer, and that a shape the buffers cannot hold is refused with err.
module tb_hwc_ctrl;
  import hwc_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  layer_cfg_t cfg;
  logic start, busy, done, err;
  logic [1:0] iclr;
  logic [7:0] ribase, rwbase;
  logic icv, icr, iidle, wcv, wcr, widle, dpb, sts, stidle;
  load_cmd_t icmd, wcmd;
  logic [3:0] rl;
  logic [7:0] rml;
  mac_op_t op;
  logic [15:0] smm, syy, sxx;
  logic [7:0] smss, siss;
  logic [4:0] sncol;

  hwc_ctrl dut (.clk_i(clk), .rst_ni(rst_n), .cfg_i(cfg), .start_i(start), .busy_o(busy), .done_o(done), .err_o(err),
                .i_cmd_valid_o(icv), .i_cmd_ready_i(icr), .i_cmd_o(icmd), .i_idle_i(iidle), .ibuf_clear_o(iclr),
                .w_cmd_valid_o(wcv), .w_cmd_ready_i(wcr), .w_cmd_o(wcmd), .w_idle_i(widle),
                .rd_l_o(rl), .rd_ml_o(rml), .rd_ibase_o(ribase), .rd_wbase_o(rwbase), .op_o(op), .dp_busy_i(dpb),
                .st_start_o(sts), .st_idle_i(stidle), .st_mm_o(smm), .st_yy_o(syy), .st_xx_o(sxx),
                .st_mss_o(smss), .st_iss_o(siss), .st_ncol_o(sncol));

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  // fake units
  int ibusy = 0, wbusy = 0, sbusy = 0;
  assign icr = (ibusy == 0); assign iidle = (ibusy == 0);
  assign wcr = (wbusy == 0); assign widle = (wbusy == 0);
  assign stidle = (sbusy == 0);
  logic lastq = 1'b0;
  assign dpb = lastq;

  typedef struct packed { logic [31:0] a; logic [15:0] b; logic [15:0] c; logic [15:0] d; } ev_t;
  ev_t q_i [$], q_w [$], q_m [$], q_s [$];
  int n_done = 0, run_len = 0, exp_run = 0, n_clr = 0, n_overlap = 0;
  bit dbl_exp = 0;

  always @(posedge clk) begin
    lastq <= op.valid && op.last;
    if (ibusy > 0) ibusy <= ibusy - 1;
    if (wbusy > 0) wbusy <= wbusy - 1;
    if (sbusy > 0) sbusy <= sbusy - 1;
    if (iclr != 2'b00) n_clr++;
    if (done) n_done++;
    if (icv && icr) begin
      ev_t e;
      ibusy <= $urandom_range(1, 6);
      if (q_i.size() == 0) check(1'b0, "unexpected I command");
      else begin
        e = q_i.pop_front();
        check(icmd.addr == e.a && icmd.nbytes == e.b[7:0] && icmd.dst == e.c[7:0],
              $sformatf("I cmd %h/%0d/%0d expected %h/%0d/%0d", icmd.addr, icmd.nbytes, icmd.dst, e.a, e.b, e.c));
        check(iclr == e.d[1:0], $sformatf("I buffer halves cleared with the I command: %b expected %b", iclr, e.d[1:0]));
      end
    end
    if (wcv && wcr) begin
      ev_t e;
      wbusy <= $urandom_range(1, 4);
      if (q_w.size() == 0) check(1'b0, "unexpected W command");
      else begin
        e = q_w.pop_front();
        check(wcmd.addr == e.a && wcmd.nbytes == e.b[7:0] && wcmd.dst == e.c[7:0],
              $sformatf("W cmd %h/%0d/%0d expected %h/%0d/%0d", wcmd.addr, wcmd.nbytes, wcmd.dst, e.a, e.b, e.c));
      end
    end
    if (op.valid) begin
      ev_t e;
      if (ibusy != 0 || wbusy != 0) begin
        n_overlap++;
        check(dbl_exp, "no SIMD step while a load is in flight");
      end
      run_len <= run_len + 1;
      if (q_m.size() == 0) check(1'b0, "unexpected SIMD step");
      else begin
        e = q_m.pop_front();
        check({op.first, op.last, op.init, op.row} == e.a[6:0] && rl == e.b[3:0] && rml == e.c[7:0] &&
              ribase == e.d[7:0] && rwbase == e.d[15:8],
              $sformatf("SIMD step f/l/i/row %b l=%0d ml=%0d bases %0d/%0d expected %b l=%0d ml=%0d bases %0d/%0d",
                        {op.first, op.last, op.init, op.row}, rl, rml, ribase, rwbase, e.a[6:0], e.b, e.c, e.d[7:0], e.d[15:8]));
      end
    end else if (run_len != 0) begin
      check(run_len % exp_run == 0, $sformatf("SIMD run of %0d steps, expected a multiple of %0d", run_len, exp_run));
      run_len <= 0;
    end
    if (sts) begin
      ev_t e;
      sbusy <= $urandom_range(1, 10);
      if (q_s.size() == 0) check(1'b0, "unexpected store");
      else begin
        e = q_s.pop_front();
        check({smm, syy} == e.a && sxx == e.b && {smss, siss} == e.c && sncol == e.d[4:0], "store tile description");
      end
    end
  end

  task automatic expect_layer();
    int nl, eb, lseg, nwin;
    bit win, idbl, wdbl;
    nl = cfg.prec16 ? LANES / 2 : LANES;
    eb = cfg.prec16 ? 2 : 1;
    lseg = (nl - 1) * cfg.s + cfg.r;
    nwin = (cfg.iss - 1) * cfg.s + cfg.r;
    win  = (nwin * lseg * eb <= IBUF_BYTES) && (nwin < cfg.iss * cfg.r);
    idbl = !win && (lseg * eb <= IBUF_BYTES / 2);
    wdbl = cfg.mss * cfg.r * eb <= WBUF_BYTES / 2;
    dbl_exp = wdbl && (win || idbl);
    for (int mm = 0; mm < cfg.m; mm += cfg.mss)
      for (int yy = 0; yy < cfg.e; yy += cfg.iss)
        for (int xx = 0; xx < cfg.e; xx += nl) begin
          int ms, is, ix0, lo, hi, n;
          n   = 0;
          ms  = (cfg.m - mm < cfg.mss) ? cfg.m - mm : cfg.mss;
          is  = (cfg.e - yy < cfg.iss) ? cfg.e - yy : cfg.iss;
          ix0 = xx * cfg.s - cfg.pad;
          lo  = ix0 < 0 ? 0 : ix0;
          hi  = (ix0 + lseg > cfg.h) ? cfg.h : ix0 + lseg;
          for (int c = 0; c < cfg.c; c++)
            for (int yl = 0; yl < is; yl++)
              for (int k = 0; k < cfg.r; k++) begin
                int iy, hb, ib, wb;
                hb = (idbl || wdbl) ? n % 2 : 0;
                n++;
                if (win) begin
                  // whole window once per input map, at its first kernel row;
                  // the buffer is cleared with the first of these commands
                  if (yl == 0 && k == 0)
                    for (int rr = 0; rr < (is - 1) * cfg.s + cfg.r; rr++) begin
                      iy = yy * cfg.s + rr - cfg.pad;
                      if (iy >= 0 && iy < cfg.h && hi > lo)
                        q_i.push_back('{a: cfg.i_base + eb * ((c * cfg.h + iy) * cfg.h + lo), b: 16'(eb * (hi - lo)),
                                        c: 16'(eb * (lo - ix0) + rr * lseg * eb), d: rr == 0 ? 3 : 0});
                    end
                end else begin
                  iy = (yy + yl) * cfg.s + k - cfg.pad;
                  if (iy >= 0 && iy < cfg.h && hi > lo)
                    q_i.push_back('{a: cfg.i_base + eb * ((c * cfg.h + iy) * cfg.h + lo), b: 16'(eb * (hi - lo)),
                                    c: 16'(eb * (lo - ix0) + (idbl ? hb * IBUF_BYTES / 2 : 0)), d: !idbl ? 3 : hb == 1 ? 2 : 1});
                end
                ib = win ? (yl * cfg.s + k) * lseg * eb : idbl ? hb * IBUF_BYTES / 2 : 0;
                wb = wdbl ? hb * WBUF_BYTES / 2 : 0;
                for (int ml = 0; ml < ms; ml++)
                  q_w.push_back('{a: cfg.w_base + eb * ((((mm + ml) * cfg.c + c) * cfg.r + k) * cfg.r), b: 16'(eb * cfg.r), c: 16'(eb * ml * cfg.r + wb), d: 0});
                for (int ml = 0; ml < ms; ml++)
                  for (int l = 0; l < cfg.r; l++)
                    q_m.push_back('{a: 32'({l == 0, l == cfg.r - 1, c == 0 && k == 0, 4'(ml * is + yl)}), b: 16'(l), c: 16'(ml), d: {8'(wb), 8'(ib)}});
              end
          q_s.push_back('{a: {16'(mm), 16'(yy)}, b: 16'(xx), c: {8'(ms), 8'(is)}, d: 16'((cfg.e - xx < nl) ? cfg.e - xx : nl)});
        end
  endtask

  task automatic run(input int h, e, c, m, r, s, pad, mss, iss, bit p16, bit bad);
    int d0, ov0;
    cfg = '0;
    cfg.i_base = 32'h100 + $urandom_range(0, 3); cfg.w_base = 32'h4000 + $urandom_range(0, 3); cfg.o_base = 32'h8000;
    cfg.h = 16'(h); cfg.e = 16'(e); cfg.c = 16'(c); cfg.m = 16'(m); cfg.r = 4'(r); cfg.s = 3'(s);
    cfg.pad = 4'(pad); cfg.mss = 8'(mss); cfg.iss = 8'(iss); cfg.prec16 = p16;
    exp_run = mss * r;  // only full-mss tiles are checked for run length below
    if (!bad) expect_layer();
    d0 = n_done;
    ov0 = n_overlap;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    if (bad) begin
      check(err, "bad shape refused");
      check(!busy, "refused layer does not run");
    end
    while (busy) @(negedge clk);
    @(negedge clk);
    check(n_done == d0 + 1, "one done per layer");
    // A kernel row of fewer than 4 SIMD steps ends before the next load's
    // first command can go out, so overlap is only required above that.
    if (!bad && (!dbl_exp || mss * r >= 4)) check(dbl_exp == (n_overlap > ov0),
                    $sformatf("SIMD steps overlapping a load: %0d, double-buffered %0d", n_overlap - ov0, dbl_exp));
    check(q_i.size() == 0 && q_w.size() == 0 && q_m.size() == 0 && q_s.size() == 0,
          $sformatf("all expected events seen (left %0d/%0d/%0d/%0d)", q_i.size(), q_w.size(), q_m.size(), q_s.size()));
    q_i.delete(); q_w.delete(); q_m.delete(); q_s.delete();
  endtask

  initial begin : watchdog
    repeat (400000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cfg = '0; start = 0;
    repeat (2) @(posedge clk); rst_n = 1'b1;
    //  h   e   c  m  r  s pad mss iss p16 bad
    run(10, 10, 2, 4, 3, 1, 1, 4,  4,  0,  0);
    run(23, 11, 2, 6, 5, 2, 2, 3,  5,  0,  0);
    run(20, 18, 1, 4, 3, 1, 0, 2,  3,  1,  0);
    run(27, 5,  1, 2, 11, 4, 0, 2, 3,  0,  0);
    run(8,  8,  1, 2, 1, 1, 0, 2,  8,  0,  0);
    run(12, 10, 2, 4, 3, 1, 1, 4,  2,  0,  0);   // I window mode: 4 rows of 18 bytes
    run(9,  9,  2, 3, 3, 1, 1, 3,  2,  1,  0);   // window mode, 16-bit, partial tiles
    run(10, 10, 2, 4, 3, 1, 1, 8,  4,  0,  1);   // 32 O rows
    run(40, 10, 2, 4, 11, 7, 0, 1, 1,  0,  1);   // I segment of 116 bytes
    run(10, 10, 2, 12, 11, 1, 0, 12, 1, 0,  1);  // 132 weight bytes
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
