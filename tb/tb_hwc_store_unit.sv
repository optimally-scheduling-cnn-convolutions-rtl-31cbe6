// tb_hwc_store_unit: tests the store unit against the behavioural TCDM.
// For random tiles (position, mss x iss rows, 1..lanes columns, E, base
// address, precision, shift) the O rows hold random 32-bit sums, some huge
// to force saturation. The testbench computes each output element (shift,
// saturate to 8 or 16 bits) and checks every byte of the output array, that
// bytes outside the tile are untouched, the number of granted words, and,
// without stalls, that each row costs its word count plus one cycle.
module tb_hwc_store_unit;
  import hwc_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  localparam int RW = $clog2(OBUF_ROWS);
  localparam int MEMB = 16384;
  logic start, idle, p16;
  logic [31:0] base;
  logic [15:0] e, mm, yy, xx;
  logic [4:0]  shift, ncol;
  logic [7:0]  mss, iss;
  logic [RW-1:0] row;
  logic [LANES-1:0][ACC_W-1:0] rdata;
  logic [LANES-1:0][ACC_W-1:0] omem [OBUF_ROWS];
  tcdm_req_t treq [1];
  tcdm_rsp_t trsp [1];
  int unsigned stalls;

  hwc_store_unit dut (.clk_i(clk), .rst_ni(rst_n), .start_i(start), .idle_o(idle), .o_base_i(base),
                      .e_i(e), .prec16_i(p16), .shift_i(shift), .mm_i(mm), .yy_i(yy), .xx_i(xx),
                      .mss_i(mss), .iss_i(iss), .ncol_i(ncol), .row_o(row), .rdata_i(rdata),
                      .tcdm_req_o(treq[0]), .tcdm_rsp_i(trsp[0]));
  tcdm_model #(.BYTES(MEMB), .NP(1)) u_mem (.clk_i(clk), .req_i(treq), .rsp_o(trsp), .stalls_o(stalls));
  assign rdata = omem[row];

  int checks = 0, failures = 0, words = 0, nsat = 0;
  always @(posedge clk) if (treq[0].req && trsp[0].gnt) words++;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  initial begin : watchdog
    repeat (500000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    start = 0; base = 0; e = 0; mm = 0; yy = 0; xx = 0; shift = 0; ncol = 0; mss = 0; iss = 0; p16 = 0;
    repeat (2) @(posedge clk); rst_n = 1'b1;
    for (int t = 0; t < 300; t++) begin
      int eb, nl, ee, ms, is, nc, exp_words, w0, t0, qmax;
      bit expect_w [MEMB];
      logic [7:0] expect_b [MEMB];
      u_mem.stall_pct = (t < 150) ? 0 : 25;
      p16 = t[0];
      eb = p16 ? 2 : 1;
      nl = p16 ? LANES / 2 : LANES;
      ee = $urandom_range(1, 40);
      ms = $urandom_range(1, 4);
      is = $urandom_range(1, OBUF_ROWS / ms);
      is = (is > ee) ? ee : is;
      e = 16'(ee); mss = 8'(ms); iss = 8'(is);
      mm = 16'($urandom_range(0, 3));
      yy = 16'($urandom_range(0, ee - is));
      xx = 16'($urandom_range(0, ee - 1));
      nc = (ee - xx < nl) ? ee - xx : nl;
      ncol = 5'(nc);
      shift = 5'($urandom_range(0, 12));
      base = 32'($urandom_range(0, 64));
      qmax = p16 ? 32767 : 127;
      for (int i = 0; i < MEMB; i++) begin u_mem.mem[i] = 8'h5A; expect_w[i] = 0; end
      exp_words = 0;
      for (int ml = 0; ml < ms; ml++)
        for (int yl = 0; yl < is; yl++) begin
          int r, a0;
          r  = ml * is + yl;
          a0 = base + eb * (((mm + ml) * ee + yy + yl) * ee + xx);
          exp_words += (a0 + eb * nc - 1) / 4 - a0 / 4 + 1;
          for (int j = 0; j < LANES; j++) begin
            logic signed [31:0] v, sh;
            int q;
            v = ($urandom_range(0, 3) == 0) ? $signed($urandom()) : $signed(32'($urandom_range(0, 200000)) - 100000);
            omem[r][j] = v;
            sh = v >>> shift;
            q = (sh > qmax) ? qmax : (sh < -qmax - 1) ? -qmax - 1 : sh;
            if (j < nc) begin
              if (q != sh) nsat++;
              expect_w[a0 + eb * j] = 1; expect_b[a0 + eb * j] = 8'(q);
              if (p16) begin expect_w[a0 + 2 * j + 1] = 1; expect_b[a0 + 2 * j + 1] = 8'(q >> 8); end
            end
          end
        end
      w0 = words;
      @(negedge clk); start = 1;
      t0 = $time / 10;
      @(negedge clk); start = 0;
      while (!idle) @(negedge clk);
      check(words - w0 == exp_words, $sformatf("tile %0d: %0d words, expected %0d", t, words - w0, exp_words));
      if (t < 150)
        check(($time / 10) - t0 <= exp_words + ms * is + 2, $sformatf("tile %0d took %0d cycles", t, ($time / 10) - t0));
      for (int i = 0; i < MEMB; i++)
        if (expect_w[i]) check(u_mem.mem[i] == expect_b[i], $sformatf("tile %0d byte %0d: %h expected %h", t, i, u_mem.mem[i], expect_b[i]));
        else if (u_mem.mem[i] != 8'h5A) check(1'b0, $sformatf("tile %0d: stray write at %0d", t, i));
    end
    check(nsat > 0, "saturation exercised");
    check(stalls > 0, "stalls exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
