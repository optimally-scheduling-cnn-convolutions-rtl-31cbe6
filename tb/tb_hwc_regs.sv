// tb_hwc_regs: tests the HWC register file. Writes every configuration
// register with random values and reads them back (masked to the field
// widths), checks the one-cycle read latency, that start pulses once and
// only when bit 0 of CTRL is written, that writes are ignored while busy,
// that done/err are sticky until the next start, and that the five counters
// count their events while busy and clear on start.
module tb_hwc_regs;
  import hwc_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  cfg_req_t   req;
  cfg_rsp_t   rsp;
  layer_cfg_t cfg;
  logic start, busy, done, err, mac, iw, ww, ow;

  hwc_regs dut (.clk_i(clk), .rst_ni(rst_n), .cfg_req_i(req), .cfg_rsp_o(rsp), .cfg_o(cfg),
                .start_o(start), .busy_i(busy), .done_i(done), .err_i(err),
                .mac_i(mac), .iword_i(iw), .wword_i(ww), .oword_i(ow));

  int checks = 0, failures = 0, starts = 0;
  always @(posedge clk) if (start) starts++;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic wr(input logic [4:0] a, input logic [31:0] d);
    @(negedge clk); req = '{req: 1'b1, we: 1'b1, addr: a, wdata: d};
    @(negedge clk); req = '0;
  endtask

  task automatic rd(input logic [4:0] a, output logic [31:0] d);
    @(negedge clk); req = '{req: 1'b1, we: 1'b0, addr: a, wdata: '0};
    @(posedge clk); #1 check(rsp.rvalid, "rvalid one cycle after the read");
    d = rsp.rdata;
    @(negedge clk); req = '0;
  endtask

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam logic [4:0] ADDRS [14] = '{REG_I_BASE, REG_W_BASE, REG_O_BASE, REG_H, REG_E, REG_C, REG_M,
                                         REG_R, REG_S, REG_PAD, REG_MSS, REG_ISS, REG_PREC, REG_SHIFT};
  localparam logic [31:0] MASKS [14] = '{32'hFFFF_FFFF, 32'hFFFF_FFFF, 32'hFFFF_FFFF, 32'hFFFF, 32'hFFFF,
                                         32'hFFFF, 32'hFFFF, 32'hF, 32'h7, 32'hF, 32'hFF, 32'hFF, 32'h1, 32'h1F};

  initial begin
    logic [31:0] d, vals [14];
    req = '0; busy = 0; done = 0; err = 0; mac = 0; iw = 0; ww = 0; ow = 0;
    repeat (2) @(posedge clk); rst_n = 1'b1;
    for (int rep = 0; rep < 4; rep++) begin
      for (int i = 0; i < 14; i++) begin vals[i] = $urandom(); wr(ADDRS[i], vals[i]); end
      for (int i = 0; i < 14; i++) begin
        rd(ADDRS[i], d);
        check(d == (vals[i] & MASKS[i]), $sformatf("reg %0d read %h expected %h", ADDRS[i], d, vals[i] & MASKS[i]));
      end
    end
    check(cfg.h == 16'(vals[3]) && cfg.r == 4'(vals[7]) && cfg.i_base == vals[0], "cfg_o follows registers");
    check(starts == 0, "no start without a CTRL write");
    wr(REG_CTRL, 0);
    check(starts == 0, "CTRL write of 0 does not start");
    wr(REG_CTRL, 1);
    check(starts == 1, "CTRL bit0 starts once");
    // busy: writes ignored, counters count
    busy = 1;
    wr(REG_H, 16'h1234);
    check(cfg.h == 16'(vals[3]), "write ignored while busy");
    wr(REG_CTRL, 1);
    check(starts == 1, "no start while busy");
    @(negedge clk); mac = 1; iw = 1;
    repeat (5) @(negedge clk);
    mac = 0; iw = 0; ww = 1; ow = 1;
    repeat (3) @(negedge clk);
    ww = 0; ow = 0; done = 1; err = 1;
    @(negedge clk); done = 0; err = 0; busy = 0;
    rd(REG_CTRL, d);  check(d[2:0] == 3'b110, $sformatf("status %b expected 110", d[2:0]));
    rd(REG_MACCYC, d); check(d == 5, $sformatf("mac counter %0d", d));
    rd(REG_IWORDS, d); check(d == 5, "I word counter");
    rd(REG_WWORDS, d); check(d == 3, "W word counter");
    rd(REG_OWORDS, d); check(d == 3, "O word counter");
    rd(REG_CYC, d);    check(d >= 10 && d < 40, $sformatf("cycle counter %0d", d));
    rd(REG_CTRL, d);  check(d[2:1] == 2'b11, "done/err sticky");
    wr(REG_CTRL, 1);
    check(starts == 2, "second start");
    rd(REG_CTRL, d);  check(d[2:1] == 2'b00, "start clears done/err");
    rd(REG_MACCYC, d); check(d == 0, "start clears counters");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
