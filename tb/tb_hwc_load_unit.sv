// tb_hwc_load_unit: tests a load unit against the behavioural TCDM.
// Random batches of 1..4 commands (any byte address, 1..96 bytes, disjoint
// destinations) are issued back to back; the testbench records every byte
// the unit writes to the buffer and checks that each destination byte
// holds the memory byte it should, that nothing else was written, and that
// the number of granted words is the number of aligned words the ranges
// cover. Without stalls a single command must finish within words + 2
// cycles; with 30% stalls the data must still be right.
module tb_hwc_load_unit;
  import hwc_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic cvalid, cready, idle;
  load_cmd_t cmd;
  tcdm_req_t treq [1];
  tcdm_rsp_t trsp [1];
  logic [3:0] wen;
  logic [3:0][7:0] widx, wbyte;
  int unsigned stalls;

  hwc_load_unit dut (.clk_i(clk), .rst_ni(rst_n), .cmd_valid_i(cvalid), .cmd_ready_o(cready), .cmd_i(cmd),
                     .idle_o(idle), .tcdm_req_o(treq[0]), .tcdm_rsp_i(trsp[0]),
                     .wr_en_o(wen), .wr_idx_o(widx), .wr_byte_o(wbyte));
  tcdm_model #(.BYTES(4096), .NP(1)) u_mem (.clk_i(clk), .req_i(treq), .rsp_o(trsp), .stalls_o(stalls));

  int checks = 0, failures = 0, words = 0;
  logic [7:0] buffer [256];
  bit written [256];
  always @(posedge clk) begin
    for (int b = 0; b < 4; b++) if (wen[b]) begin buffer[widx[b]] <= wbyte[b]; written[widx[b]] <= 1'b1; end
    if (treq[0].req && trsp[0].gnt) words++;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cvalid = 0; cmd = '0;
    for (int i = 0; i < 4096; i++) u_mem.mem[i] = 8'($urandom());
    repeat (2) @(posedge clk); rst_n = 1'b1;
    for (int batch = 0; batch < 400; batch++) begin
      int n, exp_words, w0, t0;
      int addr [4], len [4], dst [4];
      u_mem.stall_pct = (batch < 200) ? 0 : 30;
      n = (batch % 3 == 0) ? 1 : $urandom_range(1, 4);
      for (int i = 0; i < 256; i++) written[i] = 1'b0;
      exp_words = 0;
      for (int i = 0; i < n; i++) begin
        len[i]  = $urandom_range(1, (i == 0 && n == 1) ? 96 : 60);
        dst[i]  = i * 64;
        addr[i] = $urandom_range(0, 3900);
        exp_words += (addr[i] + len[i] - 1) / 4 - addr[i] / 4 + 1;
      end
      w0 = words;
      t0 = $time / 10;
      for (int i = 0; i < n; i++) begin
        @(negedge clk);
        cvalid = 1; cmd = '{addr: 32'(addr[i]), nbytes: 8'(len[i]), dst: 8'(dst[i])};
        while (!cready) @(negedge clk);
        @(posedge clk);
        #1 cvalid = 0;
      end
      @(negedge clk);
      while (!idle) @(negedge clk);
      if (n == 1 && batch < 200)
        check(($time / 10) - t0 <= exp_words + 3, $sformatf("single command took %0d cycles for %0d words", ($time / 10) - t0, exp_words));
      check(words - w0 == exp_words, $sformatf("batch %0d: %0d words, expected %0d", batch, words - w0, exp_words));
      for (int i = 0; i < 256; i++) begin
        bit want;
        int src;
        want = 0; src = 0;
        for (int c = 0; c < n; c++)
          if (i >= dst[c] && i < dst[c] + len[c]) begin want = 1; src = addr[c] + i - dst[c]; end
        if (want) check(written[i] && buffer[i] == u_mem.mem[src], $sformatf("batch %0d byte %0d", batch, i));
        else if (written[i]) check(1'b0, $sformatf("batch %0d: stray write to byte %0d", batch, i));
      end
    end
    check(stalls > 0, "stalls occurred");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
