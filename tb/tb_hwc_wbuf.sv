// tb_hwc_wbuf: tests the W buffer. Fills all 128 bytes with random values
// through the write port and checks the weight read for every output map
// ml, kernel size R = 1..11 and column l < R, in 8-bit and 16-bit mode,
// reading from both halves (read base 0 and 64), against a copy kept by
// the testbench (zero past the buffer end).
module tb_hwc_wbuf;
  import hwc_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic p16;
  logic [3:0] wen, r, l;
  logic [3:0][7:0] widx, wbyte;
  logic [7:0] ml, rbase;
  logic [15:0] wgt;
  logic [7:0] ref_mem [WBUF_BYTES];

  hwc_wbuf dut (.clk_i(clk), .rst_ni(rst_n), .wr_en_i(wen), .wr_idx_i(widx), .wr_byte_i(wbyte),
                .prec16_i(p16), .r_i(r), .ml_i(ml), .l_i(l), .rbase_i(rbase), .wgt_o(wgt));

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wen = 0; widx = '0; wbyte = '0; p16 = 0; r = 1; l = 0; ml = 0; rbase = '0;
    repeat (2) @(posedge clk); rst_n = 1'b1;
    for (int i = 0; i < WBUF_BYTES; i += 4) begin
      @(negedge clk);
      for (int b = 0; b < 4; b++) begin
        wen[b] = 1'b1; widx[b] = 8'(i + 3 - b); wbyte[b] = 8'($urandom());
        ref_mem[i + 3 - b] = wbyte[b];
      end
    end
    @(negedge clk); wen = 0;
    for (int hb = 0; hb < 2; hb++)
    for (int m16 = 0; m16 < 2; m16++)
      for (int rr = 1; rr <= 11; rr++)
        for (int mm = 0; mm * rr < 140; mm++)
          for (int ll = 0; ll < rr; ll++) begin
            int el;
            logic [15:0] e;
            @(negedge clk); rbase = 8'(hb * WBUF_BYTES / 2); p16 = m16[0]; r = 4'(rr); ml = 8'(mm); l = 4'(ll);
            #1;
            el = mm * rr + ll;
            if (m16 != 0) begin
              el = 2 * el + hb * WBUF_BYTES / 2;
              e = (el + 1 < WBUF_BYTES) ? {ref_mem[el+1], ref_mem[el]} : 16'h0;
            end else begin
              el = el + hb * WBUF_BYTES / 2;
              e = (el < WBUF_BYTES) ? {{8{ref_mem[el][7]}}, ref_mem[el]} : 16'h0;
            end
            check(wgt == e, $sformatf("R=%0d ml=%0d l=%0d p16=%0d: %h expected %h", rr, mm, ll, m16, wgt, e));
          end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
