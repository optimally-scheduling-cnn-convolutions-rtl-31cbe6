// tb_hwc_ibuf: tests the I buffer. Fills it with random bytes through the
// four-byte write port (random byte enables and scattered indices), then
// checks every lane's pixel for all strides 1..7 and kernel columns 0..10 in
// 8-bit and 16-bit mode against a copy kept by the testbench, including
// zeros past the buffer end and on the idle lanes of 16-bit mode, reading
// from both halves (read base 0 and half the size) and from a window row
// (read base 36, the third row of a window of 18-byte rows), and that each
// half's clear zeroes that half and leaves the other.
module tb_hwc_ibuf;
  import hwc_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [1:0] clear;
  logic p16;
  logic [7:0] rbase;
  logic [3:0] wen;
  logic [3:0][7:0] widx, wbyte;
  logic [2:0] s;
  logic [3:0] l;
  logic [LANES-1:0][15:0] pix;
  logic [7:0] ref_mem [IBUF_BYTES];

  hwc_ibuf dut (.clk_i(clk), .rst_ni(rst_n), .clear_i(clear), .wr_en_i(wen), .wr_idx_i(widx),
                .wr_byte_i(wbyte), .prec16_i(p16), .s_i(s), .l_i(l), .rbase_i(rbase), .pix_o(pix));

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  function automatic logic [15:0] expect_pix(int j, int ss, int ll, bit m16);
    int el;
    el = j * ss + ll;
    if (m16) el = el + int'(rbase) / 2; else el = el + int'(rbase);
    if (m16) begin
      if (j >= LANES / 2 || 2 * el + 1 >= IBUF_BYTES) return 16'h0;
      return {ref_mem[2*el+1], ref_mem[2*el]};
    end
    if (el >= IBUF_BYTES) return 16'h0;
    return {{8{ref_mem[el][7]}}, ref_mem[el]};
  endfunction

  task automatic check_all();
    for (int hb = 0; hb < 3; hb++)
    for (int m16 = 0; m16 < 2; m16++)
      for (int ss = 1; ss <= 7; ss++)
        for (int ll = 0; ll <= 10; ll++) begin
          @(negedge clk); rbase = 8'(hb == 2 ? 36 : hb * IBUF_BYTES / 2); p16 = m16[0]; s = 3'(ss); l = 4'(ll);
          #1;
          for (int j = 0; j < LANES; j++)
            check(pix[j] == expect_pix(j, ss, ll, m16[0]),
                  $sformatf("lane %0d s=%0d l=%0d p16=%0d: %h expected %h", j, ss, ll, m16, pix[j], expect_pix(j, ss, ll, m16[0])));
        end
  endtask

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    clear = 2'b00; rbase = '0; wen = 0; widx = '0; wbyte = '0; s = 1; l = 0; p16 = 0;
    repeat (2) @(posedge clk); rst_n = 1'b1;
    for (int i = 0; i < IBUF_BYTES; i++) ref_mem[i] = 8'h00;
    for (int rep = 0; rep < 200; rep++) begin
      @(negedge clk);
      for (int b = 0; b < 4; b++) begin
        wen[b]   = $urandom_range(0, 1);
        widx[b]  = 8'((rep * 4 + b * 7) % IBUF_BYTES);
        wbyte[b] = 8'($urandom());
      end
      for (int b = 0; b < 4; b++) if (wen[b]) ref_mem[widx[b]] = wbyte[b];
    end
    @(negedge clk); wen = 0;
    check_all();
    @(negedge clk); clear = 2'b10;
    @(negedge clk); clear = 2'b00;
    for (int i = IBUF_BYTES / 2; i < IBUF_BYTES; i++) ref_mem[i] = 8'h00;
    check_all();
    @(negedge clk); clear = 2'b01;
    @(negedge clk); clear = 2'b00;
    for (int i = 0; i < IBUF_BYTES / 2; i++) ref_mem[i] = 8'h00;
    check_all();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
