// tb_hwc_obuf: tests the O buffer. Random writes to random rows, checked
// through both read ports in the following cycle against a copy kept by the
// testbench; a cycle without write enable must leave the contents alone.
module tb_hwc_obuf;
  import hwc_pkg::*;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  localparam int RW = $clog2(OBUF_ROWS);
  logic we;
  logic [RW-1:0] wrow, arow, brow;
  logic [LANES-1:0][ACC_W-1:0] wdata, adata, bdata;
  logic [LANES-1:0][ACC_W-1:0] ref_mem [OBUF_ROWS];

  hwc_obuf dut (.clk_i(clk), .we_i(we), .wrow_i(wrow), .wdata_i(wdata),
                .arow_i(arow), .adata_o(adata), .brow_i(brow), .bdata_o(bdata));

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; wrow = 0; arow = 0; brow = 0; wdata = '0;
    // fill every row once
    for (int r = 0; r < OBUF_ROWS; r++) begin
      @(negedge clk); we = 1; wrow = RW'(r);
      for (int j = 0; j < LANES; j++) wdata[j] = $urandom();
      ref_mem[r] = wdata;
    end
    @(negedge clk); we = 0;
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      arow = RW'($urandom()); brow = RW'($urandom());
      #1;
      check(adata == ref_mem[arow], $sformatf("port A row %0d", arow));
      check(bdata == ref_mem[brow], $sformatf("port B row %0d", brow));
      we = $urandom_range(0, 1); wrow = RW'($urandom());
      for (int j = 0; j < LANES; j++) wdata[j] = $urandom();
      if (we) ref_mem[wrow] = wdata;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
