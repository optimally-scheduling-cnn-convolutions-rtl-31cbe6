// tb_hwc_datapath: tests the SIMD datapath with a small O buffer model in
// the testbench. Random runs of R = 1..11 steps (first on the first step,
// last on the last) with random pixels and weights, random init flags and
// rows; the testbench keeps its own partial sums (sum of the R products per
// lane, added to or replacing the row) and compares the O buffer after every
// update, plus the timing: the O write comes exactly one cycle after the
// step marked last, and never otherwise.
module tb_hwc_datapath;
  import hwc_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  localparam int RW = $clog2(OBUF_ROWS);
  mac_op_t op;
  logic [LANES-1:0][15:0] pix;
  logic [15:0] wgt;
  logic [RW-1:0] orow;
  logic [LANES-1:0][ACC_W-1:0] ordata, owdata;
  logic owe, busy;
  logic [LANES-1:0][ACC_W-1:0] omem [OBUF_ROWS];
  logic [LANES-1:0][ACC_W-1:0] ref_o [OBUF_ROWS];

  hwc_datapath dut (.clk_i(clk), .rst_ni(rst_n), .op_i(op), .pix_i(pix), .wgt_i(wgt),
                    .o_row_o(orow), .o_rdata_i(ordata), .o_we_o(owe), .o_wdata_o(owdata), .busy_o(busy));

  assign ordata = omem[orow];
  always @(posedge clk) if (owe) omem[orow] <= owdata;

  int checks = 0, failures = 0, writes = 0, exp_writes = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  // write must follow a last step by one cycle
  logic last_q = 1'b0;
  always @(posedge clk) begin
    if (rst_n) check(owe == last_q, "O write exactly one cycle after the last step");
    last_q <= op.valid && op.last;
    if (owe) writes++;
  end

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    op = '0; pix = '0; wgt = '0;
    for (int r = 0; r < OBUF_ROWS; r++) begin
      for (int j = 0; j < LANES; j++) omem[r][j] = $urandom();
      ref_o[r] = omem[r];
    end
    repeat (2) @(posedge clk); rst_n = 1'b1;
    for (int run = 0; run < 1500; run++) begin
      int rr, row, big;
      bit init;
      logic signed [31:0] sum [LANES];
      rr   = $urandom_range(1, 11);
      row  = $urandom_range(0, OBUF_ROWS - 1);
      init = ($urandom_range(0, 3) == 0);
      big  = $urandom_range(0, 1);
      for (int j = 0; j < LANES; j++) sum[j] = 0;
      for (int l = 0; l < rr; l++) begin
        @(negedge clk);
        op = '{valid: 1'b1, first: (l == 0), last: (l == rr - 1), init: init, row: 4'(row)};
        wgt = big ? 16'($urandom()) : 16'($signed(8'($urandom())));
        for (int j = 0; j < LANES; j++) begin
          pix[j] = big ? 16'($urandom()) : 16'($signed(8'($urandom())));
          sum[j] += $signed(pix[j]) * $signed(wgt);
        end
      end
      exp_writes++;
      for (int j = 0; j < LANES; j++) ref_o[row][j] = (init ? 0 : ref_o[row][j]) + sum[j];
      // sometimes insert idle cycles
      if ($urandom_range(0, 2) == 0) begin
        @(negedge clk); op = '0;
        // a stray step with valid low must not disturb anything
        op.last = 1'b1; op.first = 1'b1;
      end
      if (run % 50 == 49) begin
        @(negedge clk); op = '0;
        @(negedge clk);
        for (int r = 0; r < OBUF_ROWS; r++)
          check(omem[r] == ref_o[r], $sformatf("run %0d: O row %0d", run, r));
      end
    end
    @(negedge clk); op = '0;
    repeat (3) @(negedge clk);
    for (int r = 0; r < OBUF_ROWS; r++) check(omem[r] == ref_o[r], $sformatf("final O row %0d", r));
    check(writes == exp_writes, $sformatf("%0d O writes, expected %0d", writes, exp_writes));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
