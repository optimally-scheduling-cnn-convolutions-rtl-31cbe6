// hwc_datapath: the HWC's SIMD datapath.
//
// Each lane computes one output column x of the tile (loop LSX is the SIMD
// dimension, jss = number of lanes). Per cycle every lane multiplies its
// input pixel by the weight broadcast to all lanes and adds the product to
// its lane accumulator; a run of R cycles (loop LFX) sums one kernel row.
// That sum is then added into the tile's partial sum in the O buffer.
//
// Pipeline, two stages:
//   stage 1 (cycle of op_i.valid): acc[j] <= (first ? 0 : acc[j]) + pix[j]*wgt
//   stage 2 (next cycle, if that op was last): O[row] <= (init ? 0 : O[row]) + acc
// so the O buffer is touched once per kernel row and output map, not once
// per product. pix/wgt are signed 16-bit (8-bit data arrives sign-extended),
// so the same lanes serve both precisions; in 16-bit mode the upper half of
// the lanes is fed zeros. Sixteen lanes and 32-bit sums are the paper's;
// the two-stage split is this design's choice. A full-rate run of ops gives
// LANES MACs per cycle.
// Lint note: the second stage does not use the registered step's `first`
// flag, which only matters to the first stage.
module hwc_datapath
  import hwc_pkg::*;
#(
  parameter int unsigned NLANE = hwc_pkg::LANES,
  parameter int unsigned W     = hwc_pkg::ACC_W,
  parameter int unsigned ROWS  = hwc_pkg::OBUF_ROWS
) (
  input  logic                          clk_i,
  input  logic                          rst_ni,
  input  mac_op_t                       op_i,
  input  logic [NLANE-1:0][15:0]        pix_i,
  input  logic [15:0]                   wgt_i,
  // O buffer read-modify-write
  output logic [$clog2(ROWS)-1:0]       o_row_o,
  input  logic [NLANE-1:0][W-1:0]       o_rdata_i,
  output logic                          o_we_o,
  output logic [NLANE-1:0][W-1:0]       o_wdata_o,
  output logic                          busy_o     // an O update is pending
);

  logic [NLANE-1:0][W-1:0] acc_q;
  logic [NLANE-1:0][W-1:0] prod;
  mac_op_t                 op_q;

  always_comb begin
    for (int j = 0; j < NLANE; j++) prod[j] = W'($signed(pix_i[j]) * $signed(wgt_i));
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      acc_q <= '0;
      op_q  <= '0;
    end else begin
      op_q <= op_i;
      if (op_i.valid) begin
        for (int j = 0; j < NLANE; j++)
          acc_q[j] <= (op_i.first ? W'(0) : acc_q[j]) + prod[j];
      end
    end
  end

  assign o_row_o = op_q.row[$clog2(ROWS)-1:0];
  assign o_we_o  = op_q.valid && op_q.last;
  assign busy_o  = o_we_o;

  always_comb begin
    for (int j = 0; j < NLANE; j++)
      o_wdata_o[j] = (op_q.init ? W'(0) : o_rdata_i[j]) + acc_q[j];
  end

endmodule
