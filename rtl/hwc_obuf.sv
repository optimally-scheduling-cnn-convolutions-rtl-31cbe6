// hwc_obuf: the HWC's O buffer, 1 KB of 32-bit partial sums organised as
// ROWS rows of LANES sums. Row ml*iss + yl holds output map mm+ml, output
// line yy+yl, columns xx..xx+LANES-1 of the current tile.
//
// The whole input-map loop (LIF) runs with the tile's sums held here, so a
// partial sum never leaves the HWC: only finished outputs are written to the
// TCDM. One write port (the datapath's read-modify-write) and two
// combinational read ports: port A for the datapath, port B for the store
// unit. A write lands at the clock edge, so a read in the next cycle sees it.
// Capacity and 32-bit precision are the paper's; the row organisation is
// this design's choice.
module hwc_obuf
  import hwc_pkg::*;
#(
  parameter int unsigned ROWS  = hwc_pkg::OBUF_ROWS,
  parameter int unsigned NLANE = hwc_pkg::LANES,
  parameter int unsigned W     = hwc_pkg::ACC_W
) (
  input  logic                        clk_i,
  input  logic                        we_i,
  input  logic [$clog2(ROWS)-1:0]     wrow_i,
  input  logic [NLANE-1:0][W-1:0]     wdata_i,
  input  logic [$clog2(ROWS)-1:0]     arow_i,
  output logic [NLANE-1:0][W-1:0]     adata_o,
  input  logic [$clog2(ROWS)-1:0]     brow_i,
  output logic [NLANE-1:0][W-1:0]     bdata_o
);

  logic [NLANE-1:0][W-1:0] mem_q [ROWS];

  // No reset: every row is written (init) before it is read in a layer.
  always_ff @(posedge clk_i) begin
    if (we_i) mem_q[wrow_i] <= wdata_i;
  end

  assign adata_o = mem_q[arow_i];
  assign bdata_o = mem_q[brow_i];

endmodule
