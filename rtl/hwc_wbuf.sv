// hwc_wbuf: the HWC's W buffer, 128 bytes holding kernel row k of input map
// c for each of the mss output maps of the tile: W[m][c][k][0..R-1], stored
// output map after output map (map ml at element offset ml*R).
//
// In the published schedule it is refilled once per kernel row (loop LFY)
// and each weight is broadcast to all SIMD lanes (loop LSX).
// Write side: up to four bytes per cycle from the load unit.
// When the tile's weights take at most half the buffer the two halves are
// used as a double buffer (the next kernel row loads into one half while
// the datapath reads the other); rbase_i is the byte offset of the half read.
// Read side (combinational): element ml*R + l, from byte rbase_i on, as a
// signed 16-bit weight
// (8-bit data sign-extended, 16-bit data little-endian); an index past the
// buffer end reads zero. The size is the paper's; the layout is this
// design's choice.
module hwc_wbuf
  import hwc_pkg::*;
#(
  parameter int unsigned BYTES = hwc_pkg::WBUF_BYTES
) (
  input  logic            clk_i,
  input  logic            rst_ni,
  input  logic [3:0]      wr_en_i,
  input  logic [3:0][7:0] wr_idx_i,
  input  logic [3:0][7:0] wr_byte_i,
  input  logic            prec16_i,
  input  logic [3:0]      r_i,
  input  logic [7:0]      ml_i,
  input  logic [3:0]      l_i,
  input  logic [7:0]      rbase_i,
  output logic [15:0]     wgt_o
);

  logic [7:0] mem_q [BYTES];

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      for (int i = 0; i < BYTES; i++) mem_q[i] <= '0;
    end else begin
      for (int b = 0; b < 4; b++)
        if (wr_en_i[b] && (int'(wr_idx_i[b]) < BYTES)) mem_q[($clog2(BYTES))'(wr_idx_i[b])] <= wr_byte_i[b];
    end
  end

  always_comb begin
    int unsigned el, a;
    el = int'(ml_i) * int'(r_i) + int'(l_i);
    wgt_o = '0;
    if (prec16_i) begin
      a = 2 * el + int'(rbase_i);
      if (a + 1 < BYTES) wgt_o = {mem_q[a+1], mem_q[a]};
    end else begin
      a = el + int'(rbase_i);
      if (a < BYTES) wgt_o = {{8{mem_q[a][7]}}, mem_q[a]};
    end
  end

endmodule
