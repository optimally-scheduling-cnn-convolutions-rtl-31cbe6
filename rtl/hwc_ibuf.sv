// hwc_ibuf: the HWC's I buffer, 96 bytes holding input feature-map row
// segments, I[c][iy][ix0 .. ix0+L-1] with L = (lanes-1)*S + R elements.
//
// In the published schedule the segment is loaded once per kernel row (loop
// LFY) and read by every output map of the tile (loop LOF) and every kernel
// column (loop LFX), so each input byte fetched from the TCDM serves mss*R
// multiply-accumulates per lane.
//
// When all (iss-1)*S+R rows of a tile fit, the controller instead loads
// them once per input map, one after the other (window mode, the I buffer
// placement of the published loop nest), and reads row by row. Otherwise,
// when a segment takes at most half the buffer, the two halves are used as
// a double buffer: one half is read by the datapath while the next kernel
// row's segment is loaded into the other.
// Write side: up to four bytes per cycle from the load unit, each with its
// own byte index; clear_i[h] zeroes half h (h=0: bytes 0..BYTES/2-1, h=1:
// the rest) before a segment or window is loaded, which gives zero padding.
// Read side (combinational): for kernel column l, lane j receives element
// j*S + l of the segment starting at byte rbase_i, as a signed 16-bit value (8-bit data is sign-extended; 16-bit
// data is two little-endian bytes). In 16-bit mode only lanes 0..LANES/2-1
// are active; the others, and any index past the buffer end, read zero.
// The size is the paper's; the strided lane gather is this design's way of
// feeding the SIMD lanes.
module hwc_ibuf
  import hwc_pkg::*;
#(
  parameter int unsigned BYTES = hwc_pkg::IBUF_BYTES,
  parameter int unsigned NLANE = hwc_pkg::LANES
) (
  input  logic                    clk_i,
  input  logic                    rst_ni,
  input  logic [1:0]              clear_i,
  input  logic [3:0]              wr_en_i,
  input  logic [3:0][7:0]         wr_idx_i,
  input  logic [3:0][7:0]         wr_byte_i,
  input  logic                    prec16_i,
  input  logic [2:0]              s_i,
  input  logic [3:0]              l_i,
  input  logic [7:0]              rbase_i,
  output logic [NLANE-1:0][15:0]  pix_o
);

  logic [7:0] mem_q [BYTES];

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      for (int i = 0; i < BYTES; i++) mem_q[i] <= '0;
    end else if (clear_i != 2'b00) begin
      for (int i = 0; i < BYTES; i++)
        if (clear_i[(i < BYTES / 2) ? 0 : 1]) mem_q[i] <= '0;
    end else begin
      for (int b = 0; b < 4; b++)
        if (wr_en_i[b] && (int'(wr_idx_i[b]) < BYTES)) mem_q[($clog2(BYTES))'(wr_idx_i[b])] <= wr_byte_i[b];
    end
  end

  always_comb begin
    for (int j = 0; j < NLANE; j++) begin
      int unsigned el, a;
      el = j * int'(s_i) + int'(l_i);
      pix_o[j] = '0;
      if (prec16_i) begin
        a = 2 * el + int'(rbase_i);
        if (j < NLANE / 2 && a + 1 < BYTES) pix_o[j] = {mem_q[a+1], mem_q[a]};
      end else begin
        a = el + int'(rbase_i);
        if (a < BYTES) pix_o[j] = {{8{mem_q[a][7]}}, mem_q[a]};
      end
    end
  end

endmodule
