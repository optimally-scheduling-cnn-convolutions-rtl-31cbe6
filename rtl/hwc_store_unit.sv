// hwc_store_unit: the HWC's store unit, writing the finished output tile
// from the O buffer to the TCDM over the third 32-bit master port.
//
// After the last input map of a tile has been accumulated the controller
// starts the unit with the tile position (mm, yy, xx), its size (mss_eff
// output maps x iss_eff lines x ncol columns) and the layer's E, O base
// address, precision and shift. For every O buffer row the unit
// requantises each 32-bit sum to the data precision (arithmetic right shift
// by `shift`, then saturation to 8 or 16 bits: a dynamic fixed-point format
// whose shift software chooses per layer) and writes the row's bytes to
//   O_base + (((mm+ml)*E + yy+yl)*E + xx) * bytes_per_element
// as aligned 32-bit words with byte enables, one word per granted cycle.
// The paper only names the unit and says it uses dynamic fixed-point; the
// shift-and-saturate rule, word packing and row order are this design's.
// Lint notes: this port only writes, so of the response only gnt is used;
// of the integer byte offset only the low bits are used.
module hwc_store_unit
  import hwc_pkg::*;
#(
  parameter int unsigned NLANE = hwc_pkg::LANES,
  parameter int unsigned W     = hwc_pkg::ACC_W,
  parameter int unsigned ROWS  = hwc_pkg::OBUF_ROWS
) (
  input  logic                      clk_i,
  input  logic                      rst_ni,
  input  logic                      start_i,
  output logic                      idle_o,
  input  logic [31:0]               o_base_i,
  input  logic [15:0]               e_i,
  input  logic                      prec16_i,
  input  logic [4:0]                shift_i,
  input  logic [15:0]               mm_i,
  input  logic [15:0]               yy_i,
  input  logic [15:0]               xx_i,
  input  logic [7:0]                mss_i,     // output maps in this tile
  input  logic [7:0]                iss_i,     // output lines in this tile
  input  logic [4:0]                ncol_i,    // valid columns (lanes) in this tile
  // O buffer read port
  output logic [$clog2(ROWS)-1:0]   row_o,
  input  logic [NLANE-1:0][W-1:0]   rdata_i,
  // TCDM
  output tcdm_req_t                 tcdm_req_o,
  input  tcdm_rsp_t                 tcdm_rsp_i
);

  typedef enum logic [1:0] {S_IDLE, S_ROW, S_WORD} state_e;
  state_e state_q;

  logic [31:0] base_q;
  logic [15:0] e_q, mm_q, yy_q, xx_q;
  logic        p16_q;
  logic [4:0]  shift_q, ncol_q;
  logic [7:0]  mss_q, iss_q, ml_q, yl_q;
  logic [31:0] rstart_q, rend_q, wa_q, last_wa_q;

  assign idle_o = (state_q == S_IDLE);
  assign row_o  = ($clog2(ROWS))'(ml_q * iss_q + yl_q);

  // Requantised bytes of the current row, little-endian element order
  logic [2*NLANE-1:0][7:0] rbytes;
  always_comb begin
    rbytes = '0;
    for (int j = 0; j < NLANE; j++) begin
      logic signed [W-1:0] sh;
      logic [15:0]         q;
      sh = $signed(rdata_i[j]) >>> shift_q;
      if (p16_q) begin
        if (sh > 32767)       q = 16'h7FFF;
        else if (sh < -32768) q = 16'h8000;
        else                  q = sh[15:0];
        if (j < NLANE / 2) begin
          rbytes[2*j]   = q[7:0];
          rbytes[2*j+1] = q[15:8];
        end
      end else begin
        if (sh > 127)       q = 16'h007F;
        else if (sh < -128) q = 16'h0080;
        else                q = {8'h00, sh[7:0]};
        rbytes[j] = q[7:0];
      end
    end
  end

  // Current word: byte enables and data
  always_comb begin
    tcdm_req_o      = '0;
    tcdm_req_o.req  = (state_q == S_WORD);
    tcdm_req_o.we   = 1'b1;
    tcdm_req_o.addr = wa_q;
    for (int b = 0; b < 4; b++) begin
      logic [31:0] ba, off;
      ba  = wa_q + 32'(b);
      off = ba - rstart_q;
      if (ba >= rstart_q && ba < rend_q) begin
        tcdm_req_o.be[b]          = 1'b1;
        tcdm_req_o.wdata[8*b +: 8] = rbytes[off[$clog2(2*NLANE)-1:0]];
      end
    end
  end

  // Row byte range
  logic [31:0] rs_d, re_d;
  always_comb begin
    logic [31:0] el;
    el   = ((32'(mm_q) + 32'(ml_q)) * 32'(e_q) + 32'(yy_q) + 32'(yl_q)) * 32'(e_q) + 32'(xx_q);
    rs_d = base_q + (p16_q ? (el << 1) : el);
    re_d = rs_d + (p16_q ? 32'(ncol_q) << 1 : 32'(ncol_q));
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q <= S_IDLE;
      {base_q, e_q, mm_q, yy_q, xx_q, p16_q, shift_q, ncol_q, mss_q, iss_q} <= '0;
      {ml_q, yl_q, rstart_q, rend_q, wa_q, last_wa_q} <= '0;
    end else begin
      unique case (state_q)
        S_IDLE: if (start_i) begin
          base_q  <= o_base_i;
          e_q     <= e_i;
          mm_q    <= mm_i;
          yy_q    <= yy_i;
          xx_q    <= xx_i;
          p16_q   <= prec16_i;
          shift_q <= shift_i;
          ncol_q  <= ncol_i;
          mss_q   <= mss_i;
          iss_q   <= iss_i;
          ml_q    <= '0;
          yl_q    <= '0;
          state_q <= S_ROW;
        end
        S_ROW: begin
          rstart_q  <= rs_d;
          rend_q    <= re_d;
          wa_q      <= {rs_d[31:2], 2'b00};
          last_wa_q <= (re_d - 32'd1) & ~32'd3;
          state_q   <= S_WORD;
        end
        S_WORD: if (tcdm_rsp_i.gnt) begin
          if (wa_q == last_wa_q) begin
            state_q <= S_ROW;
            if (yl_q + 8'd1 == iss_q) begin
              yl_q <= '0;
              if (ml_q + 8'd1 == mss_q) state_q <= S_IDLE;
              else ml_q <= ml_q + 8'd1;
            end else begin
              yl_q <= yl_q + 8'd1;
            end
          end else begin
            wa_q <= wa_q + 32'd4;
          end
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

endmodule
