// hwc: Hardware Convolution Block (HWC), a convolution-layer accelerator
// attached to a shared tightly-coupled data memory (TCDM).
//
// The HWC executes a loop-nest schedule chosen to minimise TCDM traffic with
// about 1 KB of local storage: the 32-bit partial sums of an output tile
// (mss output maps x iss lines x 16 columns) stay in the 1 KB O buffer while
// every input map is folded in; for each input row needed, a 96-byte row
// segment (I buffer) and one kernel row per output map (128-byte W buffer)
// are fetched and reused by all output maps and all kernel columns. Only
// finished, requantised outputs are written back. When all input rows of a
// tile fit the I buffer, they are loaded once per input map instead.
//
//   config port --> hwc_regs --> hwc_ctrl (loop nest)
//   TCDM port I --> hwc_load_unit --> hwc_ibuf --+
//   TCDM port W --> hwc_load_unit --> hwc_wbuf --+--> hwc_datapath <--> hwc_obuf
//   TCDM port O <-- hwc_store_unit <----------------------------------- hwc_obuf
//
// Ports: one configuration slave port (see hwc_regs for the map), three
// 32-bit TCDM master ports (one per array, protocol in hwc_pkg) and evt_o,
// a one-cycle pulse when a layer ends. Throughput: LANES multiply-
// accumulates per SIMD cycle (16 at 8 bits, 8 at 16 bits). When a layer's
// W rows fit half the W buffer and its I rows fit free I buffer space, the
// next kernel row is loaded while the current one is computed; otherwise
// loads and SIMD steps alternate. Tile stores are not overlapped.
// Block split, sizes, the three ports and the schedule follow the paper;
// protocols, register map and the sequencing details are this design's.
// Lint note: rst_ni also disables the controller's and load units'
// assertions, which a linter reports as a reset used both ways.
module hwc
  import hwc_pkg::*;
(
  input  logic      clk_i,
  input  logic      rst_ni,
  input  cfg_req_t  cfg_req_i,
  output cfg_rsp_t  cfg_rsp_o,
  output tcdm_req_t tcdm_i_req_o,
  input  tcdm_rsp_t tcdm_i_rsp_i,
  output tcdm_req_t tcdm_w_req_o,
  input  tcdm_rsp_t tcdm_w_rsp_i,
  output tcdm_req_t tcdm_o_req_o,
  input  tcdm_rsp_t tcdm_o_rsp_i,
  output logic      evt_o
);

  localparam int unsigned RW = $clog2(OBUF_ROWS);

  layer_cfg_t cfg;
  logic       start, busy, done, err;

  logic       i_cmd_valid, i_cmd_ready, i_idle;
  logic [1:0] ibuf_clear;
  load_cmd_t  i_cmd;
  logic       w_cmd_valid, w_cmd_ready, w_idle;
  load_cmd_t  w_cmd;
  logic [3:0]       i_wr_en, w_wr_en;
  logic [3:0][7:0]  i_wr_idx, i_wr_byte, w_wr_idx, w_wr_byte;

  logic [3:0]  rd_l;
  logic [7:0]  rd_ml, rd_ibase, rd_wbase;
  mac_op_t     op;
  logic        dp_busy;
  logic [LANES-1:0][15:0] pix;
  logic [15:0] wgt;

  logic [RW-1:0]                o_row_a, o_row_w, o_row_b;
  logic                         o_we;
  logic [LANES-1:0][ACC_W-1:0]  o_adata, o_wdata, o_bdata;

  logic        st_start, st_idle;
  logic [15:0] st_mm, st_yy, st_xx;
  logic [7:0]  st_mss, st_iss;
  logic [4:0]  st_ncol;

  assign evt_o   = done;
  assign o_row_w = o_row_a;

  hwc_regs u_regs (
    .clk_i, .rst_ni,
    .cfg_req_i, .cfg_rsp_o,
    .cfg_o   (cfg),
    .start_o (start),
    .busy_i  (busy),
    .done_i  (done),
    .err_i   (err),
    .mac_i   (op.valid),
    .iword_i (tcdm_i_req_o.req && tcdm_i_rsp_i.gnt),
    .wword_i (tcdm_w_req_o.req && tcdm_w_rsp_i.gnt),
    .oword_i (tcdm_o_req_o.req && tcdm_o_rsp_i.gnt)
  );

  hwc_ctrl u_ctrl (
    .clk_i, .rst_ni,
    .cfg_i          (cfg),
    .start_i        (start),
    .busy_o         (busy),
    .done_o         (done),
    .err_o          (err),
    .i_cmd_valid_o  (i_cmd_valid),
    .i_cmd_ready_i  (i_cmd_ready),
    .i_cmd_o        (i_cmd),
    .i_idle_i       (i_idle),
    .ibuf_clear_o   (ibuf_clear),
    .w_cmd_valid_o  (w_cmd_valid),
    .w_cmd_ready_i  (w_cmd_ready),
    .w_cmd_o        (w_cmd),
    .w_idle_i       (w_idle),
    .rd_l_o         (rd_l),
    .rd_ml_o        (rd_ml),
    .rd_ibase_o     (rd_ibase),
    .rd_wbase_o     (rd_wbase),
    .op_o           (op),
    .dp_busy_i      (dp_busy),
    .st_start_o     (st_start),
    .st_idle_i      (st_idle),
    .st_mm_o        (st_mm),
    .st_yy_o        (st_yy),
    .st_xx_o        (st_xx),
    .st_mss_o       (st_mss),
    .st_iss_o       (st_iss),
    .st_ncol_o      (st_ncol)
  );

  hwc_load_unit u_load_i (
    .clk_i, .rst_ni,
    .cmd_valid_i (i_cmd_valid),
    .cmd_ready_o (i_cmd_ready),
    .cmd_i       (i_cmd),
    .idle_o      (i_idle),
    .tcdm_req_o  (tcdm_i_req_o),
    .tcdm_rsp_i  (tcdm_i_rsp_i),
    .wr_en_o     (i_wr_en),
    .wr_idx_o    (i_wr_idx),
    .wr_byte_o   (i_wr_byte)
  );

  hwc_load_unit u_load_w (
    .clk_i, .rst_ni,
    .cmd_valid_i (w_cmd_valid),
    .cmd_ready_o (w_cmd_ready),
    .cmd_i       (w_cmd),
    .idle_o      (w_idle),
    .tcdm_req_o  (tcdm_w_req_o),
    .tcdm_rsp_i  (tcdm_w_rsp_i),
    .wr_en_o     (w_wr_en),
    .wr_idx_o    (w_wr_idx),
    .wr_byte_o   (w_wr_byte)
  );

  hwc_ibuf u_ibuf (
    .clk_i, .rst_ni,
    .clear_i   (ibuf_clear),
    .wr_en_i   (i_wr_en),
    .wr_idx_i  (i_wr_idx),
    .wr_byte_i (i_wr_byte),
    .prec16_i  (cfg.prec16),
    .s_i       (cfg.s),
    .l_i       (rd_l),
    .rbase_i   (rd_ibase),
    .pix_o     (pix)
  );

  hwc_wbuf u_wbuf (
    .clk_i, .rst_ni,
    .wr_en_i   (w_wr_en),
    .wr_idx_i  (w_wr_idx),
    .wr_byte_i (w_wr_byte),
    .prec16_i  (cfg.prec16),
    .r_i       (cfg.r),
    .ml_i      (rd_ml),
    .l_i       (rd_l),
    .rbase_i   (rd_wbase),
    .wgt_o     (wgt)
  );

  hwc_datapath u_dp (
    .clk_i, .rst_ni,
    .op_i      (op),
    .pix_i     (pix),
    .wgt_i     (wgt),
    .o_row_o   (o_row_a),
    .o_rdata_i (o_adata),
    .o_we_o    (o_we),
    .o_wdata_o (o_wdata),
    .busy_o    (dp_busy)
  );

  hwc_obuf u_obuf (
    .clk_i,
    .we_i    (o_we),
    .wrow_i  (o_row_w),
    .wdata_i (o_wdata),
    .arow_i  (o_row_a),
    .adata_o (o_adata),
    .brow_i  (o_row_b),
    .bdata_o (o_bdata)
  );

  hwc_store_unit u_store (
    .clk_i, .rst_ni,
    .start_i    (st_start),
    .idle_o     (st_idle),
    .o_base_i   (cfg.o_base),
    .e_i        (cfg.e),
    .prec16_i   (cfg.prec16),
    .shift_i    (cfg.shift),
    .mm_i       (st_mm),
    .yy_i       (st_yy),
    .xx_i       (st_xx),
    .mss_i      (st_mss),
    .iss_i      (st_iss),
    .ncol_i     (st_ncol),
    .row_o      (o_row_b),
    .rdata_i    (o_bdata),
    .tcdm_req_o (tcdm_o_req_o),
    .tcdm_rsp_i (tcdm_o_rsp_i)
  );

endmodule
