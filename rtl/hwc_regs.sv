// hwc_regs: configuration register file of the HWC, behind its slave
// configuration port ("Registers" half of the "Registers & Control" block).
//
// A host core writes the layer shape (H, E, C, M, R, S, padding), the TCDM
// base addresses of the I, W and O arrays, the tile sizes mss and iss, the
// data precision and the output shift, then writes 1 to bit 0 of CTRL. That
// write produces a one-cycle start pulse. CTRL reads back {err, done, busy};
// done and err are sticky until the next start. Five 32-bit counters (total
// cycles, SIMD-active cycles, and words moved on each of the I, W and O TCDM
// ports) are cleared by start and count while busy, so that the memory
// traffic of a layer can be read after it ends.
//
// Timing: writes take effect at the clock edge of the request; a read
// returns rdata with rvalid one cycle after the request.
// The paper names this block and its config port only; the register map,
// field widths and counters are this design's choices.
module hwc_regs
  import hwc_pkg::*;
(
  input  logic       clk_i,
  input  logic       rst_ni,
  input  cfg_req_t   cfg_req_i,
  output cfg_rsp_t   cfg_rsp_o,
  // to the controller
  output layer_cfg_t cfg_o,
  output logic       start_o,
  input  logic       busy_i,
  input  logic       done_i,   // one-cycle pulse at the end of a layer
  input  logic       err_i,    // one-cycle pulse: configuration rejected
  // counter events
  input  logic       mac_i,
  input  logic       iword_i,
  input  logic       wword_i,
  input  logic       oword_i
);

  layer_cfg_t cfg_q;
  logic       done_q, err_q;
  logic [31:0] cnt_cyc_q, cnt_mac_q, cnt_i_q, cnt_w_q, cnt_o_q;
  logic        wr;

  assign wr      = cfg_req_i.req && cfg_req_i.we;
  assign start_o = wr && (cfg_req_i.addr == REG_CTRL) && cfg_req_i.wdata[0] && !busy_i;
  assign cfg_o   = cfg_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      cfg_q        <= '0;
      cfg_q.r      <= 4'd3;
      cfg_q.s      <= 3'd1;
      cfg_q.mss    <= 8'd1;
      cfg_q.iss    <= 8'd1;
    end else if (wr && !busy_i) begin
      unique case (cfg_req_i.addr)
        REG_I_BASE: cfg_q.i_base <= cfg_req_i.wdata;
        REG_W_BASE: cfg_q.w_base <= cfg_req_i.wdata;
        REG_O_BASE: cfg_q.o_base <= cfg_req_i.wdata;
        REG_H:      cfg_q.h      <= cfg_req_i.wdata[15:0];
        REG_E:      cfg_q.e      <= cfg_req_i.wdata[15:0];
        REG_C:      cfg_q.c      <= cfg_req_i.wdata[15:0];
        REG_M:      cfg_q.m      <= cfg_req_i.wdata[15:0];
        REG_R:      cfg_q.r      <= cfg_req_i.wdata[3:0];
        REG_S:      cfg_q.s      <= cfg_req_i.wdata[2:0];
        REG_PAD:    cfg_q.pad    <= cfg_req_i.wdata[3:0];
        REG_MSS:    cfg_q.mss    <= cfg_req_i.wdata[7:0];
        REG_ISS:    cfg_q.iss    <= cfg_req_i.wdata[7:0];
        REG_PREC:   cfg_q.prec16 <= cfg_req_i.wdata[0];
        REG_SHIFT:  cfg_q.shift  <= cfg_req_i.wdata[4:0];
        default: ;
      endcase
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      done_q <= 1'b0;
      err_q  <= 1'b0;
      {cnt_cyc_q, cnt_mac_q, cnt_i_q, cnt_w_q, cnt_o_q} <= '0;
    end else if (start_o) begin
      done_q <= 1'b0;
      err_q  <= 1'b0;
      {cnt_cyc_q, cnt_mac_q, cnt_i_q, cnt_w_q, cnt_o_q} <= '0;
    end else begin
      if (done_i) done_q <= 1'b1;
      if (err_i)  err_q  <= 1'b1;
      if (busy_i) cnt_cyc_q <= cnt_cyc_q + 32'd1;
      if (mac_i)   cnt_mac_q <= cnt_mac_q + 32'd1;
      if (iword_i) cnt_i_q   <= cnt_i_q + 32'd1;
      if (wword_i) cnt_w_q   <= cnt_w_q + 32'd1;
      if (oword_i) cnt_o_q   <= cnt_o_q + 32'd1;
    end
  end

  // read port, one cycle latency
  logic [31:0] rdata_d;
  always_comb begin
    rdata_d = '0;
    unique case (cfg_req_i.addr)
      REG_CTRL:   rdata_d = {29'd0, err_q, done_q, busy_i};
      REG_I_BASE: rdata_d = cfg_q.i_base;
      REG_W_BASE: rdata_d = cfg_q.w_base;
      REG_O_BASE: rdata_d = cfg_q.o_base;
      REG_H:      rdata_d = {16'd0, cfg_q.h};
      REG_E:      rdata_d = {16'd0, cfg_q.e};
      REG_C:      rdata_d = {16'd0, cfg_q.c};
      REG_M:      rdata_d = {16'd0, cfg_q.m};
      REG_R:      rdata_d = {28'd0, cfg_q.r};
      REG_S:      rdata_d = {29'd0, cfg_q.s};
      REG_PAD:    rdata_d = {28'd0, cfg_q.pad};
      REG_MSS:    rdata_d = {24'd0, cfg_q.mss};
      REG_ISS:    rdata_d = {24'd0, cfg_q.iss};
      REG_PREC:   rdata_d = {31'd0, cfg_q.prec16};
      REG_SHIFT:  rdata_d = {27'd0, cfg_q.shift};
      REG_CYC:    rdata_d = cnt_cyc_q;
      REG_MACCYC: rdata_d = cnt_mac_q;
      REG_IWORDS: rdata_d = cnt_i_q;
      REG_WWORDS: rdata_d = cnt_w_q;
      REG_OWORDS: rdata_d = cnt_o_q;
      default:    rdata_d = '0;
    endcase
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      cfg_rsp_o <= '0;
    end else begin
      cfg_rsp_o.rvalid <= cfg_req_i.req && !cfg_req_i.we;
      cfg_rsp_o.rdata  <= rdata_d;
    end
  end

endmodule
