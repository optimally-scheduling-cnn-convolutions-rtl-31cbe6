// hwc_load_unit: one of the HWC's two load units (one feeds the I buffer,
// one the W buffer), each on its own 32-bit TCDM master port.
//
// A command asks for nbytes bytes starting at any byte address to be copied
// to the local buffer from byte offset dst. The unit requests every aligned
// 32-bit word that covers the range, one request per cycle while granted,
// and writes the wanted bytes of each returned word (up to four per cycle)
// into the buffer, each to its own index. Bytes before the start or after
// the end of the range inside the first and last word are dropped.
//
// Commands are accepted back to back: a new one is taken as soon as the
// last word of the previous one has been granted, while that word's data is
// still on its way, so a run of short commands costs one cycle per word.
// Handshakes: cmd_valid_i/cmd_ready_o; TCDM as
// described in hwc_pkg (gnt in the request cycle, rvalid one cycle later).
// idle_o is high once the last word of the command has been written.
// The paper only names the load units; their workings are this design's.
// Lint note: rst_ni also disables the assertion on the read latency, so a
// linter sees it used both asynchronously and synchronously.
module hwc_load_unit
  import hwc_pkg::*;
(
  input  logic            clk_i,
  input  logic            rst_ni,
  input  logic            cmd_valid_i,
  output logic            cmd_ready_o,
  input  load_cmd_t       cmd_i,
  output logic            idle_o,
  output tcdm_req_t       tcdm_req_o,
  input  tcdm_rsp_t       tcdm_rsp_i,
  output logic [3:0]      wr_en_o,
  output logic [3:0][7:0] wr_idx_o,
  output logic [3:0][7:0] wr_byte_o
);

  logic        active_q;     // words left to request
  logic        pend_q;       // a granted word awaits its data
  logic [31:0] start_q;      // first byte address of the range
  logic [31:0] end_q;        // one past the last byte address
  logic [7:0]  dst_q;
  logic [31:0] wa_q;         // next word address to request
  logic [31:0] last_wa_q;    // last word address to request
  logic [31:0] resp_wa_q;    // word address of the data arriving now
  logic [31:0] resp_start_q; // range and destination of that word's command
  logic [31:0] resp_end_q;
  logic [7:0]  resp_dst_q;

  logic fire;
  assign fire        = active_q && tcdm_rsp_i.gnt;
  assign cmd_ready_o = !active_q;
  assign idle_o      = !active_q && !pend_q;

  always_comb begin
    tcdm_req_o       = '0;
    tcdm_req_o.req   = active_q;
    tcdm_req_o.we    = 1'b0;
    tcdm_req_o.be    = 4'hF;
    tcdm_req_o.addr  = wa_q;
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      active_q  <= 1'b0;
      pend_q    <= 1'b0;
      start_q   <= '0;
      end_q     <= '0;
      dst_q     <= '0;
      wa_q      <= '0;
      last_wa_q <= '0;
      resp_wa_q <= '0;
      resp_start_q <= '0;
      resp_end_q   <= '0;
      resp_dst_q   <= '0;
    end else begin
      pend_q <= fire;
      if (fire) begin
        resp_wa_q    <= wa_q;
        resp_start_q <= start_q;
        resp_end_q   <= end_q;
        resp_dst_q   <= dst_q;
      end
      if (cmd_valid_i && cmd_ready_o) begin
        if (cmd_i.nbytes != 8'd0) begin
          active_q  <= 1'b1;
          start_q   <= cmd_i.addr;
          end_q     <= cmd_i.addr + 32'(cmd_i.nbytes);
          dst_q     <= cmd_i.dst;
          wa_q      <= {cmd_i.addr[31:2], 2'b00};
          last_wa_q <= (cmd_i.addr + 32'(cmd_i.nbytes) - 32'd1) & ~32'd3;
        end
      end else if (fire) begin
        if (wa_q == last_wa_q) active_q <= 1'b0;
        wa_q <= wa_q + 32'd4;
      end
    end
  end

  // Scatter the returned word into the buffer
  always_comb begin
    for (int b = 0; b < 4; b++) begin
      logic [31:0] ba;
      ba = resp_wa_q + 32'(b);
      wr_en_o[b]   = pend_q && tcdm_rsp_i.rvalid && (ba >= resp_start_q) && (ba < resp_end_q);
      wr_idx_o[b]  = resp_dst_q + 8'(ba - resp_start_q);
      wr_byte_o[b] = tcdm_rsp_i.rdata[8*b +: 8];
    end
  end

  // The TCDM answers every granted read exactly one cycle later.
  a_rvalid: assert property (@(posedge clk_i) disable iff (!rst_ni) pend_q |-> tcdm_rsp_i.rvalid);

endmodule
