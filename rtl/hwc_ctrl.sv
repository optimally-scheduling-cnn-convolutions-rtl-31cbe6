// hwc_ctrl: the HWC's controller ("Control" half of "Registers & Control").
//
// It walks the published HWC loop nest, with the input-map loop untiled
// (css = C) and the column tile equal to the SIMD width (jss = lanes):
//
//   for mm (step mss) for yy (step iss) for xx (step lanes)   -- tiles
//     for c in 0..C-1            O buffered: partial sums stay inside
//       for yl in 0..iss_eff-1
//         for k in 0..R-1        I and W buffered for this kernel row:
//                                  load I row segment and W[mm..][c][k][*]
//           for ml in 0..mss_eff-1
//             for l in 0..R-1      one SIMD step, all lanes (loop LSX)
//     store the finished tile
//
// The input row read for output line y and kernel row k is iy = y*S+k-PAD,
// columns from ix0 = xx*S-PAD; pixels outside the H x H map are zero, which
// gives the centred kernel of the published schedule when PAD = R/2.
// Loads of I and W run in parallel on their own ports, driven by a load
// engine that keeps its own kernel-row position (lc, lyl, lk) one row ahead
// of the compute position (c, yl, k).
// I window mode: when the (iss-1)*S+R input rows of a tile fit the I buffer
// and are fewer than the iss*R row loads they replace, I is buffered above
// the output-line loop as in the published schedule: all window rows of
// input map c are loaded once, at (yl, k) = (0, 0), and each kernel row
// reads its row at offset (yl*S+k) * segment bytes. Otherwise one row
// segment is loaded per kernel row.
// Buffer halves: if the mss W rows fit half the W buffer, the next kernel
// row's weights go to the free half while the datapath reads the other; the
// I segment is halved the same way when it fits half the I buffer and the
// window is not used. When both I and W of the next kernel row can go to
// free space (or it loads no I), its load overlaps the SIMD steps, and
// consecutive kernel rows follow without a gap once the load keeps up;
// otherwise the load waits for the SIMD steps to finish.
// The tile's O rows are stored once the last input map has been added,
// then the next tile starts with a fresh load.
// Using the two halves as a double buffer is this design's choice: the
// paper gives the buffer sizes and the 80% average utilisation, not how
// loads are hidden.
// A start with a shape the buffers cannot hold (I segment > 96 bytes,
// mss*R weights > 128 bytes, mss*iss O rows > 16, or a zero/oversized field)
// is refused with a one-cycle err_o and done_o, without touching memory.
// Interface: start/busy/done/err towards hwc_regs; load commands
// (valid/ready, destination including the half's offset), per-half I buffer
// clear, buffer read selects and read half offsets, one mac_op_t per cycle to the
// datapath, and a start pulse plus tile description to the store unit.
// Lint notes: rst_ni also disables the assertions below, so a linter sees
// it used both asynchronously and synchronously; only the low 5 bits of the
// integer ncol are used, as a tile has at most 16 columns.
module hwc_ctrl
  import hwc_pkg::*;
#(
  parameter int unsigned NLANE = hwc_pkg::LANES,
  parameter int unsigned IB    = hwc_pkg::IBUF_BYTES,
  parameter int unsigned WB    = hwc_pkg::WBUF_BYTES,
  parameter int unsigned ROWS  = hwc_pkg::OBUF_ROWS,
  parameter int unsigned RMAX  = hwc_pkg::R_MAX
) (
  input  logic        clk_i,
  input  logic        rst_ni,
  input  layer_cfg_t  cfg_i,
  input  logic        start_i,
  output logic        busy_o,
  output logic        done_o,
  output logic        err_o,
  // I load unit
  output logic        i_cmd_valid_o,
  input  logic        i_cmd_ready_i,
  output load_cmd_t   i_cmd_o,
  input  logic        i_idle_i,
  output logic [1:0]  ibuf_clear_o,
  // W load unit
  output logic        w_cmd_valid_o,
  input  logic        w_cmd_ready_i,
  output load_cmd_t   w_cmd_o,
  input  logic        w_idle_i,
  // buffer read selects and datapath step
  output logic [3:0]  rd_l_o,
  output logic [7:0]  rd_ml_o,
  output logic [7:0]  rd_ibase_o,
  output logic [7:0]  rd_wbase_o,
  output mac_op_t     op_o,
  input  logic        dp_busy_i,
  // store unit
  output logic        st_start_o,
  input  logic        st_idle_i,
  output logic [15:0] st_mm_o,
  output logic [15:0] st_yy_o,
  output logic [15:0] st_xx_o,
  output logic [7:0]  st_mss_o,
  output logic [7:0]  st_iss_o,
  output logic [4:0]  st_ncol_o
);

  typedef enum logic [2:0] {C_IDLE, C_WAIT, C_MAC, C_DRAIN, C_STORE, C_STWAIT} state_e;
  state_e state_q;

  // Compute position (c, yl, k, ml, l) and load position (lc, lyl, lk)
  logic [15:0] mm_q, yy_q, xx_q, c_q, lc_q;
  logic [7:0]  yl_q, ml_q, lyl_q, wcmd_q, icmd_q;
  logic [3:0]  k_q, l_q, lk_q;
  logic        lact_q;    // a kernel-row load is in progress
  logic        ifirst_q;  // first cycle of that load
  logic        lfull_q;   // a loaded kernel row waits for the datapath
  logic        lmore_q;   // kernel rows of this tile are left to load
  logic        lbank_q;   // buffer half being loaded
  logic        rbank_q;   // buffer half being computed on

  // ---------------------------------------------------------------- shape
  int unsigned nl, eb, lseg, mss_eff, iss_eff, ncol;
  always_comb begin
    nl      = cfg_i.prec16 ? NLANE / 2 : NLANE;
    eb      = cfg_i.prec16 ? 2 : 1;
    lseg    = (nl - 1) * int'(cfg_i.s) + int'(cfg_i.r);
    mss_eff = (int'(cfg_i.m) - int'(mm_q) < int'(cfg_i.mss)) ? int'(cfg_i.m) - int'(mm_q) : int'(cfg_i.mss);
    iss_eff = (int'(cfg_i.e) - int'(yy_q) < int'(cfg_i.iss)) ? int'(cfg_i.e) - int'(yy_q) : int'(cfg_i.iss);
    ncol    = (int'(cfg_i.e) - int'(xx_q) < nl) ? int'(cfg_i.e) - int'(xx_q) : nl;
  end

  logic cfg_ok, win, idbl, wdbl;
  int unsigned nwin, nwin_eff;
  always_comb begin
    cfg_ok = (cfg_i.r != 0) && (int'(cfg_i.r) <= RMAX) && (cfg_i.s != 0) &&
             (cfg_i.mss != 0) && (cfg_i.iss != 0) &&
             (cfg_i.h != 0) && (cfg_i.e != 0) && (cfg_i.c != 0) && (cfg_i.m != 0) &&
             (lseg * eb <= IB) &&
             (int'(cfg_i.mss) * int'(cfg_i.r) * eb <= WB) &&
             (int'(cfg_i.mss) * int'(cfg_i.iss) <= ROWS);
    // Window mode: the I buffer holds every input row the tile's iss output
    // lines need, loaded once per input map, when that fits and saves loads.
    nwin     = (int'(cfg_i.iss) - 1) * int'(cfg_i.s) + int'(cfg_i.r);
    nwin_eff = (iss_eff - 1) * int'(cfg_i.s) + int'(cfg_i.r);
    win      = (nwin * lseg * eb <= IB) && (nwin < int'(cfg_i.iss) * int'(cfg_i.r));
    // A buffer whose contents fit twice is split into halves: the next
    // kernel row loads into one while the datapath reads the other.
    idbl     = !win && (lseg * eb <= IB / 2);
    wdbl     = int'(cfg_i.mss) * int'(cfg_i.r) * eb <= WB / 2;
  end

  // ------------------------------------------------------- I row segment
  int signed iy, ix0, ix_lo, ix_hi;
  int unsigned irow, n_icmd;
  logic      row_ok, needs_i;
  always_comb begin
    // rows are numbered from yy*S-PAD; window mode loads rows 0..nwin_eff-1
    // at the first kernel row of each input map, otherwise row lyl*S+lk
    needs_i = !win || (lyl_q == 8'd0 && lk_q == 4'd0);
    n_icmd  = !needs_i ? 0 : win ? nwin_eff : 1;
    irow    = win ? int'(icmd_q) : int'(lyl_q) * int'(cfg_i.s) + int'(lk_q);
    iy     = int'(yy_q) * int'(cfg_i.s) + int'(irow) - int'(cfg_i.pad);
    ix0    = int'(xx_q) * int'(cfg_i.s) - int'(cfg_i.pad);
    ix_lo  = (ix0 < 0) ? 0 : ix0;
    ix_hi  = (ix0 + int'(lseg) > int'(cfg_i.h)) ? int'(cfg_i.h) : ix0 + int'(lseg);
    row_ok = (iy >= 0) && (iy < int'(cfg_i.h)) && (ix_hi > ix_lo);
  end

  always_comb begin
    int unsigned el;
    el              = (int'(lc_q) * int'(cfg_i.h) + iy) * int'(cfg_i.h) + ix_lo;
    i_cmd_o.addr    = cfg_i.i_base + 32'(el * eb);
    i_cmd_o.nbytes  = 8'((ix_hi - ix_lo) * int'(eb));
    i_cmd_o.dst     = 8'((ix_lo - ix0) * int'(eb) +
                         (win ? int'(icmd_q) * int'(lseg * eb) : (idbl && lbank_q) ? int'(IB / 2) : 0));
  end

  always_comb begin
    int unsigned el;
    el              = (((int'(mm_q) + int'(wcmd_q)) * int'(cfg_i.c) + int'(lc_q)) * int'(cfg_i.r) + int'(lk_q)) * int'(cfg_i.r);
    w_cmd_o.addr    = cfg_i.w_base + 32'(el * eb);
    w_cmd_o.nbytes  = 8'(int'(cfg_i.r) * eb);
    w_cmd_o.dst     = 8'(int'(wcmd_q) * int'(cfg_i.r) * eb + ((wdbl && lbank_q) ? int'(WB / 2) : 0));
  end

  // --------------------------------------------------------- load engine
  logic lstart, ldone, lnext_last;
  assign lstart     = !lact_q && !lfull_q && lmore_q &&
                      ((state_q == C_WAIT) || (state_q == C_MAC && wdbl && (!needs_i || idbl)));
  assign ldone      = lact_q && !ifirst_q && (int'(wcmd_q) == mss_eff) && (int'(icmd_q) == n_icmd) &&
                      i_idle_i && w_idle_i;
  assign lnext_last = (lk_q == cfg_i.r - 4'd1) && (int'(lyl_q) + 1 == iss_eff) &&
                      (lc_q + 16'd1 == cfg_i.c);

  // ------------------------------------------------------------- outputs
  assign busy_o        = (state_q != C_IDLE);
  assign ibuf_clear_o  = !(lact_q && ifirst_q && needs_i) ? 2'b00 : !idbl ? 2'b11 : lbank_q ? 2'b10 : 2'b01;
  assign i_cmd_valid_o = lact_q && (int'(icmd_q) < n_icmd) && row_ok;
  assign w_cmd_valid_o = lact_q && (int'(wcmd_q) < mss_eff);
  assign rd_l_o        = l_q;
  assign rd_ml_o       = ml_q;
  assign rd_ibase_o    = win ? 8'((int'(yl_q) * int'(cfg_i.s) + int'(k_q)) * int'(lseg * eb)) :
                         (idbl && rbank_q) ? 8'(IB / 2) : 8'd0;
  assign rd_wbase_o    = (wdbl && rbank_q) ? 8'(WB / 2) : 8'd0;
  assign st_start_o    = (state_q == C_STORE);
  assign st_mm_o       = mm_q;
  assign st_yy_o       = yy_q;
  assign st_xx_o       = xx_q;
  assign st_mss_o      = 8'(mss_eff);
  assign st_iss_o      = 8'(iss_eff);
  assign st_ncol_o     = 5'(ncol);

  always_comb begin
    op_o       = '0;
    op_o.valid = (state_q == C_MAC);
    op_o.first = (l_q == 4'd0);
    op_o.last  = (l_q == cfg_i.r - 4'd1);
    op_o.init  = (c_q == 16'd0) && (k_q == 4'd0);
    op_o.row   = 4'(int'(ml_q) * iss_eff + int'(yl_q));
  end

  logic last_l, last_ml, last_k, last_yl, last_c;
  assign last_l  = (l_q == cfg_i.r - 4'd1);
  assign last_ml = (int'(ml_q) + 1 == mss_eff);
  assign last_k  = (k_q == cfg_i.r - 4'd1);
  assign last_yl = (int'(yl_q) + 1 == iss_eff);
  assign last_c  = (c_q + 16'd1 == cfg_i.c);

  // -------------------------------------------------------------- FSM
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q  <= C_IDLE;
      {mm_q, yy_q, xx_q, c_q, lc_q} <= '0;
      {yl_q, ml_q, lyl_q, wcmd_q, icmd_q} <= '0;
      {k_q, l_q, lk_q}              <= '0;
      {lact_q, ifirst_q, lfull_q, lmore_q, lbank_q, rbank_q} <= '0;
      done_o   <= 1'b0;
      err_o    <= 1'b0;
    end else begin
      done_o <= 1'b0;
      err_o  <= 1'b0;

      // Load engine: one kernel row (I segment and mss W rows) per run.
      if (lstart) begin
        lact_q   <= 1'b1;
        ifirst_q <= 1'b1;
        wcmd_q   <= '0;
        icmd_q   <= '0;
      end
      if (lact_q) begin
        ifirst_q <= 1'b0;
        if (w_cmd_valid_o && w_cmd_ready_i) wcmd_q <= wcmd_q + 8'd1;
        // rows wholly outside the map are skipped (they stay zero)
        if (int'(icmd_q) < n_icmd && (!row_ok || i_cmd_ready_i)) icmd_q <= icmd_q + 8'd1;
      end
      if (ldone) begin
        lact_q  <= 1'b0;
        lfull_q <= 1'b1;
        lmore_q <= !lnext_last;
        if (lk_q != cfg_i.r - 4'd1) begin
          lk_q <= lk_q + 4'd1;
        end else begin
          lk_q <= '0;
          if (int'(lyl_q) + 1 != iss_eff) begin
            lyl_q <= lyl_q + 8'd1;
          end else begin
            lyl_q <= '0;
            lc_q  <= lc_q + 16'd1;
          end
        end
      end

      unique case (state_q)
        C_IDLE: if (start_i) begin
          if (cfg_ok) begin
            {mm_q, yy_q, xx_q} <= '0;
            state_q <= C_WAIT;
          end else begin
            err_o  <= 1'b1;
            done_o <= 1'b1;
          end
        end
        C_WAIT: if (lfull_q) begin
          lfull_q <= 1'b0;
          rbank_q <= lbank_q;
          lbank_q <= (idbl || wdbl) && !lbank_q;
          ml_q    <= '0;
          l_q     <= '0;
          state_q <= C_MAC;
        end
        C_MAC: begin
          if (!last_l) begin
            l_q <= l_q + 4'd1;
          end else begin
            l_q <= '0;
            if (!last_ml) begin
              ml_q <= ml_q + 8'd1;
            end else begin
              ml_q <= '0;
              if (last_k && last_yl && last_c) begin
                state_q <= C_DRAIN;
              end else if (lfull_q) begin
                // next kernel row already loaded: continue without a gap
                lfull_q <= 1'b0;
                rbank_q <= lbank_q;
                lbank_q <= (idbl || wdbl) && !lbank_q;
              end else begin
                state_q <= C_WAIT;
              end
              if (!last_k) begin
                k_q <= k_q + 4'd1;
              end else begin
                k_q <= '0;
                if (!last_yl) begin
                  yl_q <= yl_q + 8'd1;
                end else begin
                  yl_q <= '0;
                  c_q  <= last_c ? 16'd0 : c_q + 16'd1;
                end
              end
            end
          end
        end
        C_DRAIN: if (!dp_busy_i) state_q <= C_STORE;
        C_STORE: state_q <= C_STWAIT;
        C_STWAIT: if (st_idle_i) begin
          state_q <= C_WAIT;
          if (int'(xx_q) + int'(nl) < int'(cfg_i.e)) begin
            xx_q <= 16'(int'(xx_q) + int'(nl));
          end else begin
            xx_q <= '0;
            if (int'(yy_q) + int'(cfg_i.iss) < int'(cfg_i.e)) begin
              yy_q <= yy_q + 16'(cfg_i.iss);
            end else begin
              yy_q <= '0;
              if (int'(mm_q) + int'(cfg_i.mss) < int'(cfg_i.m)) begin
                mm_q <= mm_q + 16'(cfg_i.mss);
              end else begin
                mm_q    <= '0;
                state_q <= C_IDLE;
                done_o  <= 1'b1;
              end
            end
          end
        end
        default: state_q <= C_IDLE;
      endcase

      // A new tile (or layer) starts loading from its first kernel row.
      if ((state_q == C_IDLE && start_i && cfg_ok) || (state_q == C_STWAIT && st_idle_i)) begin
        {c_q, lc_q}   <= '0;
        {yl_q, lyl_q} <= '0;
        {k_q, lk_q}   <= '0;
        {ml_q, l_q}   <= '0;
        lmore_q <= 1'b1;
        lfull_q <= 1'b0;
        lbank_q <= 1'b0;
        rbank_q <= 1'b0;
      end
    end
  end

  // A load command, once offered, is held unchanged until it is taken.
  a_i_hold: assert property (@(posedge clk_i) disable iff (!rst_ni)
                             i_cmd_valid_o && !i_cmd_ready_i |=> i_cmd_valid_o && $stable(i_cmd_o));
  a_w_hold: assert property (@(posedge clk_i) disable iff (!rst_ni)
                             w_cmd_valid_o && !w_cmd_ready_i |=> w_cmd_valid_o && $stable(w_cmd_o));

  // The register file holds the configuration still while a layer runs.
  a_cfg_stable: assert property (@(posedge clk_i) disable iff (!rst_ni)
                                 busy_o && !start_i |=> $stable(cfg_i));

endmodule
