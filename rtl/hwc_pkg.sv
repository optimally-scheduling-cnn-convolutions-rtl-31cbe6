// hwc_pkg: constants and types shared by the blocks of the HWC (hardware
// convolution block).
//
// The HWC computes one CNN convolution layer out of a shared tightly-coupled
// data memory (TCDM). Its local storage is three small application-managed
// buffers: I (96 bytes, one input row segment), W (128 bytes, one kernel row
// per output map of the tile) and O (1 KB of 32-bit partial sums). Its SIMD
// datapath does sixteen 8x8-bit or eight 16x16-bit multiply-accumulates per
// cycle. These sizes are the published ones; the bus formats, register map
// and field widths below are this implementation's own choices.
//
// TCDM port protocol (one per array: I, W, O), 32-bit words, byte addresses:
//   the master holds req/addr/we/be/wdata until gnt is high in the same
//   cycle; read data returns with rvalid exactly one cycle after the grant.
// Configuration port: a request is always accepted; a read returns rdata
// with rvalid one cycle later.
// A block linted on its own does not use every constant here; each is
// used by some block of the design.
package hwc_pkg;

  // Datapath and buffer geometry
  localparam int unsigned LANES      = 16;   // 8-bit MAC lanes (8 lanes in 16-bit mode)
  localparam int unsigned IBUF_BYTES = 96;
  localparam int unsigned WBUF_BYTES = 128;
  localparam int unsigned OBUF_BYTES = 1024;
  localparam int unsigned ACC_W      = 32;   // partial-sum precision
  localparam int unsigned OBUF_ROWS  = OBUF_BYTES / (LANES * ACC_W / 8);  // 16 rows of LANES sums
  localparam int unsigned R_MAX      = 11;   // largest kernel side

  // TCDM master port
  typedef struct packed {
    logic        req;
    logic        we;
    logic [3:0]  be;
    logic [31:0] addr;
    logic [31:0] wdata;
  } tcdm_req_t;

  typedef struct packed {
    logic        gnt;
    logic        rvalid;
    logic [31:0] rdata;
  } tcdm_rsp_t;

  // Configuration slave port
  typedef struct packed {
    logic        req;
    logic        we;
    logic [4:0]  addr;   // word index into the register map
    logic [31:0] wdata;
  } cfg_req_t;

  typedef struct packed {
    logic        rvalid;
    logic [31:0] rdata;
  } cfg_rsp_t;

  // Register map (word index)
  typedef enum logic [4:0] {
    REG_CTRL   = 5'd0,   // W: bit0 start. R: {err, done, busy}
    REG_I_BASE = 5'd1,
    REG_W_BASE = 5'd2,
    REG_O_BASE = 5'd3,
    REG_H      = 5'd4,   // input map side
    REG_E      = 5'd5,   // output map side
    REG_C      = 5'd6,   // input maps
    REG_M      = 5'd7,   // output maps
    REG_R      = 5'd8,   // kernel side
    REG_S      = 5'd9,   // stride
    REG_PAD    = 5'd10,  // zero padding on each border
    REG_MSS    = 5'd11,  // output maps per tile
    REG_ISS    = 5'd12,  // output rows per tile
    REG_PREC   = 5'd13,  // bit0: 1 = 16-bit data, 0 = 8-bit data
    REG_SHIFT  = 5'd14,  // output requantisation: arithmetic right shift
    REG_CYC    = 5'd16,  // counters (read only, cleared by start)
    REG_MACCYC = 5'd17,
    REG_IWORDS = 5'd18,
    REG_WWORDS = 5'd19,
    REG_OWORDS = 5'd20
  } reg_addr_e;

  // Layer configuration as held by the register file
  typedef struct packed {
    logic [31:0] i_base;
    logic [31:0] w_base;
    logic [31:0] o_base;
    logic [15:0] h;
    logic [15:0] e;
    logic [15:0] c;
    logic [15:0] m;
    logic [3:0]  r;
    logic [2:0]  s;
    logic [3:0]  pad;
    logic [7:0]  mss;
    logic [7:0]  iss;
    logic        prec16;
    logic [4:0]  shift;
  } layer_cfg_t;

  // Command to a load unit: copy nbytes from TCDM byte address addr into the
  // local buffer starting at byte offset dst.
  typedef struct packed {
    logic [31:0] addr;
    logic [7:0]  nbytes;
    logic [7:0]  dst;
  } load_cmd_t;

  // One SIMD step from the controller
  typedef struct packed {
    logic       valid;
    logic       first;   // first kernel column: restart lane accumulators
    logic       last;    // last kernel column: add lane sums into the O buffer
    logic       init;    // first contribution to this O row: overwrite instead of add
    logic [3:0] row;     // O buffer row (output map, output line) of the tile
  } mac_op_t;

endpackage
