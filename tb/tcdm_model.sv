// tcdm_model: behavioural model of the shared tightly-coupled data memory
// (TCDM) and its interconnect as seen by NP master ports, for simulation.
//
// Byte-addressed memory of BYTES bytes (addresses wrap). Each port follows
// the protocol of hwc_pkg: a request is granted in the cycle it is made
// unless the port is stalled that cycle (probability STALL_PCT percent,
// standing in for bank conflicts with other masters); a granted read
// returns its word with rvalid one cycle later; a granted write lands with
// its byte enables at the clock edge. stalls_o counts refused requests.
module tcdm_model
  import hwc_pkg::*;
#(
  parameter int unsigned BYTES     = 65536,
  parameter int unsigned NP        = 3,
  parameter int unsigned STALL_PCT = 0
) (
  input  logic        clk_i,
  input  tcdm_req_t   req_i [NP],
  output tcdm_rsp_t   rsp_o [NP],
  output int unsigned stalls_o
);

  logic [7:0] mem [BYTES];
  logic       allow [NP];
  logic       rvalid_q [NP];
  logic [31:0] rdata_q [NP];
  int unsigned stall_pct = STALL_PCT;   // may be changed by the testbench

  initial begin
    stalls_o = 0;
    for (int p = 0; p < NP; p++) begin
      allow[p]    = 1'b1;
      rvalid_q[p] = 1'b0;
      rdata_q[p]  = '0;
    end
  end

  always @(negedge clk_i)
    for (int p = 0; p < NP; p++) allow[p] <= ($urandom_range(0, 99) >= stall_pct);

  always_comb
    for (int p = 0; p < NP; p++) begin
      rsp_o[p].gnt    = req_i[p].req && allow[p];
      rsp_o[p].rvalid = rvalid_q[p];
      rsp_o[p].rdata  = rdata_q[p];
    end

  always @(posedge clk_i) begin
    int unsigned n;
    n = stalls_o;
    for (int p = 0; p < NP; p++) begin
      rvalid_q[p] <= 1'b0;
      if (req_i[p].req && !allow[p]) n++;
      if (req_i[p].req && allow[p]) begin
        if (req_i[p].we) begin
          for (int b = 0; b < 4; b++)
            if (req_i[p].be[b]) mem[(req_i[p].addr + b) % BYTES] <= req_i[p].wdata[8*b +: 8];
        end else begin
          rvalid_q[p] <= 1'b1;
          for (int b = 0; b < 4; b++)
            rdata_q[p][8*b +: 8] <= mem[(req_i[p].addr + b) % BYTES];
        end
      end
    end
    stalls_o <= n;
  end

endmodule
