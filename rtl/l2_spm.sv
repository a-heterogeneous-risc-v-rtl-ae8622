// L2 scratchpad memory (L2SPM) of the host domain with its TCDM interconnect.
//
// Four 256 KiB banks of 64-bit words make up 1 MiB; consecutive 64-bit words
// are interleaved over the banks so that host, cluster and peripheral traffic
// can proceed in parallel. NM host-bus ports (default 2: the host crossbar and
// the peripheral uDMA port) share the banks through tcdm_interconnect, which
// gives each port a one-cycle read latency when it does not collide with
// another. Only the low 20 address bits are used: the crossbar in front of the
// memory has already decoded the L2 window. Bank count, bank size and width
// follow the paper; the number of ports and the arbitration are own choices.
module l2_spm
  import shaheen_pkg::*;
#(
  parameter int unsigned NM         = 2,
  parameter int unsigned NB         = 4,
  parameter int unsigned BANK_BYTES = 256 * 1024
) (
  input  logic          clk_i,
  input  logic          rst_ni,
  input  hreq_t [NM-1:0] req_i,
  output hrsp_t [NM-1:0] rsp_o,
  output logic          conflict_o
);
  localparam int unsigned BANK_WORDS = BANK_BYTES / HBE_W;
  localparam int unsigned OFS_W      = $clog2(NB * BANK_BYTES);

  logic [NM-1:0]              t_req, t_we, t_gnt, t_rvalid;
  logic [NM-1:0][HBE_W-1:0]   t_be;
  logic [NM-1:0][OFS_W-1:0]   t_addr;
  logic [NM-1:0][HDATA_W-1:0] t_wdata, t_rdata;
  logic [NB-1:0]              t_conf;

  for (genvar m = 0; m < NM; m++) begin : g_port
    assign t_req[m]   = req_i[m].req;
    assign t_we[m]    = req_i[m].we;
    assign t_be[m]    = req_i[m].be;
    assign t_addr[m]  = req_i[m].addr[OFS_W-1:0];
    assign t_wdata[m] = req_i[m].wdata;
    assign rsp_o[m].gnt    = t_gnt[m];
    assign rsp_o[m].rvalid = t_rvalid[m];
    assign rsp_o[m].err    = 1'b0;
    assign rsp_o[m].rdata  = t_rdata[m];
  end

  tcdm_interconnect #(
    .NM(NM), .NB(NB), .DW(HDATA_W), .BANK_WORDS(BANK_WORDS), .AW(OFS_W)
  ) u_xbar (
    .clk_i, .rst_ni,
    .req_i(t_req), .we_i(t_we), .be_i(t_be), .addr_i(t_addr), .wdata_i(t_wdata),
    .gnt_o(t_gnt), .rvalid_o(t_rvalid), .rdata_o(t_rdata), .conflict_o(t_conf)
  );

  assign conflict_o = |t_conf;
endmodule
