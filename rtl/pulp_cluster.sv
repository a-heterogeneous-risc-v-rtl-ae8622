// Cluster domain: shared L1 scratchpad, cluster DMA, cluster crossbar and the
// mixed-precision dot-product datapath of each Flex-V core.
//
// NCORES core data ports and the DMA's four ports share NB word-interleaved L1
// banks of BANK_BYTES each through the logarithmic interconnect (default 8
// cores, 16 banks of 16 KiB = 256 KiB, single-cycle access). Outgoing traffic,
// from the DMA and from the cores (one shared core port here), is merged by the
// cluster crossbar onto the single port towards the host, which the SoC routes
// through the IOTLB. Each core's SIMD dot-product unit and its SIMD_FMT CSR /
// MPC_CNT controller are instantiated here; the rest of each core (fetch,
// decode, register files, FPU), its instruction cache and the event unit are
// not part of this model, so the cores' pipeline signals are ports. Each
// core's dotp issue also advances its MPC_CNT.
module pulp_cluster
  import shaheen_pkg::*;
#(
  parameter int unsigned NCORES     = 8,
  parameter int unsigned NB         = 16,
  parameter int unsigned BANK_BYTES = 16 * 1024,
  parameter int unsigned NDMA       = 4
) (
  input  logic                       clk_i,
  input  logic                       rst_ni,
  // core data ports to L1 (TCDM protocol)
  input  logic [NCORES-1:0]          core_req_i,
  input  logic [NCORES-1:0]          core_we_i,
  input  logic [NCORES-1:0][3:0]     core_be_i,
  input  logic [NCORES-1:0][31:0]    core_addr_i,
  input  logic [NCORES-1:0][31:0]    core_wdata_i,
  output logic [NCORES-1:0]          core_gnt_o,
  output logic [NCORES-1:0]          core_rvalid_o,
  output logic [NCORES-1:0][31:0]    core_rdata_o,
  // cores' shared port towards the host memory
  input  hreq_t                      core_ext_req_i,
  output hrsp_t                      core_ext_rsp_o,
  // DMA programming (from the cores' peripheral crossbar)
  input  logic                       dma_cfg_req_i,
  input  logic                       dma_cfg_we_i,
  input  logic [4:0]                 dma_cfg_addr_i,
  input  logic [31:0]                dma_cfg_wdata_i,
  output logic [31:0]                dma_cfg_rdata_o,
  output logic                       dma_done_o,
  output logic                       dma_busy_o,
  // per-core SIMD dot-product issue
  input  logic [NCORES-1:0]          dp_valid_i,
  input  logic [NCORES-1:0][31:0]    dp_a_i,
  input  logic [NCORES-1:0][31:0]    dp_b_i,
  input  logic [NCORES-1:0][31:0]    dp_c_i,
  input  logic [NCORES-1:0]          dp_a_signed_i,
  input  logic [NCORES-1:0]          dp_b_signed_i,
  input  logic [NCORES-1:0]          fmt_we_i,
  input  simd_fmt_e [NCORES-1:0]     fmt_a_i,
  input  simd_fmt_e [NCORES-1:0]     fmt_b_i,
  output logic [NCORES-1:0]          dp_valid_o,
  output logic [NCORES-1:0][31:0]    dp_result_o,
  output logic [NCORES-1:0]          dp_slice_wrap_o,
  // port towards the host (through the IOTLB)
  output hreq_t                      cl_req_o,
  input  hrsp_t                      cl_rsp_i,
  output logic [NB-1:0]              l1_conflict_o,
  output logic [1:0]                 cl_xbar_stall_o   // [0] DMA, [1] cores wait for the crossbar
);
  localparam int unsigned NM   = NCORES + NDMA;
  localparam int unsigned L1AW = $clog2(NB * BANK_BYTES);

  logic [NDMA-1:0]        d_req, d_we, d_gnt, d_rvalid;
  logic [NDMA-1:0][3:0]   d_be;
  logic [NDMA-1:0][31:0]  d_addr, d_wdata, d_rdata;
  logic [NM-1:0]          t_req, t_we, t_gnt, t_rvalid;
  logic [NM-1:0][3:0]     t_be;
  logic [NM-1:0][L1AW-1:0] t_addr;
  logic [NM-1:0][31:0]    t_wdata, t_rdata;
  hreq_t                  dma_h_req;
  hrsp_t                  dma_h_rsp;

  for (genvar m = 0; m < NM; m++) begin : g_l1
    if (m < NCORES) begin : g_core
      assign t_req[m]   = core_req_i[m];
      assign t_we[m]    = core_we_i[m];
      assign t_be[m]    = core_be_i[m];
      assign t_addr[m]  = core_addr_i[m][L1AW-1:0];
      assign t_wdata[m] = core_wdata_i[m];
      assign core_gnt_o[m]    = t_gnt[m];
      assign core_rvalid_o[m] = t_rvalid[m];
      assign core_rdata_o[m]  = t_rdata[m];
    end else begin : g_dma
      assign t_req[m]   = d_req[m-NCORES];
      assign t_we[m]    = d_we[m-NCORES];
      assign t_be[m]    = d_be[m-NCORES];
      assign t_addr[m]  = d_addr[m-NCORES][L1AW-1:0];
      assign t_wdata[m] = d_wdata[m-NCORES];
      assign d_gnt[m-NCORES]    = t_gnt[m];
      assign d_rvalid[m-NCORES] = t_rvalid[m];
      assign d_rdata[m-NCORES]  = t_rdata[m];
    end
  end

  tcdm_interconnect #(
    .NM(NM), .NB(NB), .DW(32), .BANK_WORDS(BANK_BYTES / 4), .AW(L1AW)
  ) u_l1 (
    .clk_i, .rst_ni,
    .req_i(t_req), .we_i(t_we), .be_i(t_be), .addr_i(t_addr), .wdata_i(t_wdata),
    .gnt_o(t_gnt), .rvalid_o(t_rvalid), .rdata_o(t_rdata), .conflict_o(l1_conflict_o)
  );

  cluster_dma #(.NP(NDMA)) u_dma (
    .clk_i, .rst_ni,
    .cfg_req_i(dma_cfg_req_i), .cfg_we_i(dma_cfg_we_i), .cfg_addr_i(dma_cfg_addr_i),
    .cfg_wdata_i(dma_cfg_wdata_i), .cfg_rdata_o(dma_cfg_rdata_o),
    .done_o(dma_done_o), .busy_o(dma_busy_o),
    .h_req_o(dma_h_req), .h_rsp_i(dma_h_rsp),
    .l1_req_o(d_req), .l1_we_o(d_we), .l1_be_o(d_be), .l1_addr_o(d_addr),
    .l1_wdata_o(d_wdata), .l1_gnt_i(d_gnt), .l1_rvalid_i(d_rvalid), .l1_rdata_i(d_rdata)
  );

  // cluster crossbar: DMA and cores onto the one port towards the host
  hreq_t [1:0] cx_m_req;
  hrsp_t [1:0] cx_m_rsp;
  hreq_t [0:0] cx_s_req;
  hrsp_t [0:0] cx_s_rsp;
  assign cx_m_req[0]    = dma_h_req;
  assign cx_m_req[1]    = core_ext_req_i;
  assign dma_h_rsp      = cx_m_rsp[0];
  assign core_ext_rsp_o = cx_m_rsp[1];
  assign cl_req_o       = cx_s_req[0];
  assign cx_s_rsp[0]    = cl_rsp_i;

  mem_xbar #(.NM(2), .NS(1), .BASE('0), .MASK('0)) u_cl_xbar (
    .clk_i, .rst_ni, .m_req_i(cx_m_req), .m_rsp_o(cx_m_rsp),
    .s_req_o(cx_s_req), .s_rsp_i(cx_s_rsp), .stall_o(cl_xbar_stall_o)
  );

  for (genvar c = 0; c < NCORES; c++) begin : g_core
    simd_fmt_e  fa, fb;
    logic [2:0] cnt;
    flexv_mpc_ctrl u_mpc (
      .clk_i, .rst_ni, .fmt_we_i(fmt_we_i[c]), .fmt_a_i(fmt_a_i[c]), .fmt_b_i(fmt_b_i[c]),
      .issue_i(dp_valid_i[c]), .fmt_a_o(fa), .fmt_b_o(fb), .mpc_cnt_o(cnt),
      .slice_wrap_o(dp_slice_wrap_o[c])
    );
    flexv_dotp_unit u_dotp (
      .clk_i, .rst_ni, .valid_i(dp_valid_i[c]), .a_i(dp_a_i[c]), .b_i(dp_b_i[c]),
      .c_i(dp_c_i[c]), .fmt_a_i(fa), .fmt_b_i(fb), .a_signed_i(dp_a_signed_i[c]),
      .b_signed_i(dp_b_signed_i[c]), .mpc_cnt_i(cnt),
      .valid_o(dp_valid_o[c]), .result_o(dp_result_o[c])
    );
  end
endmodule
