// Shaheen SoC top: host domain, cluster domain and HyperRAM controller.
//
// The host crossbar (mem_xbar) connects two masters, the host core's port and
// the cluster's port after the IOTLB, to four slaves: the 1 MiB L2SPM, the
// HyperRAM memory window, the IOTLB configuration registers and the HyperRAM
// controller's configuration registers (address map in shaheen_pkg). The
// L2SPM has a second port for the peripheral uDMA subsystem. The cluster
// (pulp_cluster) holds the 256 KiB L1 scratchpad, the cluster DMA and the
// cores' dot-product units; everything it sends towards the host passes the
// IOTLB, which translates permitted accesses and answers refused ones itself
// while raising iotlb_irq_o to the host core.
//
// Parts that are not modelled appear as ports: the CVA6 host core (host_*),
// the uDMA subsystem (udma_*), the Flex-V core pipelines (core_*, dp_*, fmt_*,
// dma_cfg_*) and the off-chip HyperRAMs (hb_*). The chip's four clock domains
// and their CDCs are collapsed into one clock, clk_i, with active-low
// asynchronous reset rst_ni.
module shaheen_top
  import shaheen_pkg::*;
#(
  parameter int unsigned NCORES = 8,
  parameter int unsigned NBUS   = 2,
  parameter int unsigned NCS    = 2,
  parameter int unsigned IOTLB_ENTRIES = 32
) (
  input  logic                       clk_i,
  input  logic                       rst_ni,
  // host core (CVA6) data port
  input  hreq_t                      host_req_i,
  output hrsp_t                      host_rsp_o,
  output logic                       iotlb_irq_o,
  // uDMA subsystem port into the L2SPM
  input  hreq_t                      udma_req_i,
  output hrsp_t                      udma_rsp_o,
  // cluster cores
  input  logic [NCORES-1:0]          core_req_i,
  input  logic [NCORES-1:0]          core_we_i,
  input  logic [NCORES-1:0][3:0]     core_be_i,
  input  logic [NCORES-1:0][31:0]    core_addr_i,
  input  logic [NCORES-1:0][31:0]    core_wdata_i,
  output logic [NCORES-1:0]          core_gnt_o,
  output logic [NCORES-1:0]          core_rvalid_o,
  output logic [NCORES-1:0][31:0]    core_rdata_o,
  input  hreq_t                      core_ext_req_i,
  output hrsp_t                      core_ext_rsp_o,
  input  logic                       dma_cfg_req_i,
  input  logic                       dma_cfg_we_i,
  input  logic [4:0]                 dma_cfg_addr_i,
  input  logic [31:0]                dma_cfg_wdata_i,
  output logic [31:0]                dma_cfg_rdata_o,
  output logic                       dma_done_o,
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
  // HyperBUS pins
  output logic [NBUS-1:0]            hb_ck_en_o,
  output logic [NBUS-1:0]            hb_reset_no,
  output logic [NBUS-1:0][NCS-1:0]   hb_cs_no,
  output logic [NBUS-1:0]            hb_dq_oe_o,
  output logic [NBUS-1:0][15:0]      hb_dq_o,
  input  logic [NBUS-1:0][15:0]      hb_dq_i,
  output logic [NBUS-1:0]            hb_rwds_oe_o,
  output logic [NBUS-1:0][1:0]       hb_rwds_o,
  input  logic [NBUS-1:0]            hb_rwds_i,
  // event observation
  output logic                       l1_conflict_o,
  output logic                       l2_conflict_o,
  output logic [1:0]                 host_xbar_stall_o,
  output logic [1:0]                 cl_xbar_stall_o,
  output logic                       iotlb_hit_o,
  output logic                       iotlb_deny_o,
  output logic                       dma_busy_o
);
  hreq_t        cl_req, cl_h_req;
  hrsp_t        cl_rsp, cl_h_rsp;
  hreq_t [1:0]  hx_m_req;
  hrsp_t [1:0]  hx_m_rsp;
  hreq_t [3:0]  hx_s_req;
  hrsp_t [3:0]  hx_s_rsp;
  hreq_t [1:0]  l2_req;
  hrsp_t [1:0]  l2_rsp;
  logic [15:0]  l1_conf;

  // ---------------- host crossbar ----------------
  assign hx_m_req[0] = host_req_i;
  assign host_rsp_o  = hx_m_rsp[0];
  assign hx_m_req[1] = cl_h_req;
  assign cl_h_rsp    = hx_m_rsp[1];

  mem_xbar #(.NM(2), .NS(4)) u_host_xbar (
    .clk_i, .rst_ni, .m_req_i(hx_m_req), .m_rsp_o(hx_m_rsp),
    .s_req_o(hx_s_req), .s_rsp_i(hx_s_rsp), .stall_o(host_xbar_stall_o)
  );

  // ---------------- L2SPM ----------------
  assign l2_req[0]   = hx_s_req[0];
  assign hx_s_rsp[0] = l2_rsp[0];
  assign l2_req[1]   = udma_req_i;
  assign udma_rsp_o  = l2_rsp[1];

  l2_spm #(.NM(2)) u_l2 (
    .clk_i, .rst_ni, .req_i(l2_req), .rsp_o(l2_rsp), .conflict_o(l2_conflict_o)
  );

  // ---------------- HyperRAM controller ----------------
  hyperram_ctrl #(.NBUS(NBUS), .NCS(NCS)) u_hyper (
    .clk_i, .rst_ni,
    .cfg_req_i(hx_s_req[3]), .cfg_rsp_o(hx_s_rsp[3]),
    .mem_req_i(hx_s_req[1]), .mem_rsp_o(hx_s_rsp[1]),
    .hb_ck_en_o, .hb_reset_no, .hb_cs_no, .hb_dq_oe_o, .hb_dq_o, .hb_dq_i,
    .hb_rwds_oe_o, .hb_rwds_o, .hb_rwds_i
  );

  // ---------------- IOTLB ----------------
  iotlb #(.NE(IOTLB_ENTRIES)) u_iotlb (
    .clk_i, .rst_ni,
    .cfg_req_i(hx_s_req[2]), .cfg_rsp_o(hx_s_rsp[2]),
    .cl_req_i(cl_req), .cl_rsp_o(cl_rsp),
    .h_req_o(cl_h_req), .h_rsp_i(cl_h_rsp),
    .irq_o(iotlb_irq_o), .hit_o(iotlb_hit_o), .deny_o(iotlb_deny_o)
  );

  // ---------------- cluster ----------------
  pulp_cluster #(.NCORES(NCORES)) u_cluster (
    .clk_i, .rst_ni,
    .core_req_i, .core_we_i, .core_be_i, .core_addr_i, .core_wdata_i,
    .core_gnt_o, .core_rvalid_o, .core_rdata_o,
    .core_ext_req_i, .core_ext_rsp_o,
    .dma_cfg_req_i, .dma_cfg_we_i, .dma_cfg_addr_i, .dma_cfg_wdata_i, .dma_cfg_rdata_o,
    .dma_done_o, .dma_busy_o,
    .dp_valid_i, .dp_a_i, .dp_b_i, .dp_c_i, .dp_a_signed_i, .dp_b_signed_i,
    .fmt_we_i, .fmt_a_i, .fmt_b_i, .dp_valid_o, .dp_result_o, .dp_slice_wrap_o,
    .cl_req_o(cl_req), .cl_rsp_i(cl_rsp), .l1_conflict_o(l1_conf),
    .cl_xbar_stall_o
  );
  assign l1_conflict_o = |l1_conf;
endmodule
