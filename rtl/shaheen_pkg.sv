// Shared types and constants of the Shaheen SoC model.
//
// The on-chip buses of this design use one simple request/response protocol in
// place of AXI4: a master raises req with addr/we/be/wdata and holds them until
// gnt is seen in the same cycle; the response (rvalid, rdata, err) arrives one or
// more cycles after the grant, for reads and for writes. Each master has at most
// one transaction outstanding. The 64-bit data width follows the 64-bit host
// crossbar of the chip; the 32-bit address width and the address map below are
// this design's own choices.
package shaheen_pkg;

  localparam int unsigned HADDR_W = 32;
  localparam int unsigned HDATA_W = 64;
  localparam int unsigned HBE_W   = HDATA_W / 8;

  typedef struct packed {
    logic               req;
    logic               we;
    logic [HBE_W-1:0]   be;
    logic [HADDR_W-1:0] addr;
    logic [HDATA_W-1:0] wdata;
  } hreq_t;

  typedef struct packed {
    logic               gnt;
    logic               rvalid;
    logic               err;
    logic [HDATA_W-1:0] rdata;
  } hrsp_t;

  // Host address map (own choice).
  localparam logic [HADDR_W-1:0] L2_BASE     = 32'h1C00_0000;
  localparam logic [HADDR_W-1:0] L2_MASK     = 32'hFFF0_0000;  // 1 MiB
  localparam logic [HADDR_W-1:0] IOTLB_BASE  = 32'h1A10_0000;
  localparam logic [HADDR_W-1:0] HYCFG_BASE  = 32'h1A10_1000;
  localparam logic [HADDR_W-1:0] CFG_MASK    = 32'hFFFF_F000;  // 4 KiB each
  localparam logic [HADDR_W-1:0] HYPER_BASE  = 32'h8000_0000;
  localparam logic [HADDR_W-1:0] HYPER_MASK  = 32'hE000_0000;  // 512 MiB
  // Cluster-local L1 window; cluster accesses outside it go to the IOTLB.
  localparam logic [HADDR_W-1:0] L1_BASE     = 32'h1000_0000;
  localparam logic [HADDR_W-1:0] L1_MASK     = 32'hFFFC_0000;  // 256 KiB

  // SIMD element formats of the Flex-V dot-product unit (SIMD_FMT).
  typedef enum logic [1:0] {
    FMT_16 = 2'd0,
    FMT_8  = 2'd1,
    FMT_4  = 2'd2,
    FMT_2  = 2'd3
  } simd_fmt_e;

  function automatic int unsigned fmt_bits(simd_fmt_e f);
    case (f)
      FMT_16:  return 16;
      FMT_8:   return 8;
      FMT_4:   return 4;
      default: return 2;
    endcase
  endfunction

  // Request handed from the HyperRAM front-end to the PHY back-end.
  typedef struct packed {
    logic        write;
    logic        cs;     // which chip-select pair
    logic [31:0] row;    // 16-bit word address inside each memory
    logic [7:0]  len;    // number of 32-bit words (one per bus pair and cycle)
  } hyper_req_t;

endpackage
