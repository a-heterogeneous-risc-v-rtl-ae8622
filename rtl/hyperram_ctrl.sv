// HyperRAM memory controller: configuration registers, front-end, back-end.
//
// The host reaches the off-chip HyperRAMs through mem_req_i/mem_rsp_o as plain
// memory; hyper_frontend maps each access onto a chip-select pair and row and
// hyperbus_phy runs it on two HyperBUS interfaces with two chip selects each.
// The configuration port (the paper's APB port, here on the host-bus
// protocol) holds two 64-bit registers, reset to this design's defaults:
//   0x0  n_rows  16-bit rows per memory (default 4 Mi, an 8 MiB device as on
//                the paper's test board; 64 Mi for the 512 MiB maximum)
//   0x8  t_lat   initial latency in clock cycles (default 6)
// The paper's front-end also multiplexes a uDMA engine channel towards the
// back-end and sits in another clock domain behind a CDC; both are left out:
// this controller has one requester and one clock.
module hyperram_ctrl
  import shaheen_pkg::*;
#(
  parameter int unsigned NBUS         = 2,
  parameter int unsigned NCS          = 2,
  parameter logic [31:0] N_ROWS_RESET = 32'd4194304,
  parameter logic [7:0]  T_LAT_RESET  = 8'd6
) (
  input  logic                        clk_i,
  input  logic                        rst_ni,
  input  hreq_t                       cfg_req_i,
  output hrsp_t                       cfg_rsp_o,
  input  hreq_t                       mem_req_i,
  output hrsp_t                       mem_rsp_o,
  output logic [NBUS-1:0]             hb_ck_en_o,
  output logic [NBUS-1:0]             hb_reset_no,
  output logic [NBUS-1:0][NCS-1:0]    hb_cs_no,
  output logic [NBUS-1:0]             hb_dq_oe_o,
  output logic [NBUS-1:0][15:0]       hb_dq_o,
  input  logic [NBUS-1:0][15:0]       hb_dq_i,
  output logic [NBUS-1:0]             hb_rwds_oe_o,
  output logic [NBUS-1:0][1:0]        hb_rwds_o,
  input  logic [NBUS-1:0]             hb_rwds_i
);
  logic [31:0] n_rows_q;
  logic [7:0]  t_lat_q;
  logic        cfg_rv_q;
  logic [63:0] cfg_rd_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      n_rows_q <= N_ROWS_RESET;
      t_lat_q  <= T_LAT_RESET;
      cfg_rv_q <= 1'b0;
      cfg_rd_q <= '0;
    end else begin
      cfg_rv_q <= cfg_req_i.req;
      if (cfg_req_i.req) begin
        cfg_rd_q <= cfg_req_i.addr[3] ? 64'(t_lat_q) : 64'(n_rows_q);
        if (cfg_req_i.we) begin
          if (cfg_req_i.addr[3]) t_lat_q  <= cfg_req_i.wdata[7:0];
          else                   n_rows_q <= cfg_req_i.wdata[31:0];
        end
      end
    end
  end
  assign cfg_rsp_o = '{gnt: cfg_req_i.req, rvalid: cfg_rv_q, err: 1'b0, rdata: cfg_rd_q};

  logic        phy_valid, phy_ready, tx_valid, tx_ready, rx_valid, done;
  hyper_req_t  phy_req;
  logic [31:0] tx_data, rx_data;
  logic [3:0]  tx_be;

  hyper_frontend u_fe (
    .clk_i, .rst_ni, .n_rows_i(n_rows_q), .req_i(mem_req_i), .rsp_o(mem_rsp_o),
    .phy_valid_o(phy_valid), .phy_ready_i(phy_ready), .phy_req_o(phy_req),
    .tx_valid_o(tx_valid), .tx_ready_i(tx_ready), .tx_data_o(tx_data), .tx_be_o(tx_be),
    .rx_valid_i(rx_valid), .rx_data_i(rx_data), .done_i(done)
  );

  hyperbus_phy #(.NBUS(NBUS), .NCS(NCS)) u_phy (
    .clk_i, .rst_ni, .t_lat_i(t_lat_q),
    .req_valid_i(phy_valid), .req_ready_o(phy_ready), .req_i(phy_req),
    .tx_valid_i(tx_valid), .tx_ready_o(tx_ready), .tx_data_i(tx_data), .tx_be_i(tx_be),
    .rx_valid_o(rx_valid), .rx_data_o(rx_data), .done_o(done),
    .ck_en_o(hb_ck_en_o), .reset_no(hb_reset_no), .cs_no(hb_cs_no),
    .dq_oe_o(hb_dq_oe_o), .dq_o(hb_dq_o), .dq_i(hb_dq_i),
    .rwds_oe_o(hb_rwds_oe_o), .rwds_o(hb_rwds_o), .rwds_i(hb_rwds_i)
  );
endmodule
