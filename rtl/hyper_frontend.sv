// HyperRAM front-end: turns host-bus accesses into back-end requests.
//
// It takes one read or one write at a time, as the paper's AXI front-end does,
// and holds off the next request (gnt low) until the current one has been
// answered. The address map follows the paper: every memory is a block of
// 16-bit words with n_rows_i rows; the two memories on the same chip select of
// the two buses are interleaved and fill the first 2*2*N bytes, the pair on
// the second chip select sits on top of them. So for an offset a inside the
// HyperRAM window: cs = (a >= 4N), row = (a - cs*4N) / 4, and one 32-bit word
// per row is spread over the two buses. A 64-bit access moves two rows
// (len = 2) and must be 8-byte aligned. An offset beyond 8N is answered with
// err = 1 and never reaches the memories. Read data from the back-end is
// packed into one 64-bit response; write data and byte enables are handed to
// the back-end one 32-bit word per cycle.
module hyper_frontend
  import shaheen_pkg::*;
(
  input  logic        clk_i,
  input  logic        rst_ni,
  input  logic [31:0] n_rows_i,
  input  hreq_t       req_i,
  output hrsp_t       rsp_o,
  // back-end
  output logic        phy_valid_o,
  input  logic        phy_ready_i,
  output hyper_req_t  phy_req_o,
  output logic        tx_valid_o,
  input  logic        tx_ready_i,
  output logic [31:0] tx_data_o,
  output logic [3:0]  tx_be_o,
  input  logic        rx_valid_i,
  input  logic [31:0] rx_data_i,
  input  logic        done_i
);
  typedef enum logic [2:0] {F_IDLE, F_ISSUE, F_DATA, F_RESP, F_ERR} fstate_e;
  fstate_e      st_q;
  hreq_t        r_q;
  hyper_req_t   p_q;
  logic         wsel_q, rsel_q;
  logic [63:0]  rbuf_q;

  logic [33:0]  pair_bytes, ofs, ofs2;
  logic         cs_sel, out_of_range;

  assign pair_bytes   = {n_rows_i, 2'b00};
  assign ofs          = {2'b00, req_i.addr & ~HYPER_MASK};
  assign cs_sel       = ofs >= pair_bytes;
  assign ofs2         = cs_sel ? ofs - pair_bytes : ofs;
  assign out_of_range = ofs >= {pair_bytes[32:0], 1'b0};

  assign rsp_o.gnt    = req_i.req && (st_q == F_IDLE);
  assign rsp_o.rvalid = (st_q == F_RESP) || (st_q == F_ERR);
  assign rsp_o.err    = (st_q == F_ERR);
  assign rsp_o.rdata  = (st_q == F_RESP && !r_q.we) ? rbuf_q : '0;

  assign phy_valid_o = (st_q == F_ISSUE);
  assign phy_req_o   = p_q;
  assign tx_valid_o  = (st_q == F_DATA) && r_q.we;
  assign tx_data_o   = wsel_q ? r_q.wdata[63:32] : r_q.wdata[31:0];
  assign tx_be_o     = wsel_q ? r_q.be[7:4] : r_q.be[3:0];

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      st_q   <= F_IDLE;
      r_q    <= '0;
      p_q    <= '0;
      wsel_q <= 1'b0;
      rsel_q <= 1'b0;
      rbuf_q <= '0;
    end else begin
      case (st_q)
        F_IDLE: if (req_i.req) begin
          r_q       <= req_i;
          p_q.write <= req_i.we;
          p_q.cs    <= cs_sel;
          p_q.row   <= 32'(ofs2 >> 2) & ~32'd1;
          p_q.len   <= 8'd2;
          wsel_q    <= 1'b0;
          rsel_q    <= 1'b0;
          st_q      <= out_of_range ? F_ERR : F_ISSUE;
        end
        F_ISSUE: if (phy_ready_i) st_q <= F_DATA;
        F_DATA: begin
          if (tx_valid_o && tx_ready_i) wsel_q <= 1'b1;
          if (rx_valid_i) begin
            if (rsel_q) rbuf_q[63:32] <= rx_data_i;
            else        rbuf_q[31:0]  <= rx_data_i;
            rsel_q <= 1'b1;
          end
          if (done_i) st_q <= F_RESP;
        end
        default: st_q <= F_IDLE;   // F_RESP, F_ERR: one response cycle
      endcase
    end
  end

  assert property (@(posedge clk_i) disable iff (!rst_ni)
    (req_i.req && st_q == F_IDLE) |-> (req_i.addr[2:0] == 3'b0));
endmodule
