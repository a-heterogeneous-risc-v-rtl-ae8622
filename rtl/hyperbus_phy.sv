// HyperRAM back-end: drives two HyperBUS interfaces in lockstep.
//
// A request from the front-end (read or write, chip-select pair, 16-bit row
// address inside each memory, number of 32-bit words) becomes one HyperBUS
// transaction issued on both buses at once: bus 0 carries the low half of each
// 32-bit word and bus 1 the high half, which doubles bandwidth and capacity as
// in the paper. Sequence per transaction:
//   CA    3 cycles, the 48-bit command/address, 16 bits per cycle per bus
//   LAT   t_lat_i cycles of initial latency
//   DATA  len_i cycles, one 16-bit word per bus per cycle; on writes the
//         controller drives DQ and the byte masks on RWDS, on reads it takes a
//         word from each bus in every cycle where both buses' RWDS strobe is high
//   CSH   one cycle with every CS# high before the next transaction
// The cycle-level pins stand for the double-data-rate pads: dq_o/dq_i hold the
// two bytes of one CK period (first edge in [15:8]), rwds_o the two byte masks.
// The CA bit layout (R/W# at 47, linear burst at 45, row above bit 16 and low
// column bits in [2:0]) is taken from the HyperBUS specification, not from the
// paper, which only names TX, RX, CTRL and the arbiter of the back-end.
module hyperbus_phy
  import shaheen_pkg::*;
#(
  parameter int unsigned NBUS = 2,
  parameter int unsigned NCS  = 2
) (
  input  logic                        clk_i,
  input  logic                        rst_ni,
  input  logic [7:0]                  t_lat_i,
  // request from the front-end
  input  logic                        req_valid_i,
  output logic                        req_ready_o,
  input  hyper_req_t                  req_i,
  // write data, one 32-bit word per cycle in DATA
  input  logic                        tx_valid_i,
  output logic                        tx_ready_o,
  input  logic [31:0]                 tx_data_i,
  input  logic [3:0]                  tx_be_i,
  // read data
  output logic                        rx_valid_o,
  output logic [31:0]                 rx_data_o,
  output logic                        done_o,
  // HyperBUS pins (cycle level)
  output logic [NBUS-1:0]             ck_en_o,
  output logic [NBUS-1:0]             reset_no,
  output logic [NBUS-1:0][NCS-1:0]    cs_no,
  output logic [NBUS-1:0]             dq_oe_o,
  output logic [NBUS-1:0][15:0]       dq_o,
  input  logic [NBUS-1:0][15:0]       dq_i,
  output logic [NBUS-1:0]             rwds_oe_o,
  output logic [NBUS-1:0][1:0]        rwds_o,
  input  logic [NBUS-1:0]             rwds_i
);
  typedef enum logic [2:0] {S_IDLE, S_CA, S_LAT, S_DATA, S_CSH} state_e;
  state_e     state_q;
  hyper_req_t r_q;
  logic [7:0] cnt_q;
  logic [47:0] ca;

  assign ca = {r_q.write ? 1'b0 : 1'b1, 1'b0, 1'b1, r_q.row[31:3], 13'b0, r_q.row[2:0]};

  assign req_ready_o = (state_q == S_IDLE);
  assign tx_ready_o  = (state_q == S_DATA) && r_q.write;
  assign rx_valid_o  = (state_q == S_DATA) && !r_q.write && (&rwds_i);
  assign rx_data_o   = {dq_i[NBUS-1], dq_i[0]};

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q <= S_IDLE;
      r_q     <= '0;
      cnt_q   <= '0;
      done_o  <= 1'b0;
    end else begin
      done_o <= 1'b0;
      case (state_q)
        S_IDLE: if (req_valid_i) begin
          r_q     <= req_i;
          cnt_q   <= '0;
          state_q <= S_CA;
        end
        S_CA: begin
          cnt_q <= cnt_q + 8'd1;
          if (cnt_q == 8'd2) begin
            cnt_q   <= '0;
            state_q <= (t_lat_i == 0) ? S_DATA : S_LAT;
          end
        end
        S_LAT: begin
          cnt_q <= cnt_q + 8'd1;
          if (cnt_q == t_lat_i - 8'd1) begin
            cnt_q   <= '0;
            state_q <= S_DATA;
          end
        end
        S_DATA: if (r_q.write || (&rwds_i)) begin
          cnt_q <= cnt_q + 8'd1;
          if (cnt_q == r_q.len - 8'd1) begin
            state_q <= S_CSH;
            done_o  <= 1'b1;
          end
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

  for (genvar b = 0; b < NBUS; b++) begin : g_bus
    always_comb begin
      ck_en_o[b]   = (state_q == S_CA) || (state_q == S_LAT) || (state_q == S_DATA);
      reset_no[b]  = rst_ni;
      cs_no[b]     = '1;
      if (ck_en_o[b]) cs_no[b][r_q.cs] = 1'b0;
      dq_oe_o[b]   = (state_q == S_CA) || (state_q == S_DATA && r_q.write);
      rwds_oe_o[b] = (state_q == S_DATA && r_q.write);
      dq_o[b]      = '0;
      rwds_o[b]    = '0;
      if (state_q == S_CA) begin
        case (cnt_q[1:0])
          2'd0:    dq_o[b] = ca[47:32];
          2'd1:    dq_o[b] = ca[31:16];
          default: dq_o[b] = ca[15:0];
        endcase
      end else if (state_q == S_DATA && r_q.write) begin
        // bus b carries bytes 2b+1 (first edge) and 2b of the 32-bit word
        dq_o[b]   = {tx_data_i[16*b+8 +: 8], tx_data_i[16*b +: 8]};
        rwds_o[b] = {~tx_be_i[2*b+1], ~tx_be_i[2*b]};
      end
    end
  end

  assert property (@(posedge clk_i) disable iff (!rst_ni)
    (state_q == S_DATA && r_q.write) |-> tx_valid_i);
endmodule
