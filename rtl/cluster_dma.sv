// Cluster DMA: copies blocks between host memory and the L1 scratchpad.
//
// One 64-bit host-bus master port and four 32-bit L1 ports, as in the paper.
// Each 64-bit beat is split into two 32-bit L1 words; even beats use L1 ports
// 0 and 1, odd beats ports 2 and 3, so the four ports are all exercised and
// the two words of a beat go to neighbouring banks in the same cycle. Beats
// are moved one after the other (no pipelining over the host bus); this and
// the register interface are this design's own choices. Addresses and length
// must be multiples of 8 bytes.
//
// Registers (32-bit, written/read by the cores over cfg_*; reads are
// combinational):
//   0x00 EXT   host-side byte address       0x04 L1   L1 byte address
//   0x08 LEN   length in bytes              0x0C CMD  write starts a transfer,
//                                                     bit 0: 0 host->L1, 1 L1->host
//   0x10 STAT  [0] busy, [31:16] number of completed transfers
// done_o pulses for one cycle when a transfer ends. A write to CMD while busy
// is ignored.
module cluster_dma
  import shaheen_pkg::*;
#(
  parameter int unsigned NP = 4
) (
  input  logic                 clk_i,
  input  logic                 rst_ni,
  input  logic                 cfg_req_i,
  input  logic                 cfg_we_i,
  input  logic [4:0]           cfg_addr_i,
  input  logic [31:0]          cfg_wdata_i,
  output logic [31:0]          cfg_rdata_o,
  output logic                 done_o,
  output logic                 busy_o,
  output hreq_t                h_req_o,
  input  hrsp_t                h_rsp_i,
  output logic [NP-1:0]        l1_req_o,
  output logic [NP-1:0]        l1_we_o,
  output logic [NP-1:0][3:0]   l1_be_o,
  output logic [NP-1:0][31:0]  l1_addr_o,
  output logic [NP-1:0][31:0]  l1_wdata_o,
  input  logic [NP-1:0]        l1_gnt_i,
  input  logic [NP-1:0]        l1_rvalid_i,
  input  logic [NP-1:0][31:0]  l1_rdata_i
);
  typedef enum logic [2:0] {D_IDLE, D_HRD, D_HRW, D_LWR, D_LRD, D_HWR, D_HWW} dstate_e;
  dstate_e     st_q;
  logic [31:0] ext_q, l1a_q, len_q, cur_ext_q, cur_l1_q, rem_q;
  logic        dir_q, odd_q;
  logic [15:0] ndone_q;
  logic [63:0] buf_q;
  logic [1:0]  gdone_q, rdone_q;   // per word of the beat: granted / data returned
  logic [1:0]  gnt_w, rv_w;
  logic [31:0] rd_w [2];
  int unsigned p0;

  assign busy_o = (st_q != D_IDLE);
  assign p0     = odd_q ? 2 : 0;

  always_comb begin
    case (cfg_addr_i[4:2])
      3'd0:    cfg_rdata_o = ext_q;
      3'd1:    cfg_rdata_o = l1a_q;
      3'd2:    cfg_rdata_o = len_q;
      3'd3:    cfg_rdata_o = {31'b0, dir_q};
      3'd4:    cfg_rdata_o = {ndone_q, 15'b0, busy_o};
      default: cfg_rdata_o = '0;
    endcase
  end

  // L1 side: the two ports of the current beat
  always_comb begin
    l1_req_o   = '0;
    l1_we_o    = '0;
    l1_be_o    = '0;
    l1_addr_o  = '0;
    l1_wdata_o = '0;
    for (int unsigned w = 0; w < 2; w++) begin
      l1_addr_o[p0+w]  = cur_l1_q + 32'(4 * w);
      l1_be_o[p0+w]    = 4'hF;
      l1_wdata_o[p0+w] = buf_q[32*w +: 32];
      l1_we_o[p0+w]    = (st_q == D_LWR);
      l1_req_o[p0+w]   = (st_q == D_LWR || st_q == D_LRD) && !gdone_q[w];
    end
  end

  always_comb begin
    for (int unsigned w = 0; w < 2; w++) begin
      gnt_w[w] = l1_gnt_i[p0+w] && (st_q == D_LWR || st_q == D_LRD) && !gdone_q[w];
      rv_w[w]  = l1_rvalid_i[p0+w] && (st_q == D_LRD);
      rd_w[w]  = l1_rdata_i[p0+w];
    end
  end

  // host side
  always_comb begin
    h_req_o       = '0;
    h_req_o.req   = (st_q == D_HRD) || (st_q == D_HWR);
    h_req_o.we    = (st_q == D_HWR);
    h_req_o.be    = '1;
    h_req_o.addr  = cur_ext_q;
    h_req_o.wdata = buf_q;
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      st_q <= D_IDLE;
      ext_q <= '0; l1a_q <= '0; len_q <= '0; dir_q <= 1'b0;
      cur_ext_q <= '0; cur_l1_q <= '0; rem_q <= '0; odd_q <= 1'b0;
      ndone_q <= '0; buf_q <= '0; gdone_q <= '0; rdone_q <= '0;
      done_o <= 1'b0;
    end else begin
      done_o <= 1'b0;
      if (cfg_req_i && cfg_we_i && st_q == D_IDLE) begin
        case (cfg_addr_i[4:2])
          3'd0: ext_q <= cfg_wdata_i;
          3'd1: l1a_q <= cfg_wdata_i;
          3'd2: len_q <= cfg_wdata_i;
          3'd3: begin
            dir_q     <= cfg_wdata_i[0];
            cur_ext_q <= ext_q;
            cur_l1_q  <= l1a_q;
            rem_q     <= len_q;
            odd_q     <= 1'b0;
            gdone_q   <= '0;
            rdone_q   <= '0;
            if (len_q != 0) st_q <= cfg_wdata_i[0] ? D_LRD : D_HRD;
          end
          default: ;
        endcase
      end
      case (st_q)
        D_HRD: if (h_rsp_i.gnt) st_q <= D_HRW;
        D_HRW: if (h_rsp_i.rvalid) begin
          buf_q <= h_rsp_i.rdata;
          st_q  <= D_LWR;
        end
        D_LWR: begin
          gdone_q <= gdone_q | gnt_w;
          if (&(gdone_q | gnt_w)) begin
            gdone_q <= '0;
            cur_ext_q <= cur_ext_q + 32'd8;
            cur_l1_q  <= cur_l1_q + 32'd8;
            rem_q     <= rem_q - 32'd8;
            odd_q     <= !odd_q;
            if (rem_q <= 32'd8) begin
              st_q <= D_IDLE; done_o <= 1'b1; ndone_q <= ndone_q + 16'd1;
            end else st_q <= D_HRD;
          end
        end
        D_LRD: begin
          gdone_q <= gdone_q | gnt_w;
          rdone_q <= rdone_q | rv_w;
          for (int unsigned w = 0; w < 2; w++)
            if (rv_w[w]) buf_q[32*w +: 32] <= rd_w[w];
          if (&(rdone_q | rv_w)) begin
            gdone_q <= '0;
            rdone_q <= '0;
            st_q    <= D_HWR;
          end
        end
        D_HWR: if (h_rsp_i.gnt) st_q <= D_HWW;
        D_HWW: if (h_rsp_i.rvalid) begin
          cur_ext_q <= cur_ext_q + 32'd8;
          cur_l1_q  <= cur_l1_q + 32'd8;
          rem_q     <= rem_q - 32'd8;
          odd_q     <= !odd_q;
          if (rem_q <= 32'd8) begin
            st_q <= D_IDLE; done_o <= 1'b1; ndone_q <= ndone_q + 16'd1;
          end else st_q <= D_LRD;
        end
        default: ;
      endcase
    end
  end
endmodule
