// Logarithmic (TCDM) interconnect: NM masters to NB word-interleaved banks.
//
// Consecutive data words go to consecutive banks: for a byte address a, the bank
// is a[BOFS +: log2(NB)] and the row inside the bank is the bits above, where
// BOFS = log2(DW/8). Every bank has a round-robin arbiter of its own, so masters
// that hit different banks are all granted in the same cycle; masters that
// collide on one bank are served one per cycle and the others see gnt_o low and
// must hold their request (a bank-conflict stall). A granted read returns its
// word with rvalid_o one cycle later (single-cycle latency); writes also return
// rvalid_o. Interleaving, single-cycle latency and the master/bank counts follow
// the paper; round-robin arbitration is this design's choice. The banks are
// instances of sram_bank.
module tcdm_interconnect #(
  parameter int unsigned NM         = 12,
  parameter int unsigned NB         = 16,
  parameter int unsigned DW         = 32,
  parameter int unsigned BANK_WORDS = 4096,
  parameter int unsigned AW         = 32
) (
  input  logic                      clk_i,
  input  logic                      rst_ni,
  input  logic [NM-1:0]             req_i,
  input  logic [NM-1:0]             we_i,
  input  logic [NM-1:0][DW/8-1:0]   be_i,
  input  logic [NM-1:0][AW-1:0]     addr_i,
  input  logic [NM-1:0][DW-1:0]     wdata_i,
  output logic [NM-1:0]             gnt_o,
  output logic [NM-1:0]             rvalid_o,
  output logic [NM-1:0][DW-1:0]     rdata_o,
  output logic [NB-1:0]             conflict_o   // bank had more requests than it could grant
);
  localparam int unsigned BOFS = $clog2(DW/8);
  localparam int unsigned BSW  = $clog2(NB);
  localparam int unsigned RW   = $clog2(BANK_WORDS);
  localparam int unsigned MIW  = $clog2(NM > 1 ? NM : 2);

  logic [NM-1:0][BSW-1:0] bank_sel;
  logic [NB-1:0][NM-1:0]  breq, bgnt;
  logic [NB-1:0][MIW-1:0] bidx;
  logic [NB-1:0]          b_req;
  logic [NB-1:0]          b_we;
  logic [NB-1:0][RW-1:0]  b_addr;
  logic [NB-1:0][DW-1:0]  b_wdata, b_rdata;
  logic [NB-1:0][DW/8-1:0] b_be;
  logic [NM-1:0]          rvalid_q;
  logic [NM-1:0][BSW-1:0] rbank_q;

  for (genvar m = 0; m < NM; m++) begin : g_sel
    assign bank_sel[m] = addr_i[m][BOFS +: BSW];
  end

  for (genvar b = 0; b < NB; b++) begin : g_bank
    for (genvar m = 0; m < NM; m++) begin : g_req
      assign breq[b][m] = req_i[m] && (bank_sel[m] == BSW'(b));
    end
    rr_arbiter #(.N(NM)) u_arb (
      .clk_i, .rst_ni, .req_i(breq[b]), .advance_i(1'b1), .gnt_o(bgnt[b]), .idx_o(bidx[b])
    );
    assign b_req[b]   = |breq[b];
    assign b_we[b]    = we_i[bidx[b]];
    assign b_addr[b]  = addr_i[bidx[b]][BOFS+BSW +: RW];
    assign b_wdata[b] = wdata_i[bidx[b]];
    assign b_be[b]    = be_i[bidx[b]];
    assign conflict_o[b] = (breq[b] & (breq[b] - 1'b1)) != 0;

    sram_bank #(.WORDS(BANK_WORDS), .DW(DW)) u_bank (
      .clk_i, .req_i(b_req[b]), .we_i(b_we[b]), .addr_i(b_addr[b]),
      .wdata_i(b_wdata[b]), .be_i(b_be[b]), .rdata_o(b_rdata[b])
    );
  end

  always_comb begin
    gnt_o = '0;
    for (int unsigned b = 0; b < NB; b++) gnt_o |= bgnt[b];
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      rvalid_q <= '0;
      rbank_q  <= '0;
    end else begin
      rvalid_q <= gnt_o;
      for (int unsigned m = 0; m < NM; m++)
        if (gnt_o[m]) rbank_q[m] <= bank_sel[m];
    end
  end

  assign rvalid_o = rvalid_q;
  for (genvar m = 0; m < NM; m++) begin : g_rsp
    assign rdata_o[m] = b_rdata[rbank_q[m]];
  end
endmodule
