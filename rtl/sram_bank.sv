// Single-port SRAM bank, the storage cell of the L1 and L2 scratchpads.
//
// The chip uses SRAM macros of the 22nm process for these banks; here each bank
// is a plain array, so it simulates and synthesises to a memory cell. One access
// per cycle: a write stores the enabled bytes of wdata_i, a read returns the word
// on rdata_o in the cycle after req_i (one-cycle read latency, as an SRAM macro
// has). The array is not reset, as a macro's contents are not.
module sram_bank #(
  parameter int unsigned WORDS = 4096,
  parameter int unsigned DW    = 32
) (
  input  logic                     clk_i,
  input  logic                     req_i,
  input  logic                     we_i,
  input  logic [$clog2(WORDS)-1:0] addr_i,
  input  logic [DW-1:0]            wdata_i,
  input  logic [DW/8-1:0]          be_i,
  output logic [DW-1:0]            rdata_o
);
  logic [DW-1:0] mem [WORDS];

  always_ff @(posedge clk_i) begin
    if (req_i) begin
      if (we_i) begin
        for (int unsigned b = 0; b < DW/8; b++)
          if (be_i[b]) mem[addr_i][b*8 +: 8] <= wdata_i[b*8 +: 8];
      end else begin
        rdata_o <= mem[addr_i];
      end
    end
  end
endmodule
