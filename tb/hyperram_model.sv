// Behavioural model of one HyperRAM device on one bus (testbench only).
//
// Cycle-level counterpart of hyperbus_phy's pins: counts the cycles with its
// CS# low; the first three carry the 48-bit command/address, then T_LAT
// cycles of latency (plus RD_EXTRA on reads, to make the controller wait for
// RWDS), then one 16-bit word per cycle at consecutive addresses. Writes apply
// the RWDS byte masks. Storage is sparse; unwritten words read as INIT_XOR
// ^ address.
module hyperram_model #(
  parameter int unsigned T_LAT    = 6,
  parameter int unsigned RD_EXTRA = 0,
  parameter logic [15:0] INIT_XOR = 16'h0000
) (
  input  logic        clk_i,
  input  logic        cs_ni,
  input  logic [15:0] dq_i,
  input  logic [1:0]  rwds_i,
  output logic [15:0] dq_o,
  output logic        rwds_o
);
  logic [15:0] mem [int unsigned];
  int unsigned cnt;
  logic [47:0] ca;
  int unsigned row, idx;
  bit          rd;
  int          nwrites = 0, nreads = 0;

  initial begin cnt = 0; ca = '0; end

  always_comb begin
    row = {ca[44:16], ca[2:0]};
    rd  = ca[47];
    dq_o = '0;
    rwds_o = 1'b0;
    if (!cs_ni && rd && cnt >= 3 + T_LAT + RD_EXTRA) begin
      idx    = row + cnt - 3 - T_LAT - RD_EXTRA;
      rwds_o = 1'b1;
      dq_o   = mem.exists(idx) ? mem[idx] : (16'(idx) ^ INIT_XOR);
    end
  end

  always @(posedge clk_i) begin
    if (cs_ni) cnt <= 0;
    else begin
      cnt <= cnt + 1;
      if (cnt == 0) ca[47:32] <= dq_i;
      if (cnt == 1) ca[31:16] <= dq_i;
      if (cnt == 2) ca[15:0]  <= dq_i;
      if (cnt >= 3 + T_LAT && !rd) begin : wr
        int unsigned a;
        logic [15:0] v;
        a = row + cnt - 3 - T_LAT;
        v = mem.exists(a) ? mem[a] : (16'(a) ^ INIT_XOR);
        if (!rwds_i[1]) v[15:8] = dq_i[15:8];
        if (!rwds_i[0]) v[7:0]  = dq_i[7:0];
        mem[a] = v;
        nwrites++;
      end
      if (cnt == 3 + T_LAT + RD_EXTRA && rd) nreads++;
    end
  end
endmodule
