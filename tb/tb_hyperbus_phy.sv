// Self-checking testbench of hyperbus_phy with two device models per bus.
//
// Issues write then read bursts of random length, chip select and row; checks
// the command/address each device decoded, the data round trip, the 2-word
// halves on the two buses and the transaction length in cycles
// (3 CA + t_lat + len, with done reported one cycle after the last word).
module tb_hyperbus_phy;
  import shaheen_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic        req_valid, req_ready, tx_valid, tx_ready, rx_valid, done;
  hyper_req_t  req;
  logic [31:0] tx_data, rx_data;
  logic [3:0]  tx_be;
  logic [1:0]       ck_en, reset_n, dq_oe, rwds_oe, rwds_in;
  logic [1:0][1:0]  cs_n, rwds_out;
  logic [1:0][15:0] dq_out, dq_in;
  logic [15:0]      m_dq [2][2];
  logic             m_rwds [2][2];

  hyperbus_phy dut (
    .clk_i(clk), .rst_ni(rst_n), .t_lat_i(8'd5),
    .req_valid_i(req_valid), .req_ready_o(req_ready), .req_i(req),
    .tx_valid_i(tx_valid), .tx_ready_o(tx_ready), .tx_data_i(tx_data), .tx_be_i(tx_be),
    .rx_valid_o(rx_valid), .rx_data_o(rx_data), .done_o(done),
    .ck_en_o(ck_en), .reset_no(reset_n), .cs_no(cs_n), .dq_oe_o(dq_oe), .dq_o(dq_out),
    .dq_i(dq_in), .rwds_oe_o(rwds_oe), .rwds_o(rwds_out), .rwds_i(rwds_in)
  );
  for (genvar b = 0; b < 2; b++) begin : g_bus
    for (genvar c = 0; c < 2; c++) begin : g_cs
      hyperram_model #(.T_LAT(5), .INIT_XOR(16'h5A5A)) u_ram (
        .clk_i(clk), .cs_ni(cs_n[b][c]), .dq_i(dq_out[b]), .rwds_i(rwds_out[b]),
        .dq_o(m_dq[b][c]), .rwds_o(m_rwds[b][c])
      );
    end
    assign dq_in[b]   = !cs_n[b][0] ? m_dq[b][0] : m_dq[b][1];
    assign rwds_in[b] = !cs_n[b][0] ? m_rwds[b][0] : m_rwds[b][1];
  end

  function automatic logic [47:0] ca_of(int b, bit cs);
    case ({b[0], cs})
      2'b00: return g_bus[0].g_cs[0].u_ram.ca;
      2'b01: return g_bus[0].g_cs[1].u_ram.ca;
      2'b10: return g_bus[1].g_cs[0].u_ram.ca;
      default: return g_bus[1].g_cs[1].u_ram.ca;
    endcase
  endfunction
  function automatic logic [15:0] mem_of(int b, bit cs, int unsigned a);
    case ({b[0], cs})
      2'b00: return g_bus[0].g_cs[0].u_ram.mem[a];
      2'b01: return g_bus[0].g_cs[1].u_ram.mem[a];
      2'b10: return g_bus[1].g_cs[0].u_ram.mem[a];
      default: return g_bus[1].g_cs[1].u_ram.mem[a];
    endcase
  endfunction

  task automatic chk(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  logic [31:0] wbuf [16];
  logic [31:0] rbuf [16];

  task automatic burst(bit wr, bit cs, int unsigned row, int len);
    int cyc, nrx, ntx;
    cyc = 0; nrx = 0; ntx = 0;
    @(negedge clk);
    req_valid = 1; req = '{write: wr, cs: cs, row: row, len: 8'(len)};
    tx_valid = wr; tx_data = wbuf[0]; tx_be = 4'hF;
    @(posedge clk);
    chk(req_ready, "ready when idle");
    @(negedge clk); req_valid = 0;
    while (1) begin
      @(posedge clk); cyc++;
      if (tx_ready) ntx++;
      if (rx_valid) begin rbuf[nrx] = rx_data; nrx++; end
      if (done) break;
      @(negedge clk);
      tx_data = wbuf[ntx];
    end
    chk(cyc == 3 + 5 + len + 1, $sformatf("burst length %0d cycles", cyc));
    chk(wr ? ntx == len : nrx == len, "word count");
    @(negedge clk);
    chk(cs_n == '1 && !ck_en[0], "CS# high after the burst");
    @(posedge clk);
    chk(ca_of(0, cs) == ca_of(1, cs) && ca_of(0, cs)[47] == !wr && ca_of(0, cs)[45] &&
        {ca_of(1, cs)[44:16], ca_of(1, cs)[2:0]} == row,
        "command/address decoded by the devices");
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    req_valid = 0; req = '0; tx_valid = 0; tx_data = '0; tx_be = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 40; t++) begin
      int len, row;
      bit cs;
      len = $urandom_range(1, 16); row = $urandom_range(0, 4000); cs = 1'($urandom);
      for (int i = 0; i < len; i++) wbuf[i] = $urandom;
      burst(1, cs, row, len);
      for (int i = 0; i < len; i++)
        chk(mem_of(0, cs, row + i) == wbuf[i][15:0] &&
            mem_of(1, cs, row + i) == wbuf[i][31:16], "halves on the two buses");
      burst(0, cs, row, len);
      for (int i = 0; i < len; i++) chk(rbuf[i] == wbuf[i], $sformatf("read back word %0d", i));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
