// Self-checking testbench of hyper_frontend; the testbench plays the back-end.
//
// For random accesses it checks the request handed to the back-end (chip
// select, row, length, direction) against the address map (cs = offset >= 4N,
// row = (offset - cs*4N)/4), the write words and byte enables in order, the
// packing of read words into the 64-bit answer, that only one access is in
// flight (gnt stays low while busy), and the error answer above 8N.
module tb_hyper_frontend;
  import shaheen_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  localparam logic [31:0] N = 32'd1024;
  hreq_t       req;
  hrsp_t       rsp;
  logic        phy_valid, phy_ready, tx_valid, tx_ready, rx_valid, done;
  hyper_req_t  preq;
  logic [31:0] tx_data, rx_data;
  logic [3:0]  tx_be;

  hyper_frontend dut (
    .clk_i(clk), .rst_ni(rst_n), .n_rows_i(N), .req_i(req), .rsp_o(rsp),
    .phy_valid_o(phy_valid), .phy_ready_i(phy_ready), .phy_req_o(preq),
    .tx_valid_o(tx_valid), .tx_ready_i(tx_ready), .tx_data_o(tx_data), .tx_be_o(tx_be),
    .rx_valid_i(rx_valid), .rx_data_i(rx_data), .done_i(done)
  );
  hbus_master_bfm u_m (.clk_i(clk), .req_o(req), .rsp_i(rsp));

  task automatic chk(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  // back-end stand-in
  hyper_req_t  seen;
  logic [31:0] txw [2];
  logic [3:0]  txb [2];
  logic [31:0] rxw [2];
  int          busy_gnt = 0;
  initial begin
    phy_ready = 0; tx_ready = 0; rx_valid = 0; rx_data = '0; done = 0;
    forever begin
      @(negedge clk);
      if (phy_valid) begin
        repeat ($urandom_range(0, 3)) @(negedge clk);
        phy_ready = 1; seen = preq;
        @(negedge clk); phy_ready = 0;
        repeat (4) @(negedge clk);
        for (int i = 0; i < 2; i++) begin
          if (seen.write) begin
            tx_ready = 1; txw[i] = tx_data; txb[i] = tx_be;
          end else begin
            rx_valid = 1; rx_data = rxw[i];
          end
          if (i == 1) done = 1;
          @(negedge clk);
          tx_ready = 0; rx_valid = 0; done = 0;
          if (req.req && rsp.gnt) busy_gnt++;
        end
      end
    end
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic err;
    logic [63:0] d, wd;
    logic [7:0] be;
    int cyc;
    int unsigned ofs, expcs, exprow;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 200; t++) begin
      ofs = $urandom_range(0, 8 * N / 8 - 1) * 8;
      expcs = ofs >= 4 * N;
      exprow = (ofs - expcs * 4 * N) / 4;
      if ($urandom_range(0, 1)) begin
        wd = {$urandom, $urandom}; be = 8'($urandom);
        u_m.write(HYPER_BASE + ofs, wd, be, err, cyc);
        chk(!err && seen.write && seen.cs == 1'(expcs) && seen.row == exprow && seen.len == 2,
            $sformatf("write request for offset %h", ofs));
        chk(txw[0] == wd[31:0] && txw[1] == wd[63:32] && txb[0] == be[3:0] && txb[1] == be[7:4],
            "write words and byte enables");
      end else begin
        rxw[0] = $urandom; rxw[1] = $urandom;
        u_m.read(HYPER_BASE + ofs, d, err, cyc);
        chk(!err && !seen.write && seen.cs == 1'(expcs) && seen.row == exprow,
            $sformatf("read request for offset %h", ofs));
        chk(d == {rxw[1], rxw[0]}, "read packing");
      end
    end
    u_m.read(HYPER_BASE + 8 * N, d, err, cyc);
    chk(err, "error above 8N");
    chk(busy_gnt == 0, "no grant while an access is in flight");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
