// Testbench of cluster_dma. The host side is a memory slave with random
// grant delays; the L1 side is a four-port memory model that grants each port
// at random and returns read data one cycle after the grant. The test
// programs transfers in both directions through the register interface and
// checks the data, the done pulse, the busy flag and the transfer count, that
// even beats use L1 ports 0/1 and odd beats ports 2/3, and that a transfer of
// n beats cannot finish in fewer than 3n cycles (host request, host data, L1
// write per beat).
module tb_cluster_dma;
  import shaheen_pkg::*;
  localparam int L1W = 1024;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic        cfg_req = 1'b0, cfg_we = 1'b0;
  logic [4:0]  cfg_addr = '0;
  logic [31:0] cfg_wdata = '0, cfg_rdata;
  logic        done, busy;
  hreq_t       h_req;
  hrsp_t       h_rsp;
  logic [3:0]        l1_req, l1_we, l1_gnt, l1_rvalid = '0;
  logic [3:0][3:0]   l1_be;
  logic [3:0][31:0]  l1_addr, l1_wdata, l1_rdata = '0;
  logic [31:0]       l1 [L1W];
  logic [3:0]        gnt_rand;
  int                port_use [4] = '{0, 0, 0, 0};

  cluster_dma #(.NP(4)) dut (
    .clk_i(clk), .rst_ni(rst_n),
    .cfg_req_i(cfg_req), .cfg_we_i(cfg_we), .cfg_addr_i(cfg_addr), .cfg_wdata_i(cfg_wdata),
    .cfg_rdata_o(cfg_rdata), .done_o(done), .busy_o(busy),
    .h_req_o(h_req), .h_rsp_i(h_rsp),
    .l1_req_o(l1_req), .l1_we_o(l1_we), .l1_be_o(l1_be), .l1_addr_o(l1_addr),
    .l1_wdata_o(l1_wdata), .l1_gnt_i(l1_gnt), .l1_rvalid_i(l1_rvalid), .l1_rdata_i(l1_rdata)
  );
  hbus_mem_slave #(.RAND_WAIT(1)) u_host (.clk_i(clk), .req_i(h_req), .rsp_o(h_rsp));

  // L1 model
  initial gnt_rand = '1;
  always @(negedge clk) gnt_rand <= 4'($urandom);
  assign l1_gnt = l1_req & gnt_rand;
  always @(posedge clk) begin
    for (int p = 0; p < 4; p++) begin
      l1_rvalid[p] <= l1_gnt[p];
      if (l1_gnt[p]) begin
        port_use[p]++;
        if (l1_we[p]) l1[l1_addr[p][11:2]] <= l1_wdata[p];
        else          l1_rdata[p] <= l1[l1_addr[p][11:2]];
      end
    end
  end

  task automatic chk(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wr(logic [4:0] a, logic [31:0] d);
    @(negedge clk);
    cfg_req = 1'b1; cfg_we = 1'b1; cfg_addr = a; cfg_wdata = d;
    @(negedge clk);
    cfg_req = 1'b0; cfg_we = 1'b0;
  endtask

  task automatic rd(logic [4:0] a, output logic [31:0] d);
    @(negedge clk);
    cfg_req = 1'b1; cfg_we = 1'b0; cfg_addr = a;
    #1 d = cfg_rdata;
    @(negedge clk);
    cfg_req = 1'b0;
  endtask

  task automatic xfer(logic [31:0] ext, logic [31:0] l1a, logic [31:0] len, bit dir, output int cy);
    wr(5'h00, ext); wr(5'h04, l1a); wr(5'h08, len);
    wr(5'h0C, {31'b0, dir});
    cy = 1;
    chk(busy, "busy after start");
    while (!done && cy < 10000) begin @(posedge clk); #1; cy++; end
    chk(done, "done pulse");
    chk(!busy, "busy cleared with done");
    @(posedge clk); #1;
    chk(!done, "done lasts one cycle");
  endtask

  initial begin
    logic [31:0] v;
    int cy, n0;
    for (int i = 0; i < L1W; i++) l1[i] = 32'hA000_0000 + 32'(i);
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    rd(5'h10, v);
    chk(v == 0, "status after reset");

    // host -> L1: unwritten host words read as {addr, addr}
    for (int t = 0; t < 6; t++) begin
      logic [31:0] ext, l1a, len;
      ext = 32'h2000_0000 + 32'(t * 32'h400);
      l1a = 32'(8 * $urandom_range(0, 64));
      len = 32'(8 * $urandom_range(1, 32));
      xfer(ext, l1a, len, 1'b0, cy);
      chk(cy >= 3 * int'(len / 8), $sformatf("in: %0d beats in %0d cycles", len / 8, cy));
      for (int i = 0; i < int'(len / 4); i++)
        chk(l1[(l1a >> 2) + i] == ext + 32'(8 * (i / 2)),
            $sformatf("L1 word %0d after host->L1: %h", i, l1[(l1a >> 2) + i]));
    end
    rd(5'h10, v);
    chk(v[31:16] == 6 && !v[0], $sformatf("status count %h", v));
    chk(port_use[0] == port_use[1] && port_use[2] == port_use[3] && port_use[2] > 0,
        "even beats on ports 0/1, odd beats on ports 2/3");

    // L1 -> host
    for (int i = 0; i < L1W; i++) l1[i] = $urandom;
    for (int t = 0; t < 6; t++) begin
      logic [31:0] ext, l1a, len;
      ext = 32'h3000_0000 + 32'(t * 32'h400);
      l1a = 32'(8 * $urandom_range(0, 64));
      len = 32'(8 * $urandom_range(1, 32));
      n0 = u_host.n_acc;
      xfer(ext, l1a, len, 1'b1, cy);
      chk(u_host.n_acc - n0 == int'(len / 8), "one host write per beat");
      for (int i = 0; i < int'(len / 8); i++)
        chk(u_host.mem[ext + 32'(8 * i)] == {l1[(l1a >> 2) + 2 * i + 1], l1[(l1a >> 2) + 2 * i]},
            $sformatf("host word %0d after L1->host", i));
    end
    rd(5'h10, v);
    chk(v[31:16] == 12, $sformatf("status count %h", v));
    rd(5'h0C, v);
    chk(v[0] == 1'b1, "CMD reads back the direction");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
