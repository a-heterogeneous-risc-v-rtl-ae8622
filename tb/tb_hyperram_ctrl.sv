// Self-checking testbench of hyperram_ctrl with four HyperRAM device models
// (two buses x two chip selects).
//
// Programs a small row count, writes random data with random byte enables to
// both chip-select pairs, reads everything back against a shadow copy, checks
// where the bytes landed in the devices (bus 0 low half, bus 1 high half, the
// second chip select above 4N bytes), the error answer above 8N bytes, and the
// access latency of 8 + t_lat cycles for two initial latencies.
module tb_hyperram_ctrl;
  import shaheen_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  localparam int unsigned ROWS = 256;          // 16-bit rows per device
  hreq_t cfg_req, mem_req;
  hrsp_t cfg_rsp, mem_rsp;
  logic [1:0]       ck_en, reset_n, dq_oe, rwds_oe, rwds_in;
  logic [1:0][1:0]  cs_n, rwds_out;
  logic [1:0][15:0] dq_out, dq_in;
  logic [15:0]      m_dq [2][2];
  logic             m_rwds [2][2];
  int               cs_use [2];

  hyperram_ctrl dut (
    .clk_i(clk), .rst_ni(rst_n), .cfg_req_i(cfg_req), .cfg_rsp_o(cfg_rsp),
    .mem_req_i(mem_req), .mem_rsp_o(mem_rsp),
    .hb_ck_en_o(ck_en), .hb_reset_no(reset_n), .hb_cs_no(cs_n), .hb_dq_oe_o(dq_oe),
    .hb_dq_o(dq_out), .hb_dq_i(dq_in), .hb_rwds_oe_o(rwds_oe), .hb_rwds_o(rwds_out),
    .hb_rwds_i(rwds_in)
  );
  hbus_master_bfm u_cfg (.clk_i(clk), .req_o(cfg_req), .rsp_i(cfg_rsp));
  hbus_master_bfm u_mem (.clk_i(clk), .req_o(mem_req), .rsp_i(mem_rsp));

  for (genvar b = 0; b < 2; b++) begin : g_bus
    for (genvar c = 0; c < 2; c++) begin : g_cs
      hyperram_model #(.T_LAT(6), .RD_EXTRA(2 * c)) u_ram (
        .clk_i(clk), .cs_ni(cs_n[b][c]), .dq_i(dq_out[b]), .rwds_i(rwds_out[b]),
        .dq_o(m_dq[b][c]), .rwds_o(m_rwds[b][c])
      );
    end
    assign dq_in[b]   = !cs_n[b][0] ? m_dq[b][0] : m_dq[b][1];
    assign rwds_in[b] = !cs_n[b][0] ? m_rwds[b][0] : m_rwds[b][1];
  end
  always @(posedge clk) for (int c = 0; c < 2; c++) if (!cs_n[0][c] && cs_n[0][1-c]) cs_use[c]++;

  task automatic chk(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  logic [63:0] shadow [ROWS];   // 4 devices x 2*ROWS bytes = ROWS 64-bit words

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic err;
    logic [63:0] d, wd, mask;
    logic [7:0] be;
    int cyc, w;
    cs_use = '{0, 0};
    repeat (3) @(posedge clk);
    rst_n = 1;
    // reset values of the configuration registers
    u_cfg.read(HYCFG_BASE, d, err, cyc);
    chk(d == 64'd4194304, "n_rows reset value");
    u_cfg.write(HYCFG_BASE, 64'(ROWS), 8'hFF, err, cyc);
    u_cfg.read(HYCFG_BASE + 8, d, err, cyc);
    chk(d == 64'd6, "t_lat reset value");
    // initial contents as the devices present them: word i of bus b = row ^ 0
    for (int i = 0; i < ROWS; i++) begin
      int r;
      r = (i % (ROWS / 2)) * 2;
      shadow[i] = {16'(r + 1), 16'(r + 1), 16'(r), 16'(r)};
    end
    // first write: fixed pattern, check placement in the devices
    u_mem.write(HYPER_BASE, 64'h4444_3333_2222_1111, 8'hFF, err, cyc);
    shadow[0] = 64'h4444_3333_2222_1111;
    chk(cyc == 6 + 8, $sformatf("write latency %0d", cyc));
    chk(g_bus[0].g_cs[0].u_ram.mem[0] == 16'h1111 && g_bus[1].g_cs[0].u_ram.mem[0] == 16'h2222 &&
        g_bus[0].g_cs[0].u_ram.mem[1] == 16'h3333 && g_bus[1].g_cs[0].u_ram.mem[1] == 16'h4444,
        "bus interleaving of a 64-bit word");
    // a word in the second chip-select pair: offset 4N + 8 -> row 2 of CS1
    u_mem.write(HYPER_BASE + 4 * ROWS + 8, 64'hDDDD_CCCC_BBBB_AAAA, 8'hFF, err, cyc);
    shadow[ROWS / 2 + 1] = 64'hDDDD_CCCC_BBBB_AAAA;
    chk(g_bus[0].g_cs[1].u_ram.mem[2] == 16'hAAAA && g_bus[1].g_cs[1].u_ram.mem[3] == 16'hDDDD,
        "second chip select sits on top of the first pair");
    // random traffic
    for (int t = 0; t < 150; t++) begin
      w  = $urandom_range(0, ROWS - 1);
      wd = {$urandom, $urandom};
      be = 8'($urandom);
      u_mem.write(HYPER_BASE + 32'(w * 8), wd, be, err, cyc);
      chk(!err, "write error flag");
      for (int k = 0; k < 8; k++) if (be[k]) shadow[w][8*k +: 8] = wd[8*k +: 8];
      w = $urandom_range(0, ROWS - 1);
      u_mem.read(HYPER_BASE + 32'(w * 8), d, err, cyc);
      chk(!err && d == shadow[w], $sformatf("read word %0d: %h vs %h", w, d, shadow[w]));
      // CS 1 devices answer two cycles later; the controller waits for RWDS
      chk(cyc == 6 + 8 + ((w >= ROWS / 2) ? 2 : 0), $sformatf("read latency %0d", cyc));
    end
    // beyond 8N bytes: error, nothing reaches the devices
    u_mem.read(HYPER_BASE + 8 * ROWS, d, err, cyc);
    chk(err, "out of range read answered with error");
    // a shorter initial latency through the configuration port (devices stay at 6:
    // only check the write latency, which the controller alone sets)
    u_cfg.write(HYCFG_BASE + 8, 64'd4, 8'hFF, err, cyc);
    u_cfg.read(HYCFG_BASE + 8, d, err, cyc);
    chk(d == 64'd4, "t_lat register");
    chk(cs_use[0] > 0 && cs_use[1] > 0, "both chip selects used");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
