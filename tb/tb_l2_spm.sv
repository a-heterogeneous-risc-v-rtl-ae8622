// Testbench of l2_spm: two bus masters write and read random 64-bit words
// with byte enables against a shadow copy. Master 0 owns the lower half of the
// tested range and master 1 the upper half, so their results do not depend on
// arbitration order, while bank collisions between them happen freely. A
// phase where both masters read the same bank in the same cycle forces
// conflicts; a read without a competitor is granted at once and returns its
// data in the next cycle (one cycle of latency).
module tb_l2_spm;
  import shaheen_pkg::*;
  localparam int BANK_BYTES = 1024;        // 4 KiB tested instead of 1 MiB
  localparam int WORDS = 4 * BANK_BYTES / 8;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, n_conf = 0;

  hreq_t [1:0] req;
  hrsp_t [1:0] rsp;
  logic        conf;
  logic [63:0] shadow [WORDS];

  l2_spm #(.NM(2), .NB(4), .BANK_BYTES(BANK_BYTES)) dut (
    .clk_i(clk), .rst_ni(rst_n), .req_i(req), .rsp_o(rsp), .conflict_o(conf)
  );
  hbus_master_bfm u_m0 (.clk_i(clk), .req_o(req[0]), .rsp_i(rsp[0]));
  hbus_master_bfm u_m1 (.clk_i(clk), .req_o(req[1]), .rsp_i(rsp[1]));

  always @(posedge clk) if (rst_n) n_conf += int'(conf);

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

  task automatic traffic(int m, int n);
    for (int i = 0; i < n; i++) begin
      int          w;
      logic [63:0] d, v;
      logic [7:0]  be;
      logic        e;
      int          cy;
      w  = m * WORDS / 2 + $urandom_range(0, WORDS / 2 - 1);
      be = 8'($urandom);
      d  = {$urandom, $urandom};
      if ($urandom_range(0, 1)) begin
        if (m == 0) u_m0.write(L2_BASE + 32'(8 * w), d, be, e, cy);
        else        u_m1.write(L2_BASE + 32'(8 * w), d, be, e, cy);
        for (int k = 0; k < 8; k++) if (be[k]) shadow[w][8*k +: 8] = d[8*k +: 8];
        chk(!e, "write error");
      end else begin
        if (m == 0) u_m0.read(L2_BASE + 32'(8 * w), v, e, cy);
        else        u_m1.read(L2_BASE + 32'(8 * w), v, e, cy);
        chk(!e && v == shadow[w], $sformatf("m%0d read word %0d: %h exp %h", m, w, v, shadow[w]));
      end
    end
  endtask

  initial begin
    logic [63:0] v;
    logic        e;
    int          cy;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int w = 0; w < WORDS; w++) begin
      shadow[w] = {$urandom, $urandom};
      u_m0.write(L2_BASE + 32'(8 * w), shadow[w], 8'hFF, e, cy);
    end
    // latency of an uncontended read
    u_m0.read(L2_BASE + 32'h18, v, e, cy);
    chk(v == shadow[3] && cy == 1, $sformatf("single read: %h in %0d cycles", v, cy));
    fork
      traffic(0, 2000);
      traffic(1, 2000);
    join
    // both masters read bank 0 (words 0 and 4) at the same time
    for (int i = 0; i < 20; i++) begin
      logic [63:0] v0, v1;
      fork
        begin logic e0; int c0; u_m0.read(L2_BASE + 32'(64 * i),      v0, e0, c0); end
        begin logic e1; int c1; u_m1.read(L2_BASE + 32'(64 * i + 32), v1, e1, c1); end
      join
      chk(v0 == shadow[8 * i] && v1 == shadow[8 * i + 4], "same-bank reads");
    end
    chk(n_conf > 0, $sformatf("bank conflicts seen: %0d", n_conf));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
