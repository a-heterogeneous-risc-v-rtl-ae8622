// Self-checking testbench of mem_xbar with its default host address map.
//
// Two masters run random reads and writes at the same time into four
// memory slaves that insert random wait states. Every read must return what
// the shadow copy of that slave holds (so responses reach the right master),
// both masters must at some point wait for the same slave (contention), and
// an unmapped address must be answered with err.
module tb_mem_xbar;
  import shaheen_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  hreq_t [1:0] m_req;
  hrsp_t [1:0] m_rsp;
  hreq_t [3:0] s_req;
  hrsp_t [3:0] s_rsp;
  logic  [1:0] stall;
  int          nstall = 0;

  mem_xbar dut (
    .clk_i(clk), .rst_ni(rst_n), .m_req_i(m_req), .m_rsp_o(m_rsp),
    .s_req_o(s_req), .s_rsp_i(s_rsp), .stall_o(stall)
  );
  hbus_master_bfm u_m0 (.clk_i(clk), .req_o(m_req[0]), .rsp_i(m_rsp[0]));
  hbus_master_bfm u_m1 (.clk_i(clk), .req_o(m_req[1]), .rsp_i(m_rsp[1]));
  for (genvar s = 0; s < 4; s++) begin : g_s
    hbus_mem_slave #(.RAND_WAIT(1)) u_s (.clk_i(clk), .req_i(s_req[s]), .rsp_o(s_rsp[s]));
  end
  always @(posedge clk) if (rst_n && (stall[0] || stall[1])) nstall++;

  task automatic chk(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  localparam logic [31:0] BASES [4] = '{L2_BASE, HYPER_BASE, IOTLB_BASE, HYCFG_BASE};
  logic [63:0] shadow [logic [31:0]];

  // each master works on its own addresses in every slave, so its shadow is exact
  task automatic traffic(int m, int n);
    logic err;
    logic [63:0] d, wd;
    logic [31:0] a;
    int cyc;
    for (int t = 0; t < n; t++) begin
      a = BASES[$urandom_range(0, 3)] + 32'(m * 256) + 32'($urandom_range(0, 15) * 8);
      if ($urandom_range(0, 1)) begin
        wd = {$urandom, $urandom};
        if (m == 0) u_m0.write(a, wd, 8'hFF, err, cyc); else u_m1.write(a, wd, 8'hFF, err, cyc);
        shadow[a] = wd;
        chk(!err, "write ok");
      end else begin
        if (m == 0) u_m0.read(a, d, err, cyc); else u_m1.read(a, d, err, cyc);
        chk(!err && d == (shadow.exists(a) ? shadow[a] : {a, a}), $sformatf("read %h by %0d", a, m));
      end
    end
  endtask

  initial begin
    #3000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic err;
    logic [63:0] d;
    int cyc;
    repeat (3) @(posedge clk);
    rst_n = 1;
    fork
      traffic(0, 400);
      traffic(1, 400);
    join
    u_m0.read(32'h0000_1000, d, err, cyc);
    chk(err && d == 0, "unmapped address answered with error");
    chk(nstall > 0, "contention stall happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
