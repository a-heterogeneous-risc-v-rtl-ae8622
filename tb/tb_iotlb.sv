// Self-checking testbench of iotlb.
//
// Programs all 32 entries with disjoint random ranges, bases and permissions,
// reads them back, then sends random cluster reads and writes in_rng and
// outside the ranges. A permitted access must reach the host side at
// addr - first + base with its data; a refused one must not reach it, must
// read DENY_RDATA, raise the interrupt and record the faulting address, which
// a status write clears.
module tb_iotlb;
  import shaheen_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  hreq_t cfg_req, cl_req, h_req;
  hrsp_t cfg_rsp, cl_rsp, h_rsp;
  logic  irq, hit, deny;
  int    nhit = 0, ndeny = 0;

  iotlb dut (
    .clk_i(clk), .rst_ni(rst_n), .cfg_req_i(cfg_req), .cfg_rsp_o(cfg_rsp),
    .cl_req_i(cl_req), .cl_rsp_o(cl_rsp), .h_req_o(h_req), .h_rsp_i(h_rsp),
    .irq_o(irq), .hit_o(hit), .deny_o(deny)
  );
  hbus_master_bfm u_cfg (.clk_i(clk), .req_o(cfg_req), .rsp_i(cfg_rsp));
  hbus_master_bfm u_cl  (.clk_i(clk), .req_o(cl_req), .rsp_i(cl_rsp));
  hbus_mem_slave  u_mem (.clk_i(clk), .req_i(h_req), .rsp_o(h_rsp));

  always @(posedge clk) begin
    if (hit && cl_rsp.gnt) nhit++;
    if (deny && cl_rsp.gnt) ndeny++;
  end

  task automatic chk(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  logic [31:0] first [32], last [32], base [32];
  logic [2:0]  fl [32];

  initial begin
    #3000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic err;
    logic [63:0] d;
    int cyc, n_before;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 32; i++) begin
      first[i] = 32'h4000_0000 + 32'(i) * 32'h0010_0000;          // 1 MiB slots
      last[i]  = first[i] + 32'($urandom_range(1, 16'hFFFF)) * 8 - 1;
      base[i]  = 32'h8000_0000 + 32'($urandom_range(0, 4095)) * 32'h1000;
      fl[i]    = (i < 4) ? 3'b111 : 3'($urandom);
      u_cfg.write(IOTLB_BASE + 32 * i + 0,  64'(first[i]), 8'hFF, err, cyc);
      u_cfg.write(IOTLB_BASE + 32 * i + 8,  64'(last[i]),  8'hFF, err, cyc);
      u_cfg.write(IOTLB_BASE + 32 * i + 16, 64'(base[i]),  8'hFF, err, cyc);
      u_cfg.write(IOTLB_BASE + 32 * i + 24, 64'(fl[i]),    8'hFF, err, cyc);
    end
    for (int i = 0; i < 32; i += 7) begin
      u_cfg.read(IOTLB_BASE + 32 * i + 8, d, err, cyc);
      chk(d == 64'(last[i]), "entry read back");
      u_cfg.read(IOTLB_BASE + 32 * i + 24, d, err, cyc);
      chk(d == 64'(fl[i]), "flags read back");
    end
    chk(!irq, "no interrupt after programming");
    for (int t = 0; t < 600; t++) begin
      int e;
      bit wr, in_rng, ok;
      logic [31:0] va, pa;
      logic [63:0] wd;
      e  = $urandom_range(0, 31);
      wr = 1'($urandom);
      in_rng = $urandom_range(0, 3) != 0;
      va = in_rng ? first[e] + 32'($urandom_range(0, int'(last[e] - first[e]))) & ~32'h7
                  : last[e] + 1 + 32'($urandom_range(0, 1000)) * 8;
      va = va & ~32'h7;
      ok = in_rng && fl[e][0] && (wr ? fl[e][2] : fl[e][1]);
      pa = va - first[e] + base[e];
      n_before = u_mem.n_acc;
      if (wr) begin
        wd = {$urandom, $urandom};
        u_cl.write(va, wd, 8'hFF, err, cyc);
        if (ok) chk(u_mem.n_acc == n_before + 1 && u_mem.last_addr == pa && u_mem.last_we &&
                    u_mem.mem[pa] == wd, $sformatf("translated write %h -> %h", va, pa));
      end else begin
        u_cl.read(va, d, err, cyc);
        if (ok) chk(u_mem.n_acc == n_before + 1 && u_mem.last_addr == pa && d == {pa, pa},
                    $sformatf("translated read %h -> %h", va, pa));
        else    chk(d == 64'hDEAD_BEEF_DEAD_BEEF, "refused read returns the design-time value");
      end
      chk(!err && cyc == 1, "one-cycle answer on both paths");
      if (!ok) begin
        chk(u_mem.n_acc == n_before, "refused access does not reach the host");
        @(negedge clk);
        chk(irq, "interrupt raised");
        u_cfg.read(IOTLB_BASE + 32'h400, d, err, cyc);
        chk(d[0] && d[63:32] == va, "status holds the faulting address");
        u_cfg.write(IOTLB_BASE + 32'h400, 64'd0, 8'hFF, err, cyc);
        @(negedge clk);
        chk(!irq, "status write clears the interrupt");
      end
    end
    chk(nhit > 0 && ndeny > 0, "both paths exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
