// Self-checking testbench of tcdm_interconnect at its default size
// (12 masters, 16 banks of 4096 32-bit words).
//
// Each master issues a random stream of reads and writes, bursts of them
// aimed at a few banks to force conflicts. Checks: a granted read returns the
// shadow memory's word exactly one cycle after the grant, no bank grants two
// masters in one cycle, masters on different banks are all granted, and every
// waiting master is granted within 12 cycles (round robin).
module tb_tcdm_interconnect;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  localparam int NM = 12, NB = 16;
  logic [NM-1:0]        req, we, gnt, rvalid;
  logic [NM-1:0][3:0]   be;
  logic [NM-1:0][31:0]  addr, wdata, rdata;
  logic [NB-1:0]        conflict;

  tcdm_interconnect dut (
    .clk_i(clk), .rst_ni(rst_n), .req_i(req), .we_i(we), .be_i(be), .addr_i(addr),
    .wdata_i(wdata), .gnt_o(gnt), .rvalid_o(rvalid), .rdata_o(rdata), .conflict_o(conflict)
  );

  task automatic chk(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  logic [31:0] shadow [logic [31:0]];
  logic [NM-1:0]       pend_rd;
  logic [NM-1:0][31:0] pend_exp;
  int wait_cyc [NM];
  logic [NM-1:0] gnt_prev;
  int nconf = 0, nfull = 0;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    gnt_prev = '0;
    req = '0; we = '0; be = '0; addr = '0; wdata = '0; pend_rd = '0;
    for (int m = 0; m < NM; m++) wait_cyc[m] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 6000; cyc++) begin
      @(negedge clk);
      // check responses to last cycle's grants
      for (int m = 0; m < NM; m++) begin
        if (pend_rd[m]) chk(rvalid[m] && rdata[m] == pend_exp[m], $sformatf("read data master %0d", m));
      end
      pend_rd = '0;
      for (int m = 0; m < NM; m++) begin
        logic [31:0] a;
        if (req[m] && !gnt_prev[m]) continue;  // hold a waiting request
        req[m] = $urandom_range(0, 3) != 0;
        a = (cyc % 500 < 250) ? 32'($urandom_range(0, 3) * 4 + $urandom_range(0, 7) * 64)
                              : 32'($urandom_range(0, 65535) * 4);
        addr[m] = a;
        we[m] = !shadow.exists(a) || $urandom_range(0, 1);
        be[m] = we[m] ? (shadow.exists(a) ? 4'($urandom) : 4'hF) : 4'h0;
        wdata[m] = $urandom;
      end
      #1;
      // grants of this cycle
      begin
        int bank_cnt [NB];
        for (int b = 0; b < NB; b++) bank_cnt[b] = 0;
        for (int m = 0; m < NM; m++) if (gnt[m]) bank_cnt[addr[m][5:2]]++;
        for (int b = 0; b < NB; b++) chk(bank_cnt[b] <= 1, "one grant per bank");
        if (|conflict) nconf++;
      end
      for (int m = 0; m < NM; m++) begin
        bit alone = 1;
        for (int k = 0; k < NM; k++) if (k != m && req[k] && addr[k][5:2] == addr[m][5:2]) alone = 0;
        if (req[m] && alone) chk(gnt[m], "request alone on its bank is granted");
        if (req[m] && !gnt[m]) begin
          wait_cyc[m]++;
          chk(wait_cyc[m] < NM, $sformatf("round robin serves within NM cycles m=%0d bank=%0d cyc=%0d", m, addr[m][5:2], cyc));
        end else wait_cyc[m] = 0;
        if (req[m] && gnt[m]) begin
          if (we[m]) begin
            logic [31:0] v;
            v = shadow.exists(addr[m]) ? shadow[addr[m]] : 32'h0;
            for (int k = 0; k < 4; k++) if (be[m][k]) v[8*k +: 8] = wdata[m][8*k +: 8];
            shadow[addr[m]] = v;
          end else begin
            pend_rd[m] = 1; pend_exp[m] = shadow[addr[m]];
          end
        end
      end
      if (&gnt) nfull++;
      gnt_prev = gnt;   // the grants of this cycle, before the clock edge moves the arbiters
    end
    chk(nconf > 100, "bank conflicts exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
