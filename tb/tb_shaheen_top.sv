// End-to-end testbench of shaheen_top at its default parameters.
//
// Four HyperRAM device models (two buses, two chip selects each) hang on the
// HyperBUS pins; bus-functional masters stand in for the host CPU, the
// peripheral uDMA port and the cluster cores' path to the host. The test
// runs one complete secure offload:
//   1. the host fills L2 and HyperRAM (both chip selects) and reads them back;
//   2. the host programs two IOTLB windows: one read/write onto L2, one
//      read-only onto HyperRAM;
//   3. the cluster DMA copies L2 -> L1 and HyperRAM -> L1 through the IOTLB,
//      the cores read L1 (with bank conflicts) and check the data;
//   4. the cores run mixed-precision dot products (8b x 4b, 8b x 2b) on the
//      L1 data, the results are written to L1 and the DMA copies them to L2;
//   5. the DMA tries to write into the read-only window: the IOTLB refuses,
//      raises its interrupt, the host reads the faulting address and clears
//      it, and the HyperRAM contents are checked unchanged;
//   6. host, uDMA and cluster traffic overlap to provoke L2 bank conflicts and
//      crossbar stalls; an access outside the memory map must return an error.
// Each mechanism is counted; one that never happened counts as a failure.
// Expected values are computed in the testbench from the written patterns.
module tb_shaheen_top;
  import shaheen_pkg::*;

  localparam int NC = 8;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  hreq_t host_req, udma_req, cext_req;
  hrsp_t host_rsp, udma_rsp, cext_rsp;
  logic  irq;

  logic [NC-1:0]        core_req = '0, core_we = '0;
  logic [NC-1:0][3:0]   core_be = '0;
  logic [NC-1:0][31:0]  core_addr = '0, core_wdata = '0;
  logic [NC-1:0]        core_gnt, core_rvalid;
  logic [NC-1:0][31:0]  core_rdata;

  logic        dcfg_req = 1'b0, dcfg_we = 1'b0;
  logic [4:0]  dcfg_addr = '0;
  logic [31:0] dcfg_wdata = '0, dcfg_rdata;
  logic        dma_done, dma_busy;

  logic [NC-1:0]        dp_valid = '0, dp_as = '0, dp_bs = '0, fmt_we = '0;
  logic [NC-1:0][31:0]  dp_a = '0, dp_b = '0, dp_c = '0;
  simd_fmt_e [NC-1:0]   fmt_a, fmt_b;
  logic [NC-1:0]        dp_valid_o, dp_wrap;
  logic [NC-1:0][31:0]  dp_res;

  logic [1:0]        hb_ck_en, hb_reset_n, hb_dq_oe, hb_rwds_oe, hb_rwds_in;
  logic [1:0][1:0]   hb_cs_n, hb_rwds_out;
  logic [1:0][15:0]  hb_dq_out, hb_dq_in;

  logic       l1_conf, l2_conf, iotlb_hit, iotlb_deny;
  logic [1:0] hx_stall, cx_stall;

  initial begin
    for (int i = 0; i < NC; i++) begin fmt_a[i] = FMT_8; fmt_b[i] = FMT_8; end
  end

  shaheen_top dut (
    .clk_i(clk), .rst_ni(rst_n),
    .host_req_i(host_req), .host_rsp_o(host_rsp), .iotlb_irq_o(irq),
    .udma_req_i(udma_req), .udma_rsp_o(udma_rsp),
    .core_req_i(core_req), .core_we_i(core_we), .core_be_i(core_be),
    .core_addr_i(core_addr), .core_wdata_i(core_wdata),
    .core_gnt_o(core_gnt), .core_rvalid_o(core_rvalid), .core_rdata_o(core_rdata),
    .core_ext_req_i(cext_req), .core_ext_rsp_o(cext_rsp),
    .dma_cfg_req_i(dcfg_req), .dma_cfg_we_i(dcfg_we), .dma_cfg_addr_i(dcfg_addr),
    .dma_cfg_wdata_i(dcfg_wdata), .dma_cfg_rdata_o(dcfg_rdata), .dma_done_o(dma_done),
    .dp_valid_i(dp_valid), .dp_a_i(dp_a), .dp_b_i(dp_b), .dp_c_i(dp_c),
    .dp_a_signed_i(dp_as), .dp_b_signed_i(dp_bs), .fmt_we_i(fmt_we),
    .fmt_a_i(fmt_a), .fmt_b_i(fmt_b), .dp_valid_o(dp_valid_o), .dp_result_o(dp_res),
    .dp_slice_wrap_o(dp_wrap),
    .hb_ck_en_o(hb_ck_en), .hb_reset_no(hb_reset_n), .hb_cs_no(hb_cs_n),
    .hb_dq_oe_o(hb_dq_oe), .hb_dq_o(hb_dq_out), .hb_dq_i(hb_dq_in),
    .hb_rwds_oe_o(hb_rwds_oe), .hb_rwds_o(hb_rwds_out), .hb_rwds_i(hb_rwds_in),
    .l1_conflict_o(l1_conf), .l2_conflict_o(l2_conf), .host_xbar_stall_o(hx_stall),
    .cl_xbar_stall_o(cx_stall), .iotlb_hit_o(iotlb_hit), .iotlb_deny_o(iotlb_deny),
    .dma_busy_o(dma_busy)
  );

  // ---------------- HyperRAM devices ----------------
  logic [1:0][1:0][15:0] m_dq;
  logic [1:0][1:0]       m_rwds;
  for (genvar b = 0; b < 2; b++) begin : g_bus
    for (genvar c = 0; c < 2; c++) begin : g_cs
      hyperram_model #(.T_LAT(6)) u_ram (
        .clk_i(clk), .cs_ni(hb_cs_n[b][c]), .dq_i(hb_dq_out[b]), .rwds_i(hb_rwds_out[b]),
        .dq_o(m_dq[b][c]), .rwds_o(m_rwds[b][c])
      );
    end
    assign hb_dq_in[b]   = !hb_cs_n[b][0] ? m_dq[b][0] : m_dq[b][1];
    assign hb_rwds_in[b] = !hb_cs_n[b][0] ? m_rwds[b][0] : m_rwds[b][1];
  end

  hbus_master_bfm u_host (.clk_i(clk), .req_o(host_req), .rsp_i(host_rsp));
  hbus_master_bfm u_udma (.clk_i(clk), .req_o(udma_req), .rsp_i(udma_rsp));
  hbus_master_bfm u_cext (.clk_i(clk), .req_o(cext_req), .rsp_i(cext_rsp));

  // ---------------- mechanism counters ----------------
  int n_l1_conf = 0, n_l2_conf = 0, n_hx_stall = 0, n_cx_stall = 0, n_hit = 0, n_deny = 0;
  int n_cs1 = 0, n_cs0 = 0, n_wrap = 0, n_dma_in = 0, n_dma_out = 0, n_dec_err = 0;
  int n_irq = 0, n_hyper_rd_wait = 0;
  always @(posedge clk) if (rst_n) begin
    n_l1_conf  += int'(l1_conf);
    n_l2_conf  += int'(l2_conf);
    n_hx_stall += int'(|hx_stall);
    n_cx_stall += int'(|cx_stall);
    n_hit      += int'(iotlb_hit);
    n_deny     += int'(iotlb_deny);
    n_cs0      += int'(!hb_cs_n[0][0]);
    n_cs1      += int'(!hb_cs_n[0][1]);
    n_wrap     += $countones(dp_wrap);
    // HyperRAM read latency: chip selected, bus released, no data strobe yet
    n_hyper_rd_wait += int'((hb_cs_n[0] != 2'b11) && !hb_dq_oe[0] && !hb_rwds_in[0]);
  end

  task automatic chk(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- helpers ----------------
  function automatic logic [63:0] pat(logic [31:0] a);
    return {a ^ 32'h5A5A_0000, ~a};
  endfunction

  task automatic hwr(logic [31:0] a, logic [63:0] d);
    logic e; int cy;
    u_host.write(a, d, 8'hFF, e, cy);
    chk(!e, $sformatf("host write %h error", a));
  endtask

  task automatic hrd(logic [31:0] a, output logic [63:0] d);
    logic e; int cy;
    u_host.read(a, d, e, cy);
    chk(!e, $sformatf("host read %h error", a));
  endtask

  task automatic dma_reg(logic [4:0] a, logic [31:0] d);
    @(negedge clk);
    dcfg_req = 1'b1; dcfg_we = 1'b1; dcfg_addr = a; dcfg_wdata = d;
    @(negedge clk);
    dcfg_req = 1'b0; dcfg_we = 1'b0;
  endtask

  task automatic dma_run(logic [31:0] ext, logic [31:0] l1, logic [31:0] len, bit to_host);
    int cy;
    dma_reg(5'h00, ext);
    dma_reg(5'h04, l1);
    dma_reg(5'h08, len);
    dma_reg(5'h0C, {31'b0, to_host});
    cy = 0;
    while (!dma_done) begin @(posedge clk); cy++; if (cy > 20000) break; end
    chk(dma_done, "DMA did not finish");
    if (to_host) n_dma_out++; else n_dma_in++;
    @(negedge clk);
  endtask

  task automatic core_acc(int m, bit we, logic [31:0] a, logic [31:0] wd, output logic [31:0] rd);
    @(negedge clk);
    core_req[m] = 1'b1; core_we[m] = we; core_be[m] = 4'hF; core_addr[m] = a; core_wdata[m] = wd;
    forever begin
      bit g;
      #1 g = core_gnt[m];
      @(posedge clk);
      if (g) break;
      @(negedge clk);
    end
    @(negedge clk);
    core_req[m] = 1'b0;
    chk(core_rvalid[m], $sformatf("core %0d no rvalid", m));
    rd = core_rdata[m];
  endtask

  // all enabled cores issue one access in the same cycle; each keeps its
  // request until granted, its data is taken in the cycle after the grant
  task automatic core_batch(bit we, logic [NC-1:0] en, logic [NC-1:0][31:0] a,
                            logic [NC-1:0][31:0] wd, output logic [NC-1:0][31:0] rd);
    logic [NC-1:0] pend, g;
    int cyc;
    cyc = 0;
    rd = '0;
    @(negedge clk);
    pend = en;
    core_req = en; core_we = {NC{we}}; core_be = '1; core_addr = a; core_wdata = wd;
    while (pend != '0 && cyc < 1000) begin
      #1 g = core_gnt & pend;
      @(posedge clk);
      @(negedge clk);
      cyc++;
      for (int m = 0; m < NC; m++)
        if (g[m]) begin
          chk(core_rvalid[m], $sformatf("core %0d no rvalid", m));
          rd[m] = core_rdata[m];
        end
      pend &= ~g;
      core_req = pend;
    end
    chk(pend == '0, "core accesses never granted");
  endtask

  function automatic int sx(int unsigned v, int w, bit sgn);
    int unsigned msk;
    msk = (1 << w) - 1;
    v &= msk;
    if (sgn && v[w-1]) return int'(v) - (1 << w);
    return int'(v);
  endfunction

  function automatic logic [31:0] dotp_model(logic [31:0] av, logic [31:0] bv, logic [31:0] cv,
                                             int wa, int wb, int k);
    int n, r, s, acc;
    n = 32 / wa; r = wa / wb; s = k % r;
    acc = int'(cv);
    for (int i = 0; i < n; i++)
      acc += sx(av >> (i * wa), wa, 1'b1) * sx(bv >> ((s * n + i) * wb), wb, 1'b1);
    return 32'(acc);
  endfunction

  // ---------------- test ----------------
  localparam logic [31:0] VWIN_L2 = 32'h4000_0000;  // IOTLB window onto L2 (RW)
  localparam logic [31:0] VWIN_HR = 32'h5000_0000;  // IOTLB window onto HyperRAM (RO)
  localparam logic [31:0] CS1_OFS = 32'h0100_0000;  // 4194304 rows x 4 bytes per chip

  logic [63:0] d, exp_d;
  logic [31:0] w;
  logic        e;
  int          cy;
  logic [31:0] l1w [64];

  initial begin
    host_req = '0; udma_req = '0; cext_req = '0;
    repeat (4) @(posedge clk);
    rst_n = 1'b1;
    repeat (2) @(posedge clk);

    // 1. host fills L2 and HyperRAM (chip select 0 and 1)
    for (int i = 0; i < 64; i++) hwr(L2_BASE + 32'(8 * i), pat(L2_BASE + 32'(8 * i)));
    for (int i = 0; i < 32; i++) begin
      hrd(L2_BASE + 32'(8 * i), d);
      chk(d == pat(L2_BASE + 32'(8 * i)), $sformatf("L2 readback %0d: %h", i, d));
    end
    for (int i = 0; i < 8; i++) begin
      hwr(HYPER_BASE + 32'(8 * i), pat(HYPER_BASE + 32'(8 * i)));
      hwr(HYPER_BASE + CS1_OFS + 32'(8 * i), pat(HYPER_BASE + CS1_OFS + 32'(8 * i)));
    end
    chk(n_cs1 > 0 && n_cs0 > 0, "both HyperRAM chip selects used");
    for (int i = 0; i < 8; i++) begin
      u_host.read(HYPER_BASE + CS1_OFS + 32'(8 * i), d, e, cy);
      chk(!e && d == pat(HYPER_BASE + CS1_OFS + 32'(8 * i)), $sformatf("HyperRAM CS1 readback %0d: %h", i, d));
      // CA (3) + latency (6) + 2 words + chip-select hold, plus bus overhead
      chk(cy >= 3 + 6 + 2, $sformatf("HyperRAM read took only %0d cycles", cy));
      hrd(HYPER_BASE + 32'(8 * i), d);
      chk(d == pat(HYPER_BASE + 32'(8 * i)), $sformatf("HyperRAM CS0 readback %0d: %h", i, d));
    end
    // the HyperRAM configuration registers hold their reset values
    hrd(HYCFG_BASE + 32'h0, d);
    chk(d == 64'd4194304, $sformatf("n_rows reset value %0d", d));
    hrd(HYCFG_BASE + 32'h8, d);
    chk(d == 64'd6, $sformatf("t_lat reset value %0d", d));

    // 2. IOTLB: entry 0 = L2 window RW, entry 1 = HyperRAM window RO
    hwr(IOTLB_BASE + 32'd0,  64'(VWIN_L2));
    hwr(IOTLB_BASE + 32'd8,  64'(VWIN_L2 + 32'h0000_0FFF));
    hwr(IOTLB_BASE + 32'd16, 64'(L2_BASE));
    hwr(IOTLB_BASE + 32'd24, 64'h7);
    hwr(IOTLB_BASE + 32'd32, 64'(VWIN_HR));
    hwr(IOTLB_BASE + 32'd40, 64'(VWIN_HR + 32'h0000_FFFF));
    hwr(IOTLB_BASE + 32'd48, 64'(HYPER_BASE));
    hwr(IOTLB_BASE + 32'd56, 64'h3);
    hrd(IOTLB_BASE + 32'd16, d);
    chk(d == 64'(L2_BASE), "IOTLB entry readback");

    // 3. DMA L2 -> L1 (512 bytes) while the host reads L2: crossbar stalls
    fork
      dma_run(VWIN_L2, 32'h0, 32'd512, 1'b0);
      for (int i = 0; i < 16; i++) begin
        hrd(L2_BASE + 32'(8 * i), d);
        chk(d == pat(L2_BASE + 32'(8 * i)), "host L2 read during DMA");
      end
      begin
        // cores reach the host side too (through the IOTLB) while the DMA runs
        for (int i = 0; i < 8; i++) begin
          u_cext.read(VWIN_L2 + 32'(8 * i), d, e, cy);
          chk(!e && d == pat(L2_BASE + 32'(8 * i)), $sformatf("core external read %0d: %h", i, d));
        end
      end
    join
    // cores read L1 in parallel: 8 cores, pairs collide in the same bank
    for (int rnd = 0; rnd < 8; rnd++) begin
      logic [NC-1:0][31:0] a, r;
      logic [63:0] src;
      for (int m = 0; m < NC; m++) a[m] = 32'(4 * (rnd * NC + m));
      core_batch(1'b0, '1, a, '0, r);
      for (int m = 0; m < NC; m++) begin
        src = pat(L2_BASE + 32'(8 * ((rnd * NC + m) / 2)));
        chk(r[m] == src[32 * (m % 2) +: 32], $sformatf("L1 word %0d: %h", rnd * NC + m, r[m]));
        l1w[rnd * NC + m] = r[m];
      end
      // all cores hit bank 0 at once
      for (int m = 0; m < NC; m++) a[m] = 32'(64 * m);
      core_batch(1'b0, '1, a, '0, r);
      for (int m = 0; m < NC; m++) begin
        src = pat(L2_BASE + 32'(8 * (8 * m)));
        chk(r[m] == src[31:0], $sformatf("L1 conflict read core %0d: %h", m, r[m]));
      end
    end

    // DMA HyperRAM -> L1 through the read-only window
    dma_run(VWIN_HR + 32'h0, 32'h400, 32'd64, 1'b0);
    for (int i = 0; i < 16; i++) begin
      logic [63:0] src;
      core_acc(i % NC, 1'b0, 32'h400 + 32'(4 * i), '0, w);
      src = pat(HYPER_BASE + 32'(8 * (i / 2)));
      chk(w == src[32 * (i % 2) +: 32], $sformatf("L1 word from HyperRAM %0d: %h", i, w));
    end

    // 4. mixed-precision dot products: A = L1 words 0.., B = words from HyperRAM
    for (int m = 0; m < NC; m++) begin
      fmt_a[m] = FMT_8;
      fmt_b[m] = (m % 2 == 0) ? FMT_4 : FMT_2;
    end
    @(negedge clk); fmt_we = '1; @(negedge clk); fmt_we = '0;
    for (int k = 0; k < 4; k++) begin
      logic [NC-1:0][31:0] expv;
      @(negedge clk);
      for (int m = 0; m < NC; m++) begin
        dp_a[m] = l1w[(8 * k + m) % 64];
        dp_b[m] = l1w[(m + 17) % 64];
        dp_c[m] = 32'(k);
        dp_as[m] = 1'b1; dp_bs[m] = 1'b1;
        expv[m] = dotp_model(dp_a[m], dp_b[m], dp_c[m], 8, (m % 2 == 0) ? 4 : 2, k);
      end
      dp_valid = '1;
      @(negedge clk);
      dp_valid = '0;
      for (int m = 0; m < NC; m++) begin
        chk(dp_valid_o[m] && dp_res[m] == expv[m],
            $sformatf("dotp core %0d k %0d: %h exp %h", m, k, dp_res[m], expv[m]));
      end
      // store the results to L1 at 0x800 + 32*k
      begin
        logic [NC-1:0][31:0] a, r;
        for (int m = 0; m < NC; m++) a[m] = 32'h800 + 32'(32 * k + 4 * m);
        core_batch(1'b1, '1, a, expv, r);
      end
      for (int m = 0; m < NC; m++) l1w[(32 + 8 * k + m) % 64] = expv[m];
    end
    chk(n_wrap >= NC, $sformatf("slice wrap count %0d", n_wrap));

    // results L1 -> L2 through the RW window, then the host checks them
    dma_run(VWIN_L2 + 32'h800, 32'h800, 32'd128, 1'b1);
    for (int i = 0; i < 16; i++) begin
      hrd(L2_BASE + 32'h800 + 32'(8 * i), d);
      exp_d = {l1w[(32 + 2 * i + 1) % 64], l1w[(32 + 2 * i) % 64]};
      chk(d == exp_d, $sformatf("result in L2 %0d: %h exp %h", i, d, exp_d));
    end

    // 5. protection: DMA writes (two beats, the status keeps the last refused address) into the read-only HyperRAM window
    chk(!irq, "IOTLB irq low before the fault");
    dma_run(VWIN_HR + 32'h40, 32'h800, 32'd16, 1'b1);
    chk(irq, "IOTLB irq raised by the refused write");
    n_irq += int'(irq);
    hrd(IOTLB_BASE + 32'h400, d);
    chk(d[0] && d[63:32] == VWIN_HR + 32'h48, $sformatf("IOTLB status %h", d));
    hwr(IOTLB_BASE + 32'h400, 64'h0);
    @(negedge clk);
    chk(!irq, "IOTLB irq cleared by the host");
    // an address outside every window is refused too (read returns a constant)
    u_cext.read(32'h6000_0000, d, e, cy);
    chk(d == 64'hDEAD_BEEF_DEAD_BEEF, $sformatf("refused read data %h", d));
    hwr(IOTLB_BASE + 32'h400, 64'h0);
    hrd(HYPER_BASE + 32'h40, d);
    chk(d != {l1w[33], l1w[32]}, "HyperRAM not written by the refused DMA");

    // 6. L2 conflicts between host and uDMA port; decode error
    for (int i = 0; i < 8; i++) begin
      fork
        hrd(L2_BASE + 32'(32 * i), d);
        begin
          logic [63:0] du;
          u_udma.read(32'(32 * i), du, e, cy);
          chk(!e && du == pat(L2_BASE + 32'(32 * i)), $sformatf("uDMA L2 read %h", du));
        end
      join
    end
    u_host.read(32'h3000_0000, d, e, cy);
    chk(e, "access outside the memory map returns an error");
    n_dec_err += int'(e);

    // ---------------- mechanism report ----------------
    $display("mechanisms: l1_conflict=%0d l2_conflict=%0d host_xbar_stall=%0d cl_xbar_stall=%0d",
             n_l1_conf, n_l2_conf, n_hx_stall, n_cx_stall);
    $display("            iotlb_hit=%0d iotlb_deny=%0d irq=%0d cs0=%0d cs1=%0d hyper_rd_wait=%0d",
             n_hit, n_deny, n_irq, n_cs0, n_cs1, n_hyper_rd_wait);
    $display("            slice_wrap=%0d dma_in=%0d dma_out=%0d decode_err=%0d",
             n_wrap, n_dma_in, n_dma_out, n_dec_err);
    chk(n_l1_conf > 0, "L1 bank conflict never happened");
    chk(n_l2_conf > 0, "L2 bank conflict never happened");
    chk(n_hx_stall > 0, "host crossbar stall never happened");
    chk(n_cx_stall > 0, "cluster crossbar stall never happened");
    chk(n_hit > 0, "IOTLB translation never happened");
    chk(n_deny > 0, "IOTLB refusal never happened");
    chk(n_irq > 0, "IOTLB interrupt never happened");
    chk(n_cs1 > 0, "HyperRAM chip select 1 never used");
    chk(n_hyper_rd_wait > 0, "HyperRAM read latency never seen");
    chk(n_wrap > 0, "mixed-precision slice wrap never happened");
    chk(n_dma_in > 0 && n_dma_out > 0, "DMA did not run in both directions");
    chk(n_dec_err > 0, "decode error never happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
