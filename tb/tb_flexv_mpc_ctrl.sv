// Self-checking testbench of flexv_mpc_ctrl.
//
// For each format pair, issues a run of instructions and checks that MPC_CNT
// walks 0 .. wa/wb-1 and wraps, that slice_wrap pulses on the last slice, that
// a CSR write restarts the count, and that the CSR outputs hold the formats.
module tb_flexv_mpc_ctrl;
  import shaheen_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic       fmt_we, issue, wrap;
  simd_fmt_e  fa, fb, fa_o, fb_o;
  logic [2:0] cnt;

  flexv_mpc_ctrl dut (
    .clk_i(clk), .rst_ni(rst_n), .fmt_we_i(fmt_we), .fmt_a_i(fa), .fmt_b_i(fb),
    .issue_i(issue), .fmt_a_o(fa_o), .fmt_b_o(fb_o), .mpc_cnt_o(cnt), .slice_wrap_o(wrap)
  );

  task automatic chk(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s (cnt=%0d)", what, cnt); end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    fmt_we = 0; issue = 0; fa = FMT_8; fb = FMT_8;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int f1 = 0; f1 < 4; f1++) begin
      for (int f2 = f1; f2 < 4; f2++) begin
        int ratio;
        ratio = (16 >> f1) / (16 >> f2);
        @(negedge clk);
        fmt_we = 1; fa = simd_fmt_e'(f1); fb = simd_fmt_e'(f2);
        @(negedge clk);
        fmt_we = 0;
        chk(fa_o == simd_fmt_e'(f1) && fb_o == simd_fmt_e'(f2), "csr formats");
        for (int i = 0; i < 3 * ratio; i++) begin
          chk(cnt == 3'(i % ratio), "count sequence");
          issue = 1;
          #1 chk(wrap == (ratio > 1 && (i % ratio) == ratio - 1), "wrap pulse");
          @(negedge clk);
          issue = 0;
          if ($urandom_range(0, 1)) @(negedge clk);   // idle cycles keep the count
        end
        // restart by a CSR write in the middle of a slice sequence
        if (ratio > 1) begin
          issue = 1; @(negedge clk); issue = 0;
          chk(cnt == 3'd1, "advanced before restart");
          fmt_we = 1; @(negedge clk); fmt_we = 0;
          chk(cnt == 3'd0, "restart on CSR write");
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
