// Self-checking testbench of flexv_dotp_unit.
//
// Directed cases from the 8-bit x 4-bit example (slice 0 then slice 1 of B),
// then random operands for every legal format pair, signedness and MPC_CNT,
// compared with a reference model written element by element below. The
// result must appear exactly one cycle after the operands.
module tb_flexv_dotp_unit;
  import shaheen_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic        valid_i, valid_o, as, bs;
  logic [31:0] a, b, c, res;
  simd_fmt_e   fa, fb;
  logic [2:0]  cnt;

  flexv_dotp_unit dut (
    .clk_i(clk), .rst_ni(rst_n), .valid_i, .a_i(a), .b_i(b), .c_i(c),
    .fmt_a_i(fa), .fmt_b_i(fb), .a_signed_i(as), .b_signed_i(bs), .mpc_cnt_i(cnt),
    .valid_o, .result_o(res)
  );

  function automatic int sx(int unsigned v, int w, bit sgn);
    int unsigned m;
    m = (1 << w) - 1;
    v &= m;
    if (sgn && v[w-1]) return int'(v) - (1 << w);
    return int'(v);
  endfunction

  function automatic logic [31:0] model(logic [31:0] av, logic [31:0] bv, logic [31:0] cv,
                                        int wa, int wb, bit asg, bit bsg, int k);
    int n, r, s, acc, ea, eb;
    n = 32 / wa; r = wa / wb; s = k % r;
    acc = int'(cv);
    for (int i = 0; i < n; i++) begin
      ea = sx(av >> (i * wa), wa, asg);
      eb = sx(bv >> ((s * n + i) * wb), wb, bsg);
      acc += ea * eb;
    end
    return 32'(acc);
  endfunction

  task automatic run(logic [31:0] av, logic [31:0] bv, logic [31:0] cv, simd_fmt_e fai,
                     simd_fmt_e fbi, bit asg, bit bsg, int k, logic [31:0] expv);
    @(negedge clk);
    valid_i = 1; a = av; b = bv; c = cv; fa = fai; fb = fbi; as = asg; bs = bsg; cnt = 3'(k);
    @(negedge clk);
    valid_i = 0; a = $urandom; b = $urandom;   // operands must already be captured
    checks++;
    if (!valid_o || res !== expv) begin
      failures++;
      $display("FAIL fa=%0d fb=%0d a=%h b=%h c=%h k=%0d got %h (v=%b) exp %h",
               fai, fbi, av, bv, cv, k, res, valid_o, expv);
    end
  endtask

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    valid_i = 0; a = 0; b = 0; c = 0; fa = FMT_8; fb = FMT_8; as = 0; bs = 0; cnt = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // 8b x 4b: A = {4,3,2,1}, B = 0x87654321; slice 0 = {4,3,2,1}, slice 1 = {8,7,6,5}
    run(32'h04030201, 32'h87654321, 32'd100, FMT_8, FMT_4, 0, 0, 0, 32'd130);
    run(32'h04030201, 32'h87654321, 32'd100, FMT_8, FMT_4, 0, 0, 1, 32'd170);
    // signed 8b x 8b: (-1)*2 + 3*(-4) = -14
    run(32'h0000_03FF, 32'h0000_FC02, 32'd0, FMT_8, FMT_8, 1, 1, 0, -32'sd14);
    // 16b x 16b unsigned: 0xFFFF*2 + 1*3
    run(32'h0001_FFFF, 32'h0003_0002, 32'd0, FMT_16, FMT_16, 0, 0, 0, 32'h0002_0001);
    // 2b x 2b: all ones, 16 elements of 3*3
    run(32'hFFFF_FFFF, 32'hFFFF_FFFF, 32'd0, FMT_2, FMT_2, 0, 0, 0, 32'd144);
    // 4b x 2b, slice 1 (B[31:16] = 0x5555: elements 1), A elements 2
    run(32'h2222_2222, 32'h5555_0000, 32'd0, FMT_4, FMT_2, 0, 0, 1, 32'd16);
    for (int t = 0; t < 2000; t++) begin
      int f1, f2, wa, wb, k;
      bit asg, bsg;
      logic [31:0] av, bv, cv;
      f1 = $urandom_range(0, 3);
      f2 = $urandom_range(f1, 3);
      wa = 16 >> f1; wb = 16 >> f2;
      asg = 1'($urandom); bsg = 1'($urandom);
      k = $urandom_range(0, 7);
      av = $urandom; bv = $urandom; cv = $urandom;
      run(av, bv, cv, simd_fmt_e'(f1), simd_fmt_e'(f2), asg, bsg, k,
          model(av, bv, cv, wa, wb, asg, bsg, k));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
