// Mixed-precision controller (MCD) of a Flex-V core: holds the SIMD_FMT CSR
// and generates MPC_CNT.
//
// When B is narrower than A, one B register holds wa/wb slices, each enough
// for one dot-product instruction. The controller counts the mixed-precision
// virtual SIMD instructions that issue (issue_i) and presents the slice number
// on mpc_cnt_o: 0, 1, ..., wa/wb - 1, then back to 0. A write of the SIMD_FMT
// CSR (fmt_we_i, which loads fmt_a_i/fmt_b_i; reset value 8-bit x 8-bit) restarts the count at 0; with uniform formats the count stays
// at 0. slice_wrap_o pulses when the last slice of a B register has been used,
// which is when software (or the Mac&Load path) must supply a fresh B word.
// The paper names MPC_CNT and the controller; the counting rule is this
// design's reading of its 8-bit x 4-bit example.
module flexv_mpc_ctrl
  import shaheen_pkg::*;
(
  input  logic       clk_i,
  input  logic       rst_ni,
  input  logic       fmt_we_i,
  input  simd_fmt_e  fmt_a_i,
  input  simd_fmt_e  fmt_b_i,
  input  logic       issue_i,
  output simd_fmt_e  fmt_a_o,      // SIMD_FMT CSR, element width of A
  output simd_fmt_e  fmt_b_o,      // SIMD_FMT CSR, element width of B
  output logic [2:0] mpc_cnt_o,
  output logic       slice_wrap_o
);
  simd_fmt_e fa_q, fb_q;
  logic [2:0] cnt_q;
  logic [2:0] last;

  always_comb begin
    // wa/wb - 1, the formats are powers of two apart
    if (fb_q > fa_q) last = 3'(((1 << (int'(fb_q) - int'(fa_q))) - 1));
    else             last = 3'd0;
  end

  assign slice_wrap_o = issue_i && !fmt_we_i && (cnt_q == last) && (last != 0);
  assign mpc_cnt_o    = cnt_q;
  assign fmt_a_o      = fa_q;
  assign fmt_b_o      = fb_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      fa_q  <= FMT_8;
      fb_q  <= FMT_8;
      cnt_q <= '0;
    end else if (fmt_we_i) begin
      fa_q  <= fmt_a_i;
      fb_q  <= fmt_b_i;
      cnt_q <= '0;
    end else if (issue_i) begin
      cnt_q <= (cnt_q == last) ? 3'd0 : cnt_q + 3'd1;
    end
  end
endmodule
