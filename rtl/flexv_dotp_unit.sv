// Mixed-precision dot-product (Dotp) unit of a Flex-V core.
//
// Computes result = C + sum_i A_i * B_i over the packed SIMD elements of two
// 32-bit registers. The element width of A (the weights) sets the number of
// products, 32/wa, and selects one of the four dot-product units DOTP-16b,
// DOTP-8b, DOTP-4b or DOTP-2b; the output mux returns that unit's sum. B (the
// activations) may be narrower than A: then one register holds more elements
// than one instruction consumes, and the slicer takes the 32*wb/wa-bit slice
// number MPC_CNT of B (slice 0 = least significant bits), while the router
// widens each of its elements to wa bits and places it where the dot-product
// unit expects it. This is the paper's 8-bit x 4-bit example: with MPC_CNT = 0
// the four 8-bit A elements meet the four 4-bit B elements of B[15:0], with
// MPC_CNT = 1 those of B[31:16]. The formats come from the SIMD_FMT CSR and
// MPC_CNT from the mixed-precision controller (flexv_mpc_ctrl), not from the
// instruction. a_signed_i / b_signed_i choose signed or unsigned elements, as
// the sdotp variants of XpulpV2 do (own choice of interface).
//
// Timing: operands are registered at the unit's input when valid_i is high and
// the result is combinational from those registers, so result_o is valid with
// valid_o one cycle after the operands. A format with wb > wa is not a legal
// combination; the unit then treats B as if it had A's width.
module flexv_dotp_unit
  import shaheen_pkg::*;
(
  input  logic        clk_i,
  input  logic        rst_ni,
  input  logic        valid_i,
  input  logic [31:0] a_i,
  input  logic [31:0] b_i,
  input  logic [31:0] c_i,
  input  simd_fmt_e   fmt_a_i,
  input  simd_fmt_e   fmt_b_i,
  input  logic        a_signed_i,
  input  logic        b_signed_i,
  input  logic [2:0]  mpc_cnt_i,
  output logic        valid_o,
  output logic [31:0] result_o
);
  logic [31:0] a_q, b_q, c_q;
  simd_fmt_e   fa_q, fb_q;
  logic        as_q, bs_q;
  logic [2:0]  cnt_q;
  logic        v_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      a_q <= '0; b_q <= '0; c_q <= '0;
      fa_q <= FMT_8; fb_q <= FMT_8;
      as_q <= 1'b0; bs_q <= 1'b0; cnt_q <= '0; v_q <= 1'b0;
    end else begin
      v_q <= valid_i;
      if (valid_i) begin
        a_q <= a_i; b_q <= b_i; c_q <= c_i;
        fa_q <= fmt_a_i; fb_q <= fmt_b_i;
        as_q <= a_signed_i; bs_q <= b_signed_i; cnt_q <= mpc_cnt_i;
      end
    end
  end

  // element i of width w from x, sign- or zero-extended to 32 bits
  function automatic logic [31:0] elem(logic [31:0] x, int unsigned i, int unsigned w, logic sgn);
    logic [31:0] v;
    v = (x >> (i * w)) & ((32'd1 << w) - 32'd1);
    if (sgn && v[w-1]) v = v | ~((32'd1 << w) - 32'd1);
    return v;
  endfunction

  // ---------------- slicer and router ----------------
  int unsigned wa, wb, n, ratio, sl;
  logic [31:0] slice, routed;

  always_comb begin
    wa    = fmt_bits(fa_q);
    wb    = fmt_bits(fb_q);
    if (wb > wa) wb = wa;
    n     = 32 / wa;
    ratio = wa / wb;
    sl    = int'(cnt_q) % ratio;
    slice = b_q >> (sl * n * wb);
    routed = '0;
    for (int unsigned i = 0; i < 16; i++) begin
      if (i < n) routed |= (elem(slice, i, wb, bs_q) & ((32'd1 << wa) - 32'd1)) << (i * wa);
    end
  end

  // ---------------- DOTP-16b / 8b / 4b / 2b ----------------
  function automatic logic [31:0] dotp(logic [31:0] a, logic [31:0] b, logic [31:0] c,
                                       int unsigned w, logic asg, logic bsg);
    logic [31:0] acc;
    acc = c;
    for (int unsigned i = 0; i < 32 / w; i++) acc += elem(a, i, w, asg) * elem(b, i, w, bsg);
    return acc;
  endfunction

  logic [31:0] r16, r8, r4, r2;
  assign r16 = dotp(a_q, routed, c_q, 16, as_q, bs_q);
  assign r8  = dotp(a_q, routed, c_q, 8,  as_q, bs_q);
  assign r4  = dotp(a_q, routed, c_q, 4,  as_q, bs_q);
  assign r2  = dotp(a_q, routed, c_q, 2,  as_q, bs_q);

  // ---------------- output mux ----------------
  always_comb begin
    case (fa_q)
      FMT_16:  result_o = r16;
      FMT_8:   result_o = r8;
      FMT_4:   result_o = r4;
      default: result_o = r2;
    endcase
  end
  assign valid_o = v_q;
endmodule
