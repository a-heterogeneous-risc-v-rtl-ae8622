// Round-robin arbiter.
//
// Grants one of N requesters per cycle. The search starts one place above the
// last requester that was granted and accepted (advance = 1), so every
// requester is served within N arbitration rounds. gnt_o is one-hot or zero
// and combinational in req_i; the pointer updates on the clock edge.
module rr_arbiter #(
  parameter int unsigned N = 4
) (
  input  logic                 clk_i,
  input  logic                 rst_ni,
  input  logic [N-1:0]         req_i,
  input  logic                 advance_i,
  output logic [N-1:0]         gnt_o,
  output logic [$clog2(N>1?N:2)-1:0] idx_o
);
  localparam int unsigned IW = $clog2(N > 1 ? N : 2);
  logic [IW-1:0] prio_q;

  // requests rotated so that index prio_q comes first
  logic [2*N-1:0] req2;
  assign req2 = {req_i, req_i} >> prio_q;

  always_comb begin
    gnt_o = '0;
    idx_o = '0;
    for (int k = N - 1; k >= 0; k--) begin
      if (req2[k]) begin
        gnt_o    = '0;
        gnt_o[(int'(prio_q) + k) % N] = 1'b1;
        idx_o    = IW'((int'(prio_q) + k) % N);
      end
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) prio_q <= '0;
    else if (advance_i && |gnt_o) prio_q <= IW'((int'(idx_o) + 1) % N);
  end

  assert property (@(posedge clk_i) disable iff (!rst_ni) $onehot0(gnt_o));
endmodule
