// Simple memory slave for the shaheen_pkg host-bus protocol (testbench only).
//
// Grants every request at once (or after a random wait when RAND_WAIT = 1)
// and answers one cycle later. Storage is sparse, 64-bit words; unwritten
// words read as their own address. Records the last address and direction.
module hbus_mem_slave
  import shaheen_pkg::*;
#(
  parameter bit RAND_WAIT = 0
) (
  input  logic  clk_i,
  input  hreq_t req_i,
  output hrsp_t rsp_o
);
  logic [63:0] mem [logic [31:0]];
  logic [31:0] last_addr;
  logic        last_we;
  int          n_acc = 0;
  logic        stall;

  logic        gnt, rvalid_q = 1'b0;
  logic [63:0] rdata_q = '0;

  initial begin stall = 0; last_addr = '0; last_we = 0; end

  always @(negedge clk_i) stall <= RAND_WAIT ? 1'($urandom_range(0, 1)) : 1'b0;
  assign gnt   = req_i.req && !stall;
  assign rsp_o = '{gnt: gnt, rvalid: rvalid_q, err: 1'b0, rdata: rdata_q};

  always @(posedge clk_i) begin
    rvalid_q <= 1'b0;
    if (req_i.req && gnt) begin
      logic [31:0] a;
      logic [63:0] v;
      a = {req_i.addr[31:3], 3'b0};
      v = mem.exists(a) ? mem[a] : {a, a};
      rvalid_q <= 1'b1;
      last_addr = req_i.addr;
      last_we   = req_i.we;
      n_acc++;
      if (req_i.we) begin
        for (int k = 0; k < 8; k++) if (req_i.be[k]) v[8*k +: 8] = req_i.wdata[8*k +: 8];
        mem[a] = v;
        rdata_q <= '0;
      end else rdata_q <= v;
    end
  end
endmodule
