// Bus-functional master for the shaheen_pkg host-bus protocol (testbench only).
//
// write()/read() drive one transaction: request held until grant, then wait
// for the response. They return the error flag and the cycles from request to
// response. Signals change on the falling clock edge; the grant is sampled
// 1 time unit after it, before the next rising edge.
module hbus_master_bfm
  import shaheen_pkg::*;
(
  input  logic  clk_i,
  output hreq_t req_o,
  input  hrsp_t rsp_i
);
  initial req_o = '0;

  task automatic write(input logic [31:0] addr, input logic [63:0] data,
                       input logic [7:0] be, output logic err, output int cycles);
    cycles = 0;
    @(negedge clk_i);
    req_o = '{req: 1'b1, we: 1'b1, be: be, addr: addr, wdata: data};
    forever begin
      bit g;
      #1 g = rsp_i.gnt;      // this cycle's grant, sampled before the clock edge
      @(posedge clk_i); cycles++;
      if (g) break;
      @(negedge clk_i);
    end
    @(negedge clk_i);
    req_o = '0;
    while (!rsp_i.rvalid) begin @(negedge clk_i); cycles++; end
    err = rsp_i.err;
  endtask

  task automatic read(input logic [31:0] addr, output logic [63:0] data,
                      output logic err, output int cycles);
    cycles = 0;
    @(negedge clk_i);
    req_o = '{req: 1'b1, we: 1'b0, be: 8'hFF, addr: addr, wdata: '0};
    forever begin
      bit g;
      #1 g = rsp_i.gnt;      // this cycle's grant, sampled before the clock edge
      @(posedge clk_i); cycles++;
      if (g) break;
      @(negedge clk_i);
    end
    @(negedge clk_i);
    req_o = '0;
    while (!rsp_i.rvalid) begin @(negedge clk_i); cycles++; end
    data = rsp_i.rdata;
    err  = rsp_i.err;
  endtask
endmodule
