// IOTLB: range-based translation and protection of cluster accesses to the host.
//
// The host programs NE entries, each with a first and a last virtual address
// (inclusive), a physical base and three flags: V (the cluster may use the
// entry), R and W. A cluster request whose address lies in a valid entry's
// range, and whose direction the entry permits, is passed on with
// phys = addr - first + base, as the paper describes. When several entries
// match, the lowest index wins (own choice). Any other request is answered by
// the IOTLB itself so that the cluster's bus is never left hanging: a write is
// accepted and dropped, a read returns the design-time constant DENY_RDATA. At
// the same time irq_o is raised towards the host; it stays high until the host
// writes the status register, which also reports the faulting address.
//
// Register map on the configuration port (64-bit registers, own choice):
//   entry i: 32*i + 0 first, +8 last, +16 phys base, +24 flags {W,R,V} in [2:0]
//   0x400  : status, [0] irq pending, [63:32] faulting address; write clears
// Config and translated accesses follow the shaheen_pkg protocol; a
// translated request adds no cycle, a refused one is answered one cycle after
// its grant.
module iotlb
  import shaheen_pkg::*;
#(
  parameter int unsigned          NE         = 32,
  parameter logic [HDATA_W-1:0]   DENY_RDATA = 64'hDEAD_BEEF_DEAD_BEEF
) (
  input  logic  clk_i,
  input  logic  rst_ni,
  // configuration port, from the host crossbar
  input  hreq_t cfg_req_i,
  output hrsp_t cfg_rsp_o,
  // cluster side
  input  hreq_t cl_req_i,
  output hrsp_t cl_rsp_o,
  // host side
  output hreq_t h_req_o,
  input  hrsp_t h_rsp_i,
  output logic  irq_o,
  output logic  hit_o,     // a request was translated this cycle
  output logic  deny_o     // a request was refused this cycle
);
  typedef struct packed {
    logic [HADDR_W-1:0] first;
    logic [HADDR_W-1:0] last;
    logic [HADDR_W-1:0] base;
    logic               v, r, w;
  } entry_t;

  entry_t [NE-1:0]    tlb_q;
  logic               irq_q;
  logic [HADDR_W-1:0] fault_q;
  logic               deny_rsp_q, cfg_rsp_q;
  logic [HDATA_W-1:0] cfg_rdata_q;

  // ---------------- translation ----------------
  logic [NE-1:0] match;
  logic          found;
  logic [HADDR_W-1:0] paddr;

  always_comb begin
    found = 1'b0;
    paddr = '0;
    for (int unsigned i = 0; i < NE; i++) begin
      match[i] = tlb_q[i].v &&
                 cl_req_i.addr >= tlb_q[i].first && cl_req_i.addr <= tlb_q[i].last &&
                 (cl_req_i.we ? tlb_q[i].w : tlb_q[i].r);
    end
    for (int i = NE - 1; i >= 0; i--) begin
      if (match[i]) begin
        found = 1'b1;
        paddr = cl_req_i.addr - tlb_q[i].first + tlb_q[i].base;
      end
    end
  end

  assign hit_o  = cl_req_i.req && found;
  assign deny_o = cl_req_i.req && !found;

  always_comb begin
    h_req_o      = cl_req_i;
    h_req_o.req  = cl_req_i.req && found;
    h_req_o.addr = paddr;
    cl_rsp_o     = h_rsp_i;
    if (!found) cl_rsp_o.gnt = cl_req_i.req;
    if (deny_rsp_q) begin
      cl_rsp_o.rvalid = 1'b1;
      cl_rsp_o.err    = 1'b0;
      cl_rsp_o.rdata  = DENY_RDATA;
    end
  end

  // ---------------- configuration ----------------
  logic [10:0] cofs;
  logic [4:0]  cent;
  logic        cstat;
  assign cofs  = cfg_req_i.addr[10:0];
  assign cent  = cofs[9:5];
  assign cstat = cofs[10];

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      tlb_q       <= '0;
      irq_q       <= 1'b0;
      fault_q     <= '0;
      deny_rsp_q  <= 1'b0;
      cfg_rsp_q   <= 1'b0;
      cfg_rdata_q <= '0;
    end else begin
      deny_rsp_q <= deny_o;
      cfg_rsp_q  <= cfg_req_i.req;
      if (cfg_req_i.req) begin
        cfg_rdata_q <= '0;
        if (cstat) begin
          cfg_rdata_q <= {fault_q, 31'b0, irq_q};
        end else if (int'(cent) < NE) begin
          case (cofs[4:3])
            2'd0: cfg_rdata_q <= HDATA_W'(tlb_q[cent].first);
            2'd1: cfg_rdata_q <= HDATA_W'(tlb_q[cent].last);
            2'd2: cfg_rdata_q <= HDATA_W'(tlb_q[cent].base);
            2'd3: cfg_rdata_q <= HDATA_W'({tlb_q[cent].w, tlb_q[cent].r, tlb_q[cent].v});
          endcase
        end
      end
      if (cfg_req_i.req && cfg_req_i.we) begin
        if (cstat) begin
          irq_q <= 1'b0;
        end else if (int'(cent) < NE) begin
          case (cofs[4:3])
            2'd0: tlb_q[cent].first <= cfg_req_i.wdata[HADDR_W-1:0];
            2'd1: tlb_q[cent].last  <= cfg_req_i.wdata[HADDR_W-1:0];
            2'd2: tlb_q[cent].base  <= cfg_req_i.wdata[HADDR_W-1:0];
            2'd3: {tlb_q[cent].w, tlb_q[cent].r, tlb_q[cent].v} <= cfg_req_i.wdata[2:0];
          endcase
        end
      end
      if (deny_o) begin
        irq_q   <= 1'b1;
        fault_q <= cl_req_i.addr;
      end
    end
  end

  assign cfg_rsp_o = '{gnt: cfg_req_i.req, rvalid: cfg_rsp_q, err: 1'b0, rdata: cfg_rdata_q};
  assign irq_o     = irq_q;
endmodule
