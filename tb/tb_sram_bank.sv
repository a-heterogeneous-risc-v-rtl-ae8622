// Testbench of sram_bank: random reads and writes with byte enables against a
// shadow array. Read data must appear exactly one cycle after the request.
module tb_sram_bank;
  localparam int W = 256;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic             req = 1'b0, we = 1'b0;
  logic [7:0]       addr = '0;
  logic [31:0]      wdata = '0, rdata;
  logic [3:0]       be = '0;
  logic [31:0]      shadow [W];

  sram_bank #(.WORDS(W), .DW(32)) dut (
    .clk_i(clk), .req_i(req), .we_i(we), .addr_i(addr), .wdata_i(wdata), .be_i(be), .rdata_o(rdata)
  );

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // fill every word so that all reads have a known value
    for (int i = 0; i < W; i++) begin
      @(negedge clk);
      req = 1'b1; we = 1'b1; be = 4'hF; addr = 8'(i); wdata = $urandom;
      shadow[i] = wdata;
    end
    for (int n = 0; n < 4000; n++) begin
      bit          do_wr;
      logic [7:0]  a;
      logic [31:0] expv;
      @(negedge clk);
      do_wr = 1'($urandom_range(0, 1));
      a = 8'($urandom_range(0, W - 1));
      req = 1'b1; we = do_wr; addr = a; be = 4'($urandom); wdata = $urandom;
      if (do_wr) begin
        for (int k = 0; k < 4; k++) if (be[k]) shadow[a][8*k +: 8] = wdata[8*k +: 8];
      end else begin
        expv = shadow[a];
        @(negedge clk);
        req = 1'b0; we = 1'b0; addr = ~a; wdata = $urandom;   // next request idle
        checks++;
        if (rdata !== expv) begin
          failures++;
          $display("FAIL read %0d: %h exp %h", a, rdata, expv);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
