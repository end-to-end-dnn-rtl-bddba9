// tb_l1_bank: random byte-enabled writes and reads against a reference array; checks that
// read data appears one cycle after the request.
module tb_l1_bank;
  localparam int W = 64;
  logic clk = 0, req, we;
  logic [3:0] be;
  logic [5:0] addr;
  logic [31:0] wdata, rdata;
  logic [31:0] ref_mem [W];
  int checks = 0, failures = 0;

  l1_bank #(.WORDS(W)) dut (.clk_i(clk), .req_i(req), .we_i(we), .be_i(be), .addr_i(addr),
                            .wdata_i(wdata), .rdata_o(rdata));
  always #5 clk = ~clk;

  initial begin
    #200000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    req = 0; we = 0; be = 0; addr = 0; wdata = 0;
    // initialise
    for (int i = 0; i < W; i++) begin
      @(negedge clk); req = 1; we = 1; be = 4'hF; addr = 6'(i); wdata = $urandom; ref_mem[i] = wdata;
    end
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      req = ($urandom % 4) != 0; we = $urandom % 2; be = 4'($urandom); addr = 6'($urandom); wdata = $urandom;
      if (req && we) for (int b = 0; b < 4; b++) if (be[b]) ref_mem[addr][8*b +: 8] = wdata[8*b +: 8];
      if (req && !we) begin
        logic [31:0] exp; exp = ref_mem[addr];
        @(posedge clk); #1;
        checks++;
        if (rdata !== exp) begin failures++; $display("read mismatch @%0d: %h vs %h", addr, rdata, exp); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
