// tb_axi_tcdm_slave: AXI4 write bursts with random byte strobes and read bursts into an L1
// model with random bank stalls. Checks the L1 contents after writes, the data, ID and LAST
// of every read beat, and the B response ID.
module tb_axi_tcdm_slave;
  import aimc_pkg::*;
  logic clk = 0, rst_n = 1;
  axi_req_t req;
  axi_rsp_t rsp;
  tcdm_req_t [BEAT_WORDS-1:0] treq;
  tcdm_rsp_t [BEAT_WORDS-1:0] trsp;
  logic [31:0] ref_mem [4096];
  int checks = 0, failures = 0;

  axi_tcdm_slave dut (.clk_i(clk), .rst_ni(rst_n), .axi_req_i(req), .axi_rsp_o(rsp),
                      .tcdm_req_o(treq), .tcdm_rsp_i(trsp));
  tcdm_mem_model #(.NP(BEAT_WORDS), .WORDS(4096), .GNT_PCT(60)) i_l1 (.clk_i(clk), .req_i(treq), .rsp_o(trsp));
  always #5 clk = ~clk;

  task automatic check(string what, logic cond);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic write_burst(logic [31:0] addr, int beats, logic [3:0] id);
    req.aw = '{id: id, addr: addr, len: 8'(beats-1), size: 3'd6, burst: BURST_INCR};
    req.aw_valid = 1;
    do @(posedge clk); while (!rsp.aw_ready);
    #1 req.aw_valid = 0;
    for (int b = 0; b < beats; b++) begin
      for (int k = 0; k < 16; k++) req.w.data[32*k +: 32] = $urandom;
      for (int k = 0; k < 64; k++) req.w.strb[k] = ($urandom % 4) != 0;
      req.w.last = (b == beats-1);
      req.w_valid = 1;
      do @(posedge clk); while (!rsp.w_ready);
      for (int k = 0; k < 64; k++)
        if (req.w.strb[k]) ref_mem[((addr[19:0] + 64*b + k) >> 2) % 4096][8*(k%4) +: 8] = req.w.data[8*k +: 8];
      #1 req.w_valid = 0;
    end
    req.b_ready = 1;
    do @(posedge clk); while (!rsp.b_valid);
    check("B id", rsp.b.id == id);
    #1 req.b_ready = 0;
  endtask

  task automatic read_burst(logic [31:0] addr, int beats, logic [3:0] id);
    req.ar = '{id: id, addr: addr, len: 8'(beats-1), size: 3'd6, burst: BURST_INCR};
    req.ar_valid = 1;
    do @(posedge clk); while (!rsp.ar_ready);
    #1 req.ar_valid = 0;
    for (int b = 0; b < beats; b++) begin
      req.r_ready = ($urandom % 3) != 0;
      @(posedge clk);
      while (!(rsp.r_valid && req.r_ready)) begin #1 req.r_ready = ($urandom % 3) != 0; @(posedge clk); end
      for (int k = 0; k < 16; k++)
        check($sformatf("read beat %0d word %0d", b, k),
              rsp.r.data[32*k +: 32] == ref_mem[((addr[19:0] + 64*b + 4*k) >> 2) % 4096]);
      check("R last", rsp.r.last == (b == beats-1));
      check("R id", rsp.r.id == id);
      #1 req.r_ready = 0;
    end
  endtask

  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    req = '0;
    for (int i = 0; i < 4096; i++) begin i_l1.mem[i] = $urandom; ref_mem[i] = i_l1.mem[i]; end
    rst_n = 0; repeat (2) @(negedge clk); rst_n = 1; @(negedge clk);
    write_burst(32'h8030_0100, 4, 4'd3);
    write_burst(32'h8030_1000, 16, 4'd5);
    read_burst (32'h8030_0100, 4, 4'd7);
    read_burst (32'h8030_0FC0, 20, 4'd1);
    write_burst(32'h8030_0000, 1, 4'd2);
    read_burst (32'h8030_0000, 8, 4'd9);
    for (int i = 0; i < 4096; i++) check($sformatf("L1 word %0d", i), i_l1.mem[i] == ref_mem[i]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
