// tb_event_unit: barrier (cores sleep until the last one arrives, then all wake together),
// event wait (sleep until a masked event; unmasked events stay pending), dispatch (value
// broadcast and dispatch event) and software events.
module tb_event_unit;
  import aimc_pkg::*;
  localparam int NC = 4;
  logic clk = 0, rst_n = 1;
  cfg_req_t cfg;
  logic [31:0] rdata, dispatch;
  logic [N_EVENTS-1:0] hw_evt;
  logic [NC-1:0] barrier, waitr, wake, clk_en;
  logic [NC-1:0][N_EVENTS-1:0] wmask;
  int checks = 0, failures = 0;

  event_unit #(.N_CORES(NC)) dut (.clk_i(clk), .rst_ni(rst_n), .cfg_req_i(cfg), .cfg_rdata_o(rdata),
    .hw_evt_i(hw_evt), .barrier_i(barrier), .wait_i(waitr), .wait_mask_i(wmask), .wake_o(wake),
    .clk_en_o(clk_en), .dispatch_o(dispatch));
  always #5 clk = ~clk;

  task automatic check(string what, logic cond);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic cfg_write(logic [7:0] a, logic [31:0] d);
    cfg = '{valid: 1'b1, we: 1'b1, addr: {4'h0, a}, wdata: d};
    @(negedge clk); cfg = '0;
  endtask

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    cfg = '0; hw_evt = '0; barrier = '0; waitr = '0; wmask = '0;
    rst_n = 0; repeat (2) @(negedge clk); rst_n = 1; @(negedge clk);
    check("all awake after reset", clk_en == '1);
    // ---- barrier ----
    cfg_write(EV_BARRIER_MASK, 32'hF);
    for (int c = 0; c < NC-1; c++) begin
      barrier[c] = 1; @(negedge clk); barrier = '0;
      repeat (3) @(negedge clk);
      check($sformatf("core %0d sleeps at barrier", c), clk_en[c] == 1'b0);
      check("no early release", wake == '0);
    end
    barrier[NC-1] = 1; @(negedge clk); barrier = '0;
    check("barrier wakes all cores together", wake == '1);
    check("clocks back on after barrier", clk_en == '1);
    @(negedge clk);
    check("wake is a single pulse", wake == '0);
    // ---- event wait ----
    waitr[0] = 1; wmask[0] = (1 << EVT_DMA_IN) | (1 << EVT_IMA); @(negedge clk); waitr = '0;
    check("core 0 sleeps waiting", clk_en[0] == 1'b0);
    hw_evt[EVT_DMA_OUT] = 1; @(negedge clk); hw_evt = '0; @(negedge clk);
    check("unmasked event does not wake", clk_en[0] == 1'b0 && wake[0] == 1'b0);
    repeat (5) @(negedge clk);
    hw_evt[EVT_IMA] = 1; @(negedge clk); hw_evt = '0;
    check("masked event wakes core 0", wake[0] == 1'b1 && clk_en[0] == 1'b1);
    // DMA_OUT is still pending: waiting on it returns at once
    waitr[0] = 1; wmask[0] = 1 << EVT_DMA_OUT; @(negedge clk); waitr = '0;
    check("pending event wakes at once", wake[0] == 1'b1 && clk_en[0] == 1'b1);
    // IMA was consumed: waiting on it sleeps
    waitr[0] = 1; wmask[0] = 1 << EVT_IMA; @(negedge clk); waitr = '0; @(negedge clk);
    check("consumed event does not wake again", clk_en[0] == 1'b0);
    hw_evt[EVT_IMA] = 1; @(negedge clk); hw_evt = '0;
    check("second IMA event wakes", wake[0] == 1'b1);
    // ---- dispatch ----
    for (int c = 1; c < NC; c++) begin waitr[c] = 1; wmask[c] = 1 << EVT_DISPATCH; end
    @(negedge clk); waitr = '0;
    check("team sleeps", clk_en[NC-1:1] == '0);
    cfg_write(EV_DISPATCH, 32'hCAFE_0123);
    check("dispatch wakes the team", wake[NC-1:1] == '1);
    check("dispatch value", dispatch == 32'hCAFE_0123);
    cfg = '{valid: 1'b1, we: 1'b0, addr: {4'h0, EV_DISPATCH}, wdata: '0}; #1;
    check("dispatch readback", rdata == 32'hCAFE_0123);
    @(negedge clk); cfg = '0;
    // ---- software event ----
    waitr[2] = 1; wmask[2] = 1 << (EVT_SW0 + 1); @(negedge clk); waitr = '0;
    cfg_write(EV_SW_EVENT, 32'h1);
    check("other sw event does not wake", clk_en[2] == 1'b0);
    cfg_write(EV_SW_EVENT, 32'h2);
    check("sw event wakes", wake[2] == 1'b1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
