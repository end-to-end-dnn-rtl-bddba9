// tb_tcdm_xbar: six masters issue random reads and writes to four banks of L1; a request
// is held until granted. A reference memory is updated at every grant; every read must
// return the reference value one cycle after its grant. Also checks that every bank grants
// at most one master per cycle, that conflicts stall masters, and that no master starves.
module tb_tcdm_xbar;
  import aimc_pkg::*;
  localparam int NM = 6, NB = 4, BWD = 16;
  logic clk = 0, rst_n = 1;
  tcdm_req_t [NM-1:0] req;
  tcdm_rsp_t [NM-1:0] rsp;
  logic [NB-1:0] b_req, b_we;
  logic [NB-1:0][3:0] b_be;
  logic [NB-1:0][3:0] b_addr;
  logic [NB-1:0][31:0] b_wdata, b_rdata;
  logic [31:0] ref_mem [NB*BWD];
  logic [NM-1:0] exp_v, granted;
  logic [NM-1:0][31:0] exp_d;
  int wait_cnt [NM];
  int checks = 0, failures = 0, conflicts = 0, grants = 0;

  tcdm_xbar #(.N_MASTERS(NM), .N_BANKS(NB), .BANK_WORDS(BWD)) dut (
    .clk_i(clk), .rst_ni(rst_n), .m_req_i(req), .m_rsp_o(rsp),
    .b_req_o(b_req), .b_we_o(b_we), .b_be_o(b_be), .b_addr_o(b_addr),
    .b_wdata_o(b_wdata), .b_rdata_i(b_rdata));
  for (genvar b = 0; b < NB; b++) begin : g_b
    l1_bank #(.WORDS(BWD)) i_bank (.clk_i(clk), .req_i(b_req[b]), .we_i(b_we[b]), .be_i(b_be[b]),
      .addr_i(b_addr[b]), .wdata_i(b_wdata[b]), .rdata_o(b_rdata[b]));
  end
  always #5 clk = ~clk;

  initial begin
    #500000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic tcdm_req_t rand_req(bit allow_idle);
    tcdm_req_t r;
    r.req = !allow_idle || ($urandom % 4 != 0);
    r.we = $urandom % 2; r.be = 4'($urandom); r.addr = 32'(($urandom % (NB*BWD)) * 4);
    r.wdata = $urandom;
    return r;
  endfunction

  initial begin
    req = '0; exp_v = '0; granted = '0;
    for (int m = 0; m < NM; m++) wait_cnt[m] = 0;
    rst_n = 0; repeat (2) @(negedge clk); rst_n = 1;
    // initialise memory through master 0
    for (int i = 0; i < NB*BWD; i++) begin
      req[0] = '{req: 1'b1, we: 1'b1, be: 4'hF, addr: 32'(i*4), wdata: 32'(i * 32'h01010101)};
      ref_mem[i] = 32'(i * 32'h01010101);
      @(negedge clk);
    end
    req = '0;
    @(negedge clk);
    for (int cyc = 0; cyc < 3000; cyc++) begin
      // drive: keep pending requests, draw new ones for the others
      for (int m = 0; m < NM; m++) if (!req[m].req || granted[m]) req[m] = rand_req(1);
      #1;
      @(posedge clk);
      // sample grants at the clock edge (inputs stable since the drive)
      begin
        int per_bank [NB];
        for (int b = 0; b < NB; b++) per_bank[b] = 0;
        for (int m = 0; m < NM; m++) begin
          exp_v[m] = 1'b0;
          granted[m] = 1'b0;
          if (req[m].req && rsp[m].gnt) begin
            int idx; idx = req[m].addr >> 2;
            per_bank[idx % NB]++;
            grants++;
            granted[m] = 1'b1;
            wait_cnt[m] = 0;
            if (req[m].we) begin
              for (int b = 0; b < 4; b++) if (req[m].be[b]) ref_mem[idx][8*b +: 8] = req[m].wdata[8*b +: 8];
            end else begin exp_v[m] = 1'b1; exp_d[m] = ref_mem[idx]; end
          end else if (req[m].req) begin
            conflicts++;
            wait_cnt[m]++;
            if (wait_cnt[m] > NM) begin failures++; $display("master %0d starves", m); wait_cnt[m] = 0; end
          end
        end
        for (int b = 0; b < NB; b++) begin
          checks++;
          if (per_bank[b] > 1) begin failures++; $display("bank %0d granted twice", b); end
        end
      end
      @(negedge clk);
      for (int m = 0; m < NM; m++) if (exp_v[m]) begin
        checks++;
        if (!rsp[m].rvalid || rsp[m].rdata !== exp_d[m]) begin
          failures++; $display("master %0d read %h exp %h rvalid %b", m, rsp[m].rdata, exp_d[m], rsp[m].rvalid);
        end
      end
    end
    checks++;
    if (conflicts == 0) begin failures++; $display("no bank conflict happened"); end
    $display("grants=%0d conflicts=%0d", grants, conflicts);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
