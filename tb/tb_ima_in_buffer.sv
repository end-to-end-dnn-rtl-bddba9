// tb_ima_in_buffer: masked 16-word writes into both halves of the double buffer while the
// other half is read as a vector; checks the vector against a reference, that a write to
// one half leaves the other untouched, and that writes past the end are dropped.
module tb_ima_in_buffer;
  localparam int ROWS = 256;
  logic clk = 0, en, wsel, rsel;
  logic [5:0] wword;
  logic [15:0] wmask;
  logic [15:0][31:0] wdata;
  logic [ROWS*8-1:0] vec;
  logic [1:0][63:0][31:0] ref_buf;
  int checks = 0, failures = 0;

  ima_in_buffer #(.ROWS(ROWS)) dut (.clk_i(clk), .wr_en_i(en), .wr_sel_i(wsel), .wr_word_i(wword),
    .wr_mask_i(wmask), .wr_data_i(wdata), .rd_sel_i(rsel), .rd_vec_o(vec));
  always #5 clk = ~clk;

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    en = 0; wsel = 0; rsel = 0; wword = 0; wmask = 0; wdata = 0;
    for (int s = 0; s < 2; s++) for (int w = 0; w < 64; w += 16) begin
      @(negedge clk); en = 1; wsel = 1'(s); wword = 6'(w); wmask = '1;
      for (int k = 0; k < 16; k++) begin wdata[k] = $urandom; ref_buf[s][w+k] = wdata[k]; end
    end
    for (int n = 0; n < 300; n++) begin
      @(negedge clk);
      en = $urandom % 2; wsel = $urandom % 2; wword = 6'($urandom); wmask = 16'($urandom);
      for (int k = 0; k < 16; k++) wdata[k] = $urandom;
      rsel = $urandom % 2;
      #1;
      checks++;
      if (vec !== ref_buf[rsel]) begin failures++; $display("vector mismatch sel %0d", rsel); end
      if (en) for (int k = 0; k < 16; k++) if (wmask[k] && wword + k < 64) ref_buf[wsel][wword+k] = wdata[k];
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
