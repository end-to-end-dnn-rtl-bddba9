// tb_ima_out_buffer: whole-vector writes into both halves, 16-word reads from random word
// indices of either half (words past the end read zero), checked against a reference.
module tb_ima_out_buffer;
  localparam int COLS = 256;
  logic clk = 0, en, wsel, rsel;
  logic [COLS*8-1:0] wvec;
  logic [5:0] rword;
  logic [15:0][31:0] rdata;
  logic [1:0][63:0][31:0] ref_buf;
  int checks = 0, failures = 0;

  ima_out_buffer #(.COLS(COLS)) dut (.clk_i(clk), .wr_en_i(en), .wr_sel_i(wsel), .wr_vec_i(wvec),
    .rd_sel_i(rsel), .rd_word_i(rword), .rd_data_o(rdata));
  always #5 clk = ~clk;

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    en = 0; wsel = 0; rsel = 0; rword = 0; wvec = 0;
    for (int s = 0; s < 2; s++) begin
      @(negedge clk); en = 1; wsel = 1'(s);
      for (int w = 0; w < 64; w++) begin wvec[32*w +: 32] = $urandom; ref_buf[s][w] = wvec[32*w +: 32]; end
    end
    for (int n = 0; n < 300; n++) begin
      @(negedge clk);
      en = ($urandom % 4) == 0; wsel = $urandom % 2;
      for (int w = 0; w < 64; w++) wvec[32*w +: 32] = $urandom;
      rsel = $urandom % 2; rword = 6'($urandom);
      #1;
      for (int k = 0; k < 16; k++) begin
        logic [31:0] exp;
        exp = (rword + k < 64) ? ref_buf[rsel][rword+k] : 32'h0;
        checks++;
        if (rdata[k] !== exp) begin failures++; $display("word %0d mismatch", rword + k); end
      end
      if (en) for (int w = 0; w < 64; w++) ref_buf[wsel][w] = wvec[32*w +: 32];
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
