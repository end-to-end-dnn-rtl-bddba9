// tb_aimc_core: programs random signed weights, runs MVMs on random unsigned inputs with
// different row counts and ADC shifts, and checks each output against an independent
// integer reference (including saturation) and that done comes exactly 130 cycles after
// start.
module tb_aimc_core;
  localparam int R = 256, C = 256, LAT = 130;
  logic clk = 0, rst_n = 1;
  logic prog_v; logic [7:0] prog_row; logic [C*8-1:0] prog_data;
  logic start, busy, done;
  logic [R*8-1:0] in_vec; logic [8:0] n_rows; logic [4:0] shift;
  logic [C*8-1:0] out_vec;
  logic signed [7:0] w [R][C];
  int checks = 0, failures = 0, saturated = 0;

  aimc_core #(.ROWS(R), .COLS(C), .LATENCY(LAT)) dut (.clk_i(clk), .rst_ni(rst_n),
    .prog_valid_i(prog_v), .prog_row_i(prog_row), .prog_data_i(prog_data),
    .start_i(start), .in_vec_i(in_vec), .n_rows_i(n_rows), .adc_shift_i(shift),
    .busy_o(busy), .done_o(done), .out_vec_o(out_vec));
  always #5 clk = ~clk;

  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    prog_v = 0; start = 0; in_vec = 0; n_rows = 0; shift = 0; prog_row = 0; prog_data = 0;
    rst_n = 0; repeat (2) @(negedge clk); rst_n = 1;
    for (int r = 0; r < R; r++) begin
      @(negedge clk); prog_v = 1; prog_row = 8'(r);
      for (int c = 0; c < C; c++) begin w[r][c] = 8'($urandom); prog_data[8*c +: 8] = w[r][c]; end
    end
    @(negedge clk); prog_v = 0;
    for (int t = 0; t < 6; t++) begin
      int cyc;
      for (int r = 0; r < R; r++) in_vec[8*r +: 8] = 8'($urandom);
      n_rows = (t == 0) ? 9'd256 : 9'(1 + $urandom % 256);
      shift = (t == 1) ? 5'd4 : 5'(8 + $urandom % 8);
      start = 1; @(negedge clk); start = 0;
      // reference, worked out while the array is busy
      cyc = 0;  // cycles counted from the edge that samples start
      while (!done) begin @(negedge clk); cyc++; end
      checks++;
      if (cyc != LAT) begin failures++; $display("latency %0d, expected %0d", cyc, LAT); end
      for (int c = 0; c < C; c++) begin
        longint acc; longint q; logic [7:0] exp;
        acc = 0;
        for (int r = 0; r < n_rows; r++) acc += longint'(in_vec[8*r +: 8]) * longint'(w[r][c]);
        q = acc >>> shift;
        if (q > 127) begin q = 127; saturated++; end
        if (q < -128) begin q = -128; saturated++; end
        exp = 8'(q);
        checks++;
        if (out_vec[8*c +: 8] !== exp) begin failures++; if (failures < 5) $display("t%0d col %0d: %0d vs %0d", t, c, $signed(out_vec[8*c +: 8]), $signed(exp)); end
      end
    end
    checks++; if (saturated == 0) begin failures++; $display("ADC saturation never exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
