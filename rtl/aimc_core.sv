// aimc_core: BEHAVIOURAL MODEL (not synthesizable logic) of the analog domain of the IMA:
// the DACs, the ROWSxCOLS phase-change-memory crossbar and the ADCs.
//
// The real part drives each word line with a DAC voltage proportional to an input byte, lets
// every bit line sum the currents through the programmed PCM conductances, and converts
// the bit-line currents back with ADCs. This model computes the same matrix-vector product
// with integers: out[c] = sat8((sum_r in[r] * W[r][c]) >>> adc_shift), with unsigned 8-bit
// inputs (rows at or above n_rows_i read as zero, i.e. undriven word lines), signed 8-bit
// weights and signed 8-bit ADC codes. The result appears, with a one-cycle done_o pulse,
// LATENCY cycles after start_i (130 cycles = the 130 ns MVM at 1 GHz of the described
// platform). Weights are written one row at a time through the prog_* port, standing in for
// the PCM programming circuitry, which the described platform assumes pre-loaded.
// Inside the model, the input vector is latched at start_i and the columns are evaluated
// CPC at a time during the latency window (CPC = ceil(COLS / (LATENCY-1)), 2 for 256 columns
// and 130 cycles), which keeps the unrolled arithmetic per cycle small; out_vec_o is valid from
// done_o until the next start_i.
// The 8-bit input, weight and ADC resolutions and the shift-and-saturate ADC transfer are
// this design's choices; the array size and the latency are the platform's.
module aimc_core
  import aimc_pkg::*;
#(
  parameter int unsigned ROWS    = IMA_ROWS,
  parameter int unsigned COLS    = IMA_COLS,
  parameter int unsigned LATENCY = IMA_ANALOG_LAT
) (
  input  logic                     clk_i,
  input  logic                     rst_ni,
  // weight programming
  input  logic                     prog_valid_i,
  input  logic [$clog2(ROWS)-1:0]  prog_row_i,
  input  logic [COLS*8-1:0]        prog_data_i,
  // MVM
  input  logic                     start_i,
  input  logic [ROWS*8-1:0]        in_vec_i,
  input  logic [$clog2(ROWS):0]    n_rows_i,
  input  logic [4:0]               adc_shift_i,
  output logic                     busy_o,
  output logic                     done_o,
  output logic [COLS*8-1:0]        out_vec_o
);
  localparam int unsigned WIN = (LATENCY > 1) ? LATENCY - 1 : 1;
  localparam int unsigned CPC = (COLS + WIN - 1) / WIN;      // columns evaluated per cycle
  localparam int unsigned CW  = $clog2(COLS + CPC + 1);

  logic signed [7:0]     w_q [ROWS][COLS];
  logic [31:0]           cnt_q;
  logic [COLS*8-1:0]     res_q;
  logic [ROWS*8-1:0]     in_q;
  logic [$clog2(ROWS):0] n_rows_q;
  logic [4:0]            shift_q;
  logic [CW-1:0]         col_q;
  logic [CPC-1:0][7:0]   col_res;

  always_ff @(posedge clk_i) begin
    if (prog_valid_i)
      for (int unsigned c = 0; c < COLS; c++)
        w_q[prog_row_i][c] <= prog_data_i[8*c +: 8];
  end

  // DAC -> crossbar -> ADC for the CPC columns starting at col_q
  always_comb begin
    for (int unsigned k = 0; k < CPC; k++) begin
      logic signed [31:0] acc, q;
      int unsigned c;
      c = int'(col_q) + k;
      acc = '0;
      if (c < COLS)
        for (int unsigned r = 0; r < ROWS; r++)
          if (r < n_rows_q)
            acc += $signed({1'b0, in_q[8*r +: 8]}) * 32'(w_q[r][c]);
      q = acc >>> shift_q;
      if (q > 127)       q = 127;
      else if (q < -128) q = -128;
      col_res[k] = q[7:0];
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      cnt_q    <= '0;
      done_o   <= 1'b0;
      res_q    <= '0;
      in_q     <= '0;
      n_rows_q <= '0;
      shift_q  <= '0;
      col_q    <= CW'(COLS);
    end else begin
      done_o <= 1'b0;
      if (start_i && cnt_q == 0) begin
        in_q     <= in_vec_i;
        n_rows_q <= n_rows_i;
        shift_q  <= adc_shift_i;
        col_q    <= '0;
        cnt_q    <= 32'(LATENCY);
      end else if (cnt_q != 0) begin
        cnt_q <= cnt_q - 1;
        if (cnt_q == 1) done_o <= 1'b1;
        if (int'(col_q) < COLS) begin
          for (int unsigned k = 0; k < CPC; k++)
            if (int'(col_q) + k < COLS) res_q[8*(int'(col_q) + k) +: 8] <= col_res[k];
          col_q <= col_q + CW'(CPC);
        end
      end
    end
  end

  assign busy_o    = (cnt_q != 0);
  assign out_vec_o = res_q;
endmodule
