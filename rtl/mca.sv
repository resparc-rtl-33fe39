// mca -- behavioural model of one memristive crossbar array (MCA).
//
// This is a behavioural model of an analog part. In silicon the crossbar
// holds one memristor per cross-point; spikes on the rows apply a read
// voltage and each column current is the sum of the conductances of the rows
// that spiked (Kirchhoff's current law), i.e. an analog inner product.
// Here each conductance is one of 16 levels (4 bits, as in the published
// 20k-200k ohm range) and the column "current" is the exact integer sum of
// the levels of the active rows, CUR_W bits wide.
//
// Interface: prog_* writes one device (offline programming, standing in for
// the write circuitry, which the architecture does not describe).
// When read_en is high the column currents for row_spk are computed and held
// in cur until the next read or clear; cur_valid marks them.
// Timing: one cycle from read_en to cur/cur_valid (the analog settling time is
// assumed to fit in one 200 MHz clock cycle).
module mca
  import resparc_pkg::*;
#(
  parameter int ROWS = MCA_N,
  parameter int COLS = MCA_N,
  parameter int WB   = W_BITS,
  parameter int CW   = WB + $clog2(ROWS)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // device programming
  input  logic                     prog_we,
  input  logic [$clog2(ROWS)-1:0]  prog_row,
  input  logic [$clog2(COLS)-1:0]  prog_col,
  input  logic [WB-1:0]            prog_g,
  // evaluation
  input  logic                     read_en,
  input  logic                     clear,
  input  logic [ROWS-1:0]          row_spk,
  output logic [COLS-1:0][CW-1:0]  cur,
  output logic                     cur_valid
);

  logic [WB-1:0] g [ROWS][COLS];

  always_ff @(posedge clk) begin
    if (prog_we) g[prog_row][prog_col] <= prog_g;
  end

  // column sums: one adder tree per column, each a plain sum over the rows
  logic [COLS-1:0][CW-1:0] col_sum;
  for (genvar c = 0; c < COLS; c++) begin : g_col
    always_comb begin
      col_sum[c] = '0;
      for (int r = 0; r < ROWS; r++)
        if (row_spk[r]) col_sum[c] = col_sum[c] + CW'(g[r][c]);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cur       <= '0;
      cur_valid <= 1'b0;
    end else if (read_en) begin
      cur       <= col_sum;
      cur_valid <= 1'b1;
    end else if (clear) begin
      cur_valid <= 1'b0;
    end
  end

endmodule
