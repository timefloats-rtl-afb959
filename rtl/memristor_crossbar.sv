// memristor_crossbar: behavioural model of the passive memristor array.
//
// ROWS x COLS cells, each made of two 4-bit memristors: W_M (mantissa,
// conductance g) and W_E (exponent, resistance in the exponent adder).
// The model stores the programmed codes in two arrays. It has three faces:
//  * program port: writes one cell's (W_E, W_M) codes, standing for the
//    memristor programming circuitry, which the paper does not describe;
//  * exponent read: the row chosen by `row_sel` is the grounded one, so each
//    column's exponent adder sees that row's W_E (`col_w_exp`);
//  * MAC: every tick, a row line collects charge equal to the sum of W_M
//    over the columns whose time pulse is high (`row_charge`). Integrated
//    over the pulses this gives sum_i T_i * g_ij for every row at once.
// Conductance is taken as proportional to the 4-bit W_M code; the 0.1 to
// 1 MOhm device range, wire resistance, sneak paths and variation are not
// modelled.
module memristor_crossbar
  import tf_pkg::*;
#(
  parameter int unsigned ROWS = 64,
  parameter int unsigned COLS = 64,   // cells (W_M, W_E pairs) per row
  parameter int unsigned MW   = M_W,
  parameter int unsigned EW   = E_W,
  localparam int unsigned CHG_W = MW + $clog2(COLS) + 1
) (
  input  logic                    clk,
  input  logic                    prog_en,
  input  logic [$clog2(ROWS)-1:0] prog_row,
  input  logic [$clog2(COLS)-1:0] prog_col,
  input  logic [MW-1:0]           prog_mant,
  input  logic [EW-1:0]           prog_exp,
  input  logic [$clog2(ROWS)-1:0] row_sel,
  output logic [EW-1:0]           col_w_exp  [COLS],
  input  logic [COLS-1:0]         col_pulse,
  output logic [CHG_W-1:0]        row_charge [ROWS]
);

  logic [MW-1:0] w_mant [ROWS][COLS];
  logic [EW-1:0] w_exp  [ROWS][COLS];

  always_ff @(posedge clk) begin
    if (prog_en) begin
      w_mant[prog_row][prog_col] <= prog_mant;
      w_exp [prog_row][prog_col] <= prog_exp;
    end
  end

  always_comb begin
    for (int c = 0; c < int'(COLS); c++) col_w_exp[c] = w_exp[row_sel][c];
  end

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    always_comb begin
      row_charge[r] = '0;
      for (int c = 0; c < int'(COLS); c++)
        if (col_pulse[c]) row_charge[r] = row_charge[r] + CHG_W'(w_mant[r][c]);
    end
  end

endmodule
