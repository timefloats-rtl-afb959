// tb_memristor_crossbar: programs every cell of a reduced 8 x 16 array with
// random codes, then checks (a) that selecting each row presents that row's
// weight exponents to the columns and (b) that for random patterns of
// column pulses every row line carries the sum of the W_M codes of the
// pulsed columns.
module tb_memristor_crossbar;
  import tf_pkg::*;
  localparam int ROWS = 8, COLS = 16;
  localparam int CHG_W = M_W + $clog2(COLS) + 1;

  logic clk = 1'b0, prog_en = 1'b0;
  logic [$clog2(ROWS)-1:0] prog_row = '0, row_sel = '0;
  logic [$clog2(COLS)-1:0] prog_col = '0;
  logic [M_W-1:0] prog_mant = '0;
  logic [E_W-1:0] prog_exp = '0;
  logic [E_W-1:0] col_w_exp [COLS];
  logic [COLS-1:0] col_pulse = '0;
  logic [CHG_W-1:0] row_charge [ROWS];
  int checks = 0, failures = 0;
  int wm [ROWS][COLS];
  int we [ROWS][COLS];

  memristor_crossbar #(.ROWS(ROWS), .COLS(COLS)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < COLS; c++) begin
        wm[r][c] = $urandom_range(15);
        we[r][c] = $urandom_range(15);
        @(negedge clk);
        prog_en = 1'b1; prog_row = r[$clog2(ROWS)-1:0]; prog_col = c[$clog2(COLS)-1:0];
        prog_mant = M_W'(wm[r][c]); prog_exp = E_W'(we[r][c]);
      end
    @(negedge clk) prog_en = 1'b0;
    for (int r = 0; r < ROWS; r++) begin
      row_sel = r[$clog2(ROWS)-1:0];
      #1;
      for (int c = 0; c < COLS; c++) begin
        checks++;
        if (int'(col_w_exp[c]) != we[r][c]) begin
          failures++; $display("FAIL w_exp r%0d c%0d", r, c);
        end
      end
    end
    for (int n = 0; n < 50; n++) begin
      col_pulse = COLS'($urandom);
      if (n == 0) col_pulse = '1;
      #1;
      for (int r = 0; r < ROWS; r++) begin
        int s;
        s = 0;
        for (int c = 0; c < COLS; c++) if (col_pulse[c]) s += wm[r][c];
        checks++;
        if (int'(row_charge[r]) != s) begin
          failures++; $display("FAIL charge r%0d %0d exp %0d", r, row_charge[r], s);
        end
      end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
