// tb_tf_controller: runs the sequencer over 4 rows with a stand-in ADC that
// answers like the 4-bit SAR ADC (done 5 clocks after `adc_start`), and checks for every row: rows come in
// order, each strobe fires the expected number of times in the expected
// order, `integ` is high for MAC_WIN clocks, a row takes
// EXP_WIN + MAC_WIN + 10 clocks, `done` follows the last row, and `start`
// during a run is ignored.
module tb_tf_controller;
  localparam int ROWS = 4, EXP_WIN = 40, MAC_WIN = 17;

  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0, adc_done = 1'b0;
  logic busy, done, clr, preload, exp_start, dac_ld, dac_cmd, integ, hold, adc_start, fmt_valid;
  logic [$clog2(ROWS)-1:0] row_sel;
  int checks = 0, failures = 0;

  tf_controller #(.ROWS(ROWS), .EXP_WIN(EXP_WIN), .MAC_WIN(MAC_WIN)) dut (.*);

  always #5 clk = ~clk;

  // stand-in for the SAR ADC: `done` visible 5 clocks after `adc_start`
  int adc_cnt = 0;
  always @(posedge clk) begin
    adc_done <= 1'b0;
    if (adc_start) adc_cnt <= 4;
    else if (adc_cnt > 0) begin
      adc_cnt <= adc_cnt - 1;
      if (adc_cnt == 1) adc_done <= 1'b1;
    end
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int t, n_clr, n_exp, n_ld, n_cmd, n_int, n_hold, n_adc, n_fmt, t_exp, t_cmd, t_adc, t_clr, last_fmt;
    int row_seen;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int run = 0; run < 2; run++) begin
      @(negedge clk) start = 1'b1;
      @(negedge clk) start = 1'b0;
      row_seen = 0; last_fmt = -1;
      n_clr = 0; n_exp = 0; n_ld = 0; n_cmd = 0; n_int = 0; n_hold = 0; n_adc = 0; n_fmt = 0;
      t = 0;
      t_clr = 0; t_exp = 0; t_cmd = 0; t_adc = 0;
      while (!done && t < 2000) begin
        if (t == 30) start = 1'b1;                 // must be ignored
        else start = 1'b0;
        if (clr) begin n_clr++; t_clr = t; end
        if (exp_start) begin n_exp++; t_exp = t; end
        if (dac_ld) n_ld++;
        if (dac_cmd) begin n_cmd++; t_cmd = t; end
        if (integ) n_int++;
        if (hold) n_hold++;
        if (adc_start) begin n_adc++; t_adc = t; end
        if (fmt_valid) begin
          checks += 6;
          if (int'(row_sel) != row_seen) begin failures++; $display("FAIL row %0d exp %0d", row_sel, row_seen); end
          if (!(t_clr < t_exp && t_exp < t_cmd && t_cmd < t_adc && t_adc < t)) begin
            failures++; $display("FAIL order");
          end
          if (n_int != MAC_WIN) begin failures++; $display("FAIL integ %0d", n_int); end
          if (n_clr != 1 || n_exp != 1 || n_ld != 1 || n_cmd != 1 || n_hold != 1 || n_adc != 1) begin
            failures++; $display("FAIL strobe counts");
          end
          if (t - t_clr + 1 != EXP_WIN + MAC_WIN + 10) begin
            failures++; $display("FAIL row ticks %0d", t - t_clr + 1);
          end
          if (!busy) begin failures++; $display("FAIL busy"); end
          row_seen++; last_fmt = t;
          n_clr = 0; n_exp = 0; n_ld = 0; n_cmd = 0; n_int = 0; n_hold = 0; n_adc = 0; n_fmt = 0;
        end
        @(negedge clk);
        t++;
      end
      start = 1'b0;
      checks += 2;
      if (row_seen != ROWS) begin failures++; $display("FAIL rows %0d", row_seen); end
      if (!done || t != last_fmt + 1) begin failures++; $display("FAIL done timing"); end
      @(negedge clk);
      checks++;
      if (busy) begin failures++; $display("FAIL busy after done"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
