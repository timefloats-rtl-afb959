// tb_timefloats_top: end-to-end test of the TimeFloats macro at its default
// size (64-element vectors, 64 crossbar rows, no parameter overrides).
//
// Each scenario programs the whole crossbar through the program port, loads
// an input vector, starts a run and checks every row's result against a
// reference computed here from the FP8 operands:
//   E_i   = I_E^i + W_E^ri,  E_max = max_i E_i,  ID = lowest i with E_max
//   S_i   = I_M^i >> (E_max - E_i)   (0 once the difference reaches 4)
//   P     = sum_i S_i * W_M^ri,  code = min(P >> 10, 15)
//   y     = code normalised, exponent E_max + 10 - leading zeros
// It also checks that rows come out in order, ROW_TICKS clocks apart, and
// counts how often each mechanism occurred: full-scale codes, zero results,
// normalising shifts, partial mantissa shifts, mantissas scaled to zero,
// ties for the largest exponent, weight reprogramming and input reloads.
// A mechanism that never occurred counts as a failure.
module tb_timefloats_top;
  import tf_pkg::*;
  localparam int N = 64, R = 64;
  localparam int ADC_SHIFT = 10;
  localparam int ROW_TICKS = (int'(EXP_PULSE_OFFSET) + 30 + $clog2(N) + 3) + 17 + 4 + 6;

  logic clk = 1'b0, rst_n = 1'b0;
  logic w_prog_en = 1'b0;
  logic [$clog2(R)-1:0] w_prog_row = '0;
  logic [$clog2(N)-1:0] w_prog_col = '0;
  fp8_t w_prog = '0;
  logic x_ld_en = 1'b0;
  logic [$clog2(N)-1:0] x_ld_idx = '0;
  fp8_t x_ld = '0;
  logic start = 1'b0, busy, done;
  logic y_valid, y_zero;
  logic [$clog2(R)-1:0] y_row;
  fp_out_t y;
  logic [ADC_BITS-1:0] y_adc_code;
  logic [ESUM_W-1:0] y_emax_sum;
  logic [$clog2(N)-1:0] y_emax_id;

  timefloats_top dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_fullscale = 0, n_zero = 0, n_norm = 0, n_partial = 0, n_zeroed = 0;
  int n_tie = 0, n_reprog = 0, n_reload = 0, n_rows = 0;

  int xm [N], xe [N];
  int wm [R][N], we [R][N];

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic program_weights();
    for (int r = 0; r < R; r++)
      for (int c = 0; c < N; c++) begin
        @(negedge clk);
        w_prog_en  = 1'b1;
        w_prog_row = r[$clog2(R)-1:0];
        w_prog_col = c[$clog2(N)-1:0];
        w_prog.mant = M_W'(wm[r][c]);
        w_prog.exp  = E_W'(we[r][c]);
      end
    @(negedge clk) w_prog_en = 1'b0;
    n_reprog++;
  endtask

  task automatic load_inputs();
    for (int i = 0; i < N; i++) begin
      @(negedge clk);
      x_ld_en  = 1'b1;
      x_ld_idx = i[$clog2(N)-1:0];
      x_ld.mant = M_W'(xm[i]);
      x_ld.exp  = E_W'(xe[i]);
    end
    @(negedge clk) x_ld_en = 1'b0;
    n_reload++;
  endtask

  // reference for one row
  task automatic reference(input int r, output int code, output int emax, output int id,
                           output int mant, output int ex);
    int e, d, s, p, lz, ties;
    emax = -1; id = 0; ties = 0;
    for (int i = 0; i < N; i++) begin
      e = xe[i] + we[r][i];
      if (e > emax) begin emax = e; id = i; ties = 0; end
      else if (e == emax) ties++;
    end
    if (ties > 0) n_tie++;
    p = 0;
    for (int i = 0; i < N; i++) begin
      d = emax - (xe[i] + we[r][i]);
      s = (d >= M_W) ? 0 : (xm[i] >> d);
      if (d > 0 && d < M_W && s != 0) n_partial++;
      if (d >= M_W && xm[i] != 0) n_zeroed++;
      p += s * wm[r][i];
    end
    code = p >> ADC_SHIFT;
    if (code > 15) code = 15;
    lz = 0; mant = code;
    if (code != 0) while (mant < 8) begin mant = mant * 2; lz++; end
    ex = (code == 0) ? 0 : emax + ADC_SHIFT - lz;
    if (code >= 8) n_fullscale++;
    if (code == 0) n_zero++;
    if (code != 0 && lz > 0) n_norm++;
  endtask

  task automatic run_and_check();
    int t, last, row, code, emax, id, mant, ex;
    @(negedge clk) start = 1'b1;
    @(negedge clk) start = 1'b0;
    t = 0; last = -1; row = 0;
    while (t < 10 * R * ROW_TICKS) begin
      if (y_valid) begin
        reference(row, code, emax, id, mant, ex);
        checks += 6;
        if (int'(y_row) != row) begin failures++; $display("FAIL row %0d exp %0d", y_row, row); end
        if (int'(y_adc_code) != code) begin
          failures++; $display("FAIL r%0d code %0d exp %0d", row, y_adc_code, code);
        end
        if (int'(y_emax_sum) != emax) begin
          failures++; $display("FAIL r%0d emax %0d exp %0d", row, y_emax_sum, emax);
        end
        if (int'(y_emax_id) != id) begin
          failures++; $display("FAIL r%0d id %0d exp %0d", row, y_emax_id, id);
        end
        if (int'(y.mant) != mant || int'(y.exp) != ex || y_zero != (code == 0)) begin
          failures++; $display("FAIL r%0d y m%0d e%0d exp m%0d e%0d", row, y.mant, y.exp, mant, ex);
        end
        if (last >= 0 && t - last != ROW_TICKS) begin
          failures++; $display("FAIL row interval %0d exp %0d", t - last, ROW_TICKS);
        end
        last = t; row++; n_rows++;
      end
      if (done) break;
      @(negedge clk);
      t++;
    end
    checks += 2;
    if (row != R) begin failures++; $display("FAIL rows seen %0d", row); end
    if (!done || !y_valid) begin failures++; $display("FAIL done not with last row"); end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int sc = 0; sc < 4; sc++) begin
      for (int i = 0; i < N; i++) begin
        case (sc)
          0: begin xm[i] = 8 + $urandom_range(7); xe[i] = 7; end              // aligned, large
          1: begin xm[i] = $urandom_range(15);   xe[i] = $urandom_range(15); end // random
          2: begin xm[i] = 8 + $urandom_range(7); xe[i] = 6 + $urandom_range(2); end
          default: begin xm[i] = $urandom_range(15); xe[i] = 4 + $urandom_range(4); end
        endcase
      end
      if (sc != 3) begin
        for (int r = 0; r < R; r++)
          for (int c = 0; c < N; c++)
            case (sc)
              0: begin wm[r][c] = 8 + $urandom_range(7); we[r][c] = 7 + (r % 2) * $urandom_range(1); end
              1: begin wm[r][c] = $urandom_range(15);    we[r][c] = $urandom_range(15); end
              default: begin wm[r][c] = 6 + $urandom_range(9); we[r][c] = 5 + $urandom_range(2); end
            endcase
        program_weights();
      end
      load_inputs();
      run_and_check();
      $display("scenario %0d done", sc);
    end
    $display("rows=%0d fullscale=%0d zero=%0d normalise=%0d partial_shift=%0d zeroed=%0d tie=%0d reprogram=%0d reload=%0d",
             n_rows, n_fullscale, n_zero, n_norm, n_partial, n_zeroed, n_tie, n_reprog, n_reload);
    checks += 8;
    if (n_fullscale == 0) begin failures++; $display("FAIL no full-scale code"); end
    if (n_zero == 0)      begin failures++; $display("FAIL no zero result"); end
    if (n_norm == 0)      begin failures++; $display("FAIL no normalising shift"); end
    if (n_partial == 0)   begin failures++; $display("FAIL no partial mantissa shift"); end
    if (n_zeroed == 0)    begin failures++; $display("FAIL no mantissa scaled to zero"); end
    if (n_tie == 0)       begin failures++; $display("FAIL no exponent tie"); end
    if (n_reprog < 2)     begin failures++; $display("FAIL no reprogramming"); end
    if (n_reload < 2)     begin failures++; $display("FAIL no input reload"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
