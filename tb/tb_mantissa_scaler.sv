// tb_mantissa_scaler: loads a mantissa, then plays an exponent pulse of
// width we and a largest-exponent pulse of width wm >= we that rises DELAY
// ticks later (as the detector output does), and checks that the result is
// the mantissa shifted right by wm - we (zero once the difference reaches
// the mantissa width) and that the XOR enable was high for wm - we ticks.
module tb_mantissa_scaler;
  import tf_pkg::*;
  localparam int DELAY = 6;

  logic clk = 1'b0, rst_n = 1'b0;
  logic ld = 1'b0, preload = 1'b0, exp_pulse = 1'b0, emax_pulse = 1'b0;
  logic [M_W-1:0] ld_mant = '0;
  logic shift_en;
  logic [M_W-1:0] mant_scaled;
  int checks = 0, failures = 0;

  mantissa_scaler #(.DELAY(DELAY)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input int m, input int we, input int wm);
    int en_ticks, expv;
    @(negedge clk) begin ld = 1'b1; ld_mant = M_W'(m); end
    @(negedge clk) begin ld = 1'b0; preload = 1'b1; end
    @(negedge clk) preload = 1'b0;
    en_ticks = 0;
    for (int t = 0; t < 50 + DELAY; t++) begin
      exp_pulse  = (t < we);
      emax_pulse = (t >= DELAY) && (t < DELAY + wm);
      #1;
      if (shift_en) en_ticks++;
      @(negedge clk);
    end
    exp_pulse = 1'b0; emax_pulse = 1'b0;
    expv = (wm - we >= M_W) ? 0 : (m >> (wm - we));
    checks += 2;
    if (int'(mant_scaled) != expv) begin
      failures++; $display("FAIL m=%0d we=%0d wm=%0d got %0d exp %0d", m, we, wm, mant_scaled, expv);
    end
    if (en_ticks != wm - we) begin
      failures++; $display("FAIL enable ticks %0d exp %0d", en_ticks, wm - we);
    end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 100; n++) begin
      int we, wm;
      we = 1 + $urandom_range(30);
      wm = we + ((n % 4 == 0) ? 0 : $urandom_range(31 - we));
      if (n % 5 == 1) wm = (we + 2 > 31) ? 31 : we + 2;
      run($urandom_range(15), we, wm);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
