// tb_fp_reformatter: runs every (ADC code, E_max) pair and checks the
// normalised mantissa, the exponent E_max + ADC_SHIFT - lz (output bias
// 2*EXP_BIAS), the zero flag, and that results appear one clock after
// `in_valid`.
module tb_fp_reformatter;
  import tf_pkg::*;
  localparam int ADC_SHIFT = 10;

  logic clk = 1'b0, rst_n = 1'b0, in_valid = 1'b0;
  logic [ADC_BITS-1:0] code = '0;
  logic [ESUM_W-1:0] emax_sum = '0;
  logic out_valid, is_zero;
  fp_out_t result;
  logic [1:0] norm_shift;
  int checks = 0, failures = 0;

  fp_reformatter #(.ADC_SHIFT(ADC_SHIFT)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int e = 0; e < 31; e++)
      for (int c = 0; c < 16; c++) begin
        int lz, m, xe;
        code = ADC_BITS'(c); emax_sum = ESUM_W'(e); in_valid = 1'b1;
        @(negedge clk) in_valid = 1'b0;
        // reference: value c * 2^(ADC_SHIFT + e - 2*BIAS) = m * 2^(xe - OUT_BIAS)
        lz = 0; m = c;
        if (c != 0) while (m < 8) begin m = m * 2; lz++; end
        xe = e + ADC_SHIFT - lz;
        checks += 2;
        if (!out_valid) begin failures++; $display("FAIL valid"); end
        if (c == 0) begin
          if (!is_zero || result != '0) begin failures++; $display("FAIL zero"); end
        end else if (int'(result.mant) != m || int'(result.exp) != xe || is_zero
                     || int'(norm_shift) != lz) begin
          failures++;
          $display("FAIL c=%0d e=%0d got m%0d e%0d exp m%0d e%0d", c, e, result.mant, result.exp, m, xe);
        end
        @(negedge clk);
        checks++;
        if (out_valid) begin failures++; $display("FAIL valid stuck"); end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
