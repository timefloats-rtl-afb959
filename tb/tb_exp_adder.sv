// tb_exp_adder: checks that the exponent adder model emits, for random
// input and weight exponents, one pulse that rises on the tick after
// `start` and lasts OFFSET + I_E + W_E ticks, and that the input exponent
// register holds its value across several starts.
module tb_exp_adder;
  import tf_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  logic ld = 1'b0, start = 1'b0;
  logic [E_W-1:0] ld_exp = '0, w_exp = '0;
  logic pulse;
  int checks = 0, failures = 0;

  exp_adder dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic fire(input int ie, input int we);
    int width, rise;
    w_exp = E_W'(we);
    @(negedge clk) start = 1'b1;
    @(negedge clk) start = 1'b0;
    rise = -1; width = 0;
    for (int t = 0; t < 60; t++) begin
      if (pulse) begin
        if (rise < 0) rise = t;
        width++;
      end
      @(negedge clk);
    end
    checks++;
    if (width != int'(EXP_PULSE_OFFSET) + ie + we || rise != 0) begin
      failures++;
      $display("FAIL ie=%0d we=%0d width=%0d rise=%0d", ie, we, width, rise);
    end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 40; n++) begin
      int ie;
      ie = $urandom_range(15);
      @(negedge clk) begin ld = 1'b1; ld_exp = E_W'(ie); end
      @(negedge clk) ld = 1'b0;
      fire(ie, $urandom_range(15));
      fire(ie, (n % 2) ? 15 : 0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
