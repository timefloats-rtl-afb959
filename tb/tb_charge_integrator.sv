// tb_charge_integrator: feeds random charge packets with the integrate
// strobe on and off, checks the running sum, then that `hold` freezes the
// value in the hold cell while `clr` empties the integrator.
module tb_charge_integrator;
  localparam int IN_W = 11, ACC_W = 15;

  logic clk = 1'b0, rst_n = 1'b0, clr = 1'b0, integ = 1'b0, hold = 1'b0;
  logic [IN_W-1:0] charge_in = '0;
  logic [ACC_W-1:0] v_int, v_hold;
  int checks = 0, failures = 0;

  charge_integrator #(.IN_W(IN_W), .ACC_W(ACC_W)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int sum, held;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 30; n++) begin
      @(negedge clk) clr = 1'b1;
      @(negedge clk) clr = 1'b0;
      sum = 0;
      for (int t = 0; t < 17; t++) begin
        charge_in = IN_W'($urandom_range(960));
        integ = ($urandom_range(3) != 0);
        if (integ) sum += int'(charge_in);
        @(negedge clk);
        checks++;
        if (int'(v_int) != sum) begin failures++; $display("FAIL int %0d exp %0d", v_int, sum); end
      end
      integ = 1'b0;
      hold = 1'b1;
      @(negedge clk) begin hold = 1'b0; clr = 1'b1; end
      held = sum;
      @(negedge clk) clr = 1'b0;
      checks += 2;
      if (int'(v_hold) != held) begin failures++; $display("FAIL hold %0d exp %0d", v_hold, held); end
      if (v_int != '0) begin failures++; $display("FAIL clear"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
