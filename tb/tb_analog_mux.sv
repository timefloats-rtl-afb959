// tb_analog_mux: random input voltages, every select value, output must be
// the selected input.
module tb_analog_mux;
  localparam int N = 64, W = 15;

  logic [W-1:0] vin [N];
  logic [$clog2(N)-1:0] sel;
  logic [W-1:0] vout;
  int checks = 0, failures = 0;

  analog_mux #(.N(N), .W(W)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 10; n++) begin
      for (int i = 0; i < N; i++) vin[i] = W'($urandom);
      for (int s = 0; s < N; s++) begin
        sel = s[$clog2(N)-1:0];
        #1;
        checks++;
        if (vout != vin[s]) begin failures++; $display("FAIL sel %0d", s); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
