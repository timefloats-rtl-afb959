// tb_sar_adc: converts random and edge-case inputs and checks the code
// against floor(vin / 2^SHIFT) clipped to 15, and that `done` comes
// BITS + 1 clocks after `start`.
module tb_sar_adc;
  localparam int BITS = 4, IN_W = 15, SHIFT = 10;

  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  logic [IN_W-1:0] vin = '0;
  logic busy, done;
  logic [BITS-1:0] code;
  int checks = 0, failures = 0;

  sar_adc #(.BITS(BITS), .IN_W(IN_W), .SHIFT(SHIFT)) dut (.*);

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
    for (int n = 0; n < 200; n++) begin
      int v, expc, lat;
      v = $urandom_range((1 << IN_W) - 1);
      if (n < 16) v = n << SHIFT;                    // every code boundary
      if (n >= 16 && n < 32) v = ((n - 16) << SHIFT) - 1;
      if (v < 0) v = 0;
      vin = IN_W'(v);
      expc = v >> SHIFT;
      if (expc > 15) expc = 15;
      @(negedge clk) start = 1'b1;
      @(negedge clk) start = 1'b0;
      vin = IN_W'($urandom);          // input may move after sampling
      lat = 1;
      while (!done && lat < 20) begin @(negedge clk); lat++; end
      checks += 2;
      if (int'(code) != expc) begin failures++; $display("FAIL v=%0d code %0d exp %0d", v, code, expc); end
      if (lat != BITS + 1) begin failures++; $display("FAIL latency %0d", lat); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
