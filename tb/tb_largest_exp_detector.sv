// tb_largest_exp_detector: drives N pulses that rise together with random
// widths (including forced ties) and checks that the output pulse is as wide
// as the widest input, starts LEVELS ticks after the inputs, and that `id`
// names the lowest-numbered input of maximal width.
module tb_largest_exp_detector;
  localparam int N      = 64;
  localparam int LEVELS = $clog2(N);

  logic clk = 1'b0, rst_n = 1'b0, clr = 1'b0;
  logic [N-1:0] pulse = '0;
  logic max_pulse;
  logic [LEVELS-1:0] id;
  int checks = 0, failures = 0;

  largest_exp_detector #(.N(N)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int w [N];

  task automatic search(input int mode);
    int wmax, idx, width, rise;
    wmax = 0; idx = 0;
    for (int i = 0; i < N; i++) begin
      w[i] = 1 + $urandom_range(30);
      if (mode == 1) w[i] = 1 + $urandom_range(3);      // many ties
      if (mode == 2) w[i] = (i == N - 1) ? 31 : 1 + $urandom_range(29);
    end
    for (int i = 0; i < N; i++) if (w[i] > wmax) begin wmax = w[i]; idx = i; end
    @(negedge clk) clr = 1'b1;
    @(negedge clk) clr = 1'b0;
    rise = -1; width = 0;
    for (int t = 0; t < 50; t++) begin
      for (int i = 0; i < N; i++) pulse[i] = (t < w[i]);
      @(posedge clk);
      #1;
      if (max_pulse) begin
        if (rise < 0) rise = t;
        width++;
      end
      @(negedge clk);
    end
    checks += 3;
    if (width != wmax) begin failures++; $display("FAIL width %0d exp %0d", width, wmax); end
    if (rise != LEVELS - 1) begin failures++; $display("FAIL rise %0d", rise); end
    if (int'(id) != idx) begin failures++; $display("FAIL id %0d exp %0d", id, idx); end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 60; n++) search(n % 3);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
