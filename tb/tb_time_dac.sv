// tb_time_dac: loads every 4-bit code several times and checks that after
// `cmd` the pulse rises on the next tick and lasts exactly `code` ticks
// (no pulse for 0, 15 ticks at most), and that the register keeps its code
// for a second command.
module tb_time_dac;
  import tf_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0, ld = 1'b0, cmd = 1'b0;
  logic [M_W-1:0] ld_code = '0;
  logic pulse;
  int checks = 0, failures = 0;

  time_dac dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic fire(input int code);
    int width, rise;
    @(negedge clk) cmd = 1'b1;
    @(negedge clk) cmd = 1'b0;
    width = 0; rise = -1;
    for (int t = 0; t < 24; t++) begin
      if (pulse) begin
        if (rise < 0) rise = t;
        width++;
      end
      @(negedge clk);
    end
    checks++;
    if (width != code || (code != 0 && rise != 0) || width > 15) begin
      failures++; $display("FAIL code %0d width %0d rise %0d", code, width, rise);
    end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 48; n++) begin
      int c;
      c = (n < 16) ? n : $urandom_range(15);
      @(negedge clk) begin ld = 1'b1; ld_code = M_W'(c); end
      @(negedge clk) ld = 1'b0;
      fire(c);
      fire(c);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
