// time_dac: time-domain digital DAC (T-DAC) for one crossbar input line.
//
// A register holds the code; `cmd` starts an N-bit counter; a comparator
// between the count and the register keeps the output high until they are
// equal, and that same output stops the counter. The pulse therefore rises
// on the tick after `cmd` and lasts exactly `code` ticks (0 gives no pulse),
// 15 ticks at most for a 4-bit code, which is the paper's 15 ns maximum at a
// 1 ns tick. The counter/comparator/register structure follows the paper's
// T-DAC; the load strobe is this design's.
module time_dac
  import tf_pkg::*;
#(
  parameter int unsigned MW = M_W
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          ld,       // load the code register
  input  logic [MW-1:0] ld_code,
  input  logic          cmd,      // start the pulse
  output logic          pulse
);

  logic [MW-1:0] code;
  logic [MW-1:0] count;
  logic          running;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      code    <= '0;
      count   <= '0;
      running <= 1'b0;
    end else begin
      if (ld) code <= ld_code;
      if (cmd) begin
        count   <= '0;
        running <= (code != '0);
      end else if (running) begin
        count   <= count + 1'b1;
        if (count + 1'b1 == code) running <= 1'b0;
      end
    end
  end

  assign pulse = running;

endmodule
