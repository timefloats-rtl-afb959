// exp_adder: behavioural model of one mixed-signal exponent adder.
//
// In silicon this is an RC discharge path: the input exponent register
// switches binary-weighted transistors that set resistance R1, the exponent
// memristor W_E of the grounded crossbar row forms R2, the node is
// precharged to VDD and released, and a clocked comparator against VDD/2
// turns the discharge time into a pulse whose width grows linearly with
// I_E + W_E. This model keeps the register and replaces the RC path by a
// down-counter: the pulse rises on the tick after `start` and stays high for
// exactly OFFSET + I_E + W_E ticks. It is synthesizable, but it stands for an
// analog circuit and ignores process variation and the calibration knobs.
//
// The register, the series summation and the pulse output follow the paper;
// the exact one-tick-per-LSB scale and the fixed OFFSET are this model's.
module exp_adder
  import tf_pkg::*;
#(
  parameter int unsigned EW     = E_W,
  parameter int unsigned OFFSET = EXP_PULSE_OFFSET
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          ld,       // load the input exponent register
  input  logic [EW-1:0] ld_exp,
  input  logic [EW-1:0] w_exp,    // W_E of the selected row
  input  logic          start,    // release precharge
  output logic          pulse
);

  localparam int unsigned CW = EW + 2;

  logic [EW-1:0] i_exp;
  logic [CW-1:0] cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      i_exp <= '0;
      cnt   <= '0;
    end else begin
      if (ld) i_exp <= ld_exp;
      if (start)
        cnt <= CW'(OFFSET) + CW'(i_exp) + CW'(w_exp);
      else if (cnt != '0)
        cnt <= cnt - 1'b1;
    end
  end

  assign pulse = (cnt != '0);

endmodule
