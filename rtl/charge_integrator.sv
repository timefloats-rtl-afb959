// charge_integrator: behavioural model of one row's charge accumulator and
// voltage hold cell.
//
// The op-amp with feedback capacitor C_int integrates the row-line charge:
// while `integ` is high the model adds `charge_in` to its value every tick,
// so after a MAC phase it holds sum_i T_i * g_i. `clr` discharges the
// capacitor. `hold` copies the integrator value into the hold cell, which
// keeps it for the ADC while the integrator is cleared for the next row.
// The value is an ideal, unbounded-within-ACC_W number: op-amp gain, leakage
// and droop of the hold cell are not modelled. Function from the paper;
// control strobes are this design's.
module charge_integrator #(
  parameter int unsigned IN_W  = 11,
  parameter int unsigned ACC_W = 15
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clr,
  input  logic             integ,
  input  logic [IN_W-1:0]  charge_in,
  input  logic             hold,
  output logic [ACC_W-1:0] v_int,
  output logic [ACC_W-1:0] v_hold
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v_int  <= '0;
      v_hold <= '0;
    end else begin
      if (clr)        v_int <= '0;
      else if (integ) v_int <= v_int + ACC_W'(charge_in);
      if (hold) v_hold <= v_int;
    end
  end

endmodule
