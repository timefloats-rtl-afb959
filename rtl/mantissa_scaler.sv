// mantissa_scaler: time-domain exponent normalisation for one element.
//
// Holds the element's input mantissa I_M. Before each search `preload`
// copies it into a shift register. The element's exponent-sum pulse then
// passes a delay line of DELAY ticks (the paper's inverter chain, matched to
// the detector's latency, so both pulses rise together) and is XORed with
// the largest-exponent pulse. The XOR output is high for E_max - E_i ticks
// and enables the shift register, which shifts right by one place per tick.
// The result is I_M / 2^(E_max - E_i), truncated; a difference of M_W or
// more leaves zero. `mant_scaled` is final once the largest pulse has ended.
// Structure and function follow the paper; the separate holding register
// (so that the mantissa survives from row to row) is this design's.
module mantissa_scaler
  import tf_pkg::*;
#(
  parameter int unsigned MW    = M_W,
  parameter int unsigned DELAY = 6    // = detector tree levels
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          ld,          // load input mantissa register
  input  logic [MW-1:0] ld_mant,
  input  logic          preload,     // copy mantissa into shift register
  input  logic          exp_pulse,   // this element's exponent-sum pulse
  input  logic          emax_pulse,  // largest-exponent pulse from detector
  output logic          shift_en,    // XOR output
  output logic [MW-1:0] mant_scaled
);

  logic [MW-1:0]    i_mant;
  logic [DELAY-1:0] chain;
  logic             exp_delayed;

  assign exp_delayed = chain[DELAY-1];
  assign shift_en    = exp_delayed ^ emax_pulse;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      i_mant      <= '0;
      chain       <= '0;
      mant_scaled <= '0;
    end else begin
      if (ld) i_mant <= ld_mant;
      chain <= DELAY'({chain, exp_pulse});
      if (preload)       mant_scaled <= i_mant;
      else if (shift_en) mant_scaled <= mant_scaled >> 1;
    end
  end

endmodule
