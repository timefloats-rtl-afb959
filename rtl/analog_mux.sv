// analog_mux: behavioural model of the output multiplexer that routes one of
// the N held row voltages to the single shared ADC. Voltages are carried as
// unsigned numbers of width W; `sel` picks the input, combinationally. The
// paper shares one ADC among all lines through this mux; the encoding of
// the select is this design's.
module analog_mux #(
  parameter int unsigned N = 64,
  parameter int unsigned W = 15
) (
  input  logic [W-1:0]         vin [N],
  input  logic [$clog2(N)-1:0] sel,
  output logic [W-1:0]         vout
);

  assign vout = vin[sel];

endmodule
