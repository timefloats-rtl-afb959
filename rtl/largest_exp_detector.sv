// largest_exp_detector: finds the longest of N exponent-sum pulses.
//
// A binary tree of pulse_max_cell nodes (D flip-flop plus 2:1 mux) passes
// the longest pulse to its root, so the output `max_pulse` is as wide as the
// largest exponent sum E_max and starts LEVELS ticks after the inputs, one
// tick per tree level. Node j (heap order, root 1, leaves N..2N-1 carry
// pulse[j-N]) takes its higher-numbered child on the D pin and its lower one
// on the clock pin, as the figure of the paper numbers its inputs (7 on D,
// 6 on clock). The index of the winner is read from the select bits as in
// the paper: the root select is the ID MSB, and each lower bit is the select
// of the winning node one level down, picked by the bits above it (the
// paper's 2:1 and 4:1 "ID" muxes, generalised to N inputs). Ties go to the
// lower index. `clr` must be pulsed before each search. `id` is valid once
// the output pulse has ended.
module largest_exp_detector #(
  parameter int unsigned N = 64   // power of two
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 clr,
  input  logic [N-1:0]         pulse,
  output logic                 max_pulse,
  output logic [$clog2(N)-1:0] id
);

  localparam int unsigned LEVELS = $clog2(N);

  logic [2*N-1:0] node;   // node[1] root ... node[N+i] leaf i
  logic [N-1:0]   sel;    // sel[j] for internal node j (sel[0] unused)

  assign node[2*N-1:N] = pulse;
  assign node[0]       = 1'b0;
  assign sel[0]        = 1'b0;

  for (genvar j = 1; j < N; j++) begin : g_node
    pulse_max_cell u_cell (
      .clk   (clk),
      .rst_n (rst_n),
      .clr   (clr),
      .a     (node[2*j+1]),
      .b     (node[2*j]),
      .y     (node[j]),
      .sel   (sel[j])
    );
  end

  assign max_pulse = node[1];

  // Walk down from the root along the select bits.
  always_comb begin
    int unsigned j;
    j = 1;
    for (int l = 0; l < int'(LEVELS); l++) begin
      j = 2 * j + int'(sel[j]);
    end
    id = LEVELS'(j - N);
  end

endmodule
