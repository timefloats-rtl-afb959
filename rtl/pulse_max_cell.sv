// pulse_max_cell: one node of the largest-exponent detector tree.
//
// Two pulses that rise together enter: `a` on the flip-flop's D pin and `b`
// on its clock pin. At the falling edge of `b` the flip-flop samples `a`: a
// one means `a` is still high, so `a` is the longer pulse. The flip-flop
// output drives the select of a 2:1 mux (I0 = b, I1 = a), so the mux output
// first follows `b` and, if `a` outlasts it, continues as `a`: its width is
// the larger of the two. The node is modelled on the time-base clock: the
// falling edge of `b` is seen as b_q & ~b, the select used in that same tick
// already includes the sampled value so the output does not dip, and the
// output is registered, which stands for the cell's propagation delay of one
// tick. Equal widths select `b`. `clr` clears the select before a new search.
// The cell structure follows the paper; the one-tick delay is this model's.
module pulse_max_cell (
  input  logic clk,
  input  logic rst_n,
  input  logic clr,
  input  logic a,      // D input
  input  logic b,      // clock input
  output logic y,      // longer pulse, one tick later
  output logic sel     // flip-flop output: 1 when a was longer
);

  logic b_q;
  logic sel_now;

  assign sel_now = sel | (b_q & ~b & a);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      b_q <= 1'b0;
      sel <= 1'b0;
      y   <= 1'b0;
    end else if (clr) begin
      b_q <= 1'b0;
      sel <= 1'b0;
      y   <= 1'b0;
    end else begin
      b_q <= b;
      if (b_q && !b) sel <= a;
      y <= sel_now ? a : b;
    end
  end

endmodule
