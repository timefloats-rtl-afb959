// pulse_tdc: time-to-digital counter. Counts the ticks during which `pulse`
// is high since the last `clr`, giving the width of the largest-exponent
// pulse as a number. The paper does not say how E_max reaches the digital
// reformatter; counting its pulse is this design's choice. `width` saturates
// at its maximum.
module pulse_tdc #(
  parameter int unsigned W = 6
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         clr,
  input  logic         pulse,
  output logic [W-1:0] width
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                    width <= '0;
    else if (clr)                  width <= '0;
    else if (pulse && ~&width)     width <= width + 1'b1;
  end

endmodule
