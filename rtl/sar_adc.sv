// sar_adc: behavioural model of the shared successive-approximation ADC.
//
// `start` samples `vin` and runs BITS compare steps, MSB first, one per
// clock: the trial code with the next bit set is turned into a threshold
// by the (ideal) capacitive DAC, trial << SHIFT, and the comparator keeps
// the bit when vin reaches it. After BITS cycles `done` pulses and `code`
// holds min(floor(vin / 2^SHIFT), 2^BITS - 1). The SAR register and bit loop
// are logic; the comparator and DAC stand for analog parts. The 4-bit
// resolution is the paper's; SHIFT sets the full scale (2^(BITS+SHIFT)) and
// is this design's choice, wide enough for the largest 64-term sum.
module sar_adc #(
  parameter int unsigned BITS  = 4,
  parameter int unsigned IN_W  = 15,
  parameter int unsigned SHIFT = 10
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  input  logic [IN_W-1:0] vin,
  output logic            busy,
  output logic            done,
  output logic [BITS-1:0] code
);

  localparam int unsigned TW = BITS + SHIFT + 1;

  logic [IN_W-1:0]         sample;
  logic [BITS-1:0]         trial_bit;   // one-hot bit under test
  logic [BITS-1:0]         trial;
  logic [TW-1:0]           threshold;

  assign trial     = code | trial_bit;
  assign threshold = TW'(trial) << SHIFT;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sample    <= '0;
      trial_bit <= '0;
      code      <= '0;
      busy      <= 1'b0;
      done      <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        sample    <= vin;
        code      <= '0;
        trial_bit <= BITS'(1) << (BITS - 1);
        busy      <= 1'b1;
      end else if (busy) begin
        if ((TW + IN_W)'(sample) >= (TW + IN_W)'(threshold)) code <= trial;
        trial_bit <= trial_bit >> 1;
        if (trial_bit[0]) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

  // A new conversion may only be requested when the previous one is over.
  a_start_when_idle: assert property (
    @(posedge clk) disable iff (!rst_n) start |-> !busy)
    else $error("ADC start while busy");

endmodule
