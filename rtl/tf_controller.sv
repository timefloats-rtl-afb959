// tf_controller: row select and step sequencer of the TimeFloats macro.
//
// After `start` it processes rows 0 .. ROWS-1 one at a time, since the
// mantissa scaling of a row depends on that row's weight exponents. For
// each row it drives `row_sel` (the grounded row) and walks the paper's five
// steps:
//   CLEAR  1 tick       clear detector, E_max counter and integrators;
//                       preload the input mantissas into the shift registers
//   EXP    EXP_WIN      `exp_start` on the first tick: exponent adders fire,
//                       the detector finds E_max, the scalers shift
//   LOAD   1 tick       scaled mantissas into the T-DAC registers
//   MAC    MAC_WIN      `dac_cmd` on the first tick, `integ` throughout
//   HOLD   1 tick       integrators into the hold cells
//   ADC    BITS+2       `adc_start` on the first tick, wait for `adc_done`
//   FMT    1 tick       `fmt_valid`: reformat the code into floating point
// A row therefore takes EXP_WIN + MAC_WIN + ADC_BITS + 6 ticks with the
// sar_adc timing. `done`
// pulses after the last row; `start` is ignored while busy. The paper names
// the row select and gives the step order; this schedule, its windows and
// the strobes are this design's.
module tf_controller #(
  parameter int unsigned ROWS    = 64,
  parameter int unsigned EXP_WIN = 40,
  parameter int unsigned MAC_WIN = 17
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    start,
  output logic                    busy,
  output logic                    done,
  output logic [$clog2(ROWS)-1:0] row_sel,
  output logic                    clr,       // detector / TDC / integrators
  output logic                    preload,   // mantissa shift registers
  output logic                    exp_start,
  output logic                    dac_ld,
  output logic                    dac_cmd,
  output logic                    integ,
  output logic                    hold,
  output logic                    adc_start,
  input  logic                    adc_done,
  output logic                    fmt_valid
);

  typedef enum logic [2:0] {
    S_IDLE, S_CLEAR, S_EXP, S_LOAD, S_MAC, S_HOLD, S_ADC, S_FMT
  } state_t;

  localparam int unsigned TW = $clog2((EXP_WIN > MAC_WIN ? EXP_WIN : MAC_WIN) + 1);

  state_t        state;
  logic [TW-1:0] t;        // ticks spent in the current state
  logic          first;

  assign first = (t == '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      t       <= '0;
      row_sel <= '0;
      done    <= 1'b0;
    end else begin
      done <= 1'b0;
      t    <= t + 1'b1;
      unique case (state)
        S_IDLE:  begin
          t <= '0;
          if (start) begin
            row_sel <= '0;
            state   <= S_CLEAR;
          end
        end
        S_CLEAR: begin t <= '0; state <= S_EXP; end
        S_EXP:   if (t == TW'(EXP_WIN - 1)) begin t <= '0; state <= S_LOAD; end
        S_LOAD:  begin t <= '0; state <= S_MAC; end
        S_MAC:   if (t == TW'(MAC_WIN - 1)) begin t <= '0; state <= S_HOLD; end
        S_HOLD:  begin t <= '0; state <= S_ADC; end
        S_ADC:   if (adc_done) begin t <= '0; state <= S_FMT; end
        S_FMT:   begin
          t <= '0;
          if (row_sel == ($clog2(ROWS))'(ROWS - 1)) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end else begin
            row_sel <= row_sel + 1'b1;
            state   <= S_CLEAR;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  always_comb begin
    busy      = (state != S_IDLE);
    clr       = (state == S_CLEAR);
    preload   = (state == S_CLEAR);
    exp_start = (state == S_EXP) && first;
    dac_ld    = (state == S_LOAD);
    dac_cmd   = (state == S_MAC) && first;
    integ     = (state == S_MAC);
    hold      = (state == S_HOLD);
    adc_start = (state == S_ADC) && first;
    fmt_valid = (state == S_FMT);
  end

  // The ADC may only answer during the ADC phase.
  a_adc_done_in_adc: assert property (
    @(posedge clk) disable iff (!rst_n) adc_done |-> state == S_ADC)
    else $error("adc_done outside the ADC phase");

endmodule
