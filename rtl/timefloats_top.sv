// timefloats_top: one TimeFloats floating-point scalar-product macro.
//
// An FP8 input vector x (N_IN elements, 4-bit exponent, 4-bit mantissa) is
// multiplied against every row of a weight matrix W (N_ROWS x N_IN FP8
// cells) stored in a memristor crossbar. Each row r yields
//     y_r = sum_i x_i * W_ri
// computed in five steps, all in the time domain except the last:
//   1. exponent adders turn I_E^i + W_E^ri into pulse widths;
//   2. the largest-exponent detector finds the longest pulse (E_max, ID);
//   3. mantissa scalers shift I_M^i right by E_max - (I_E^i + W_E^ri);
//   4. T-DACs turn the scaled mantissas into pulses on the crossbar lines,
//      whose charge integrates on the row lines as sum_i T_i * W_M^ri;
//   5. the held charge of row r goes through the output mux to the shared
//      4-bit SAR ADC, and the code is reformatted with E_max into floating
//      point.
// Rows are processed one after another under tf_controller.
//
// Interface: program the crossbar with `w_prog_*` (one cell per clock),
// load inputs with `x_ld_*` (one element per clock), then pulse `start`.
// Neither port may be used while `busy` is high (asserted).
// For each row, `y_valid` pulses with `y_row`, the result `y`, the ADC code,
// E_max and the index of the largest exponent sum. `done` pulses in the same
// clock as the last row's `y_valid`. A row takes EXP_WIN + MAC_WIN + ADC_BITS + 6 clocks from its
// CLEAR tick to `y_valid`, i.e. ROW_TICKS apart between rows.
// The data path follows the paper; the controller schedule, the program and
// load ports, the E_max counter and the output format are this design's.
module timefloats_top
  import tf_pkg::*;
#(
  parameter int unsigned N_IN   = 64,   // vector length / crossbar cells per row
  parameter int unsigned N_ROWS = 64    // crossbar rows
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // crossbar programming
  input  logic                      w_prog_en,
  input  logic [$clog2(N_ROWS)-1:0] w_prog_row,
  input  logic [$clog2(N_IN)-1:0]   w_prog_col,
  input  fp8_t                      w_prog,
  // input vector load
  input  logic                      x_ld_en,
  input  logic [$clog2(N_IN)-1:0]   x_ld_idx,
  input  fp8_t                      x_ld,
  // run
  input  logic                      start,
  output logic                      busy,
  output logic                      done,
  // results
  output logic                      y_valid,
  output logic [$clog2(N_ROWS)-1:0] y_row,
  output fp_out_t                   y,
  output logic                      y_zero,
  output logic [ADC_BITS-1:0]       y_adc_code,
  output logic [ESUM_W-1:0]         y_emax_sum,
  output logic [$clog2(N_IN)-1:0]   y_emax_id
);

  localparam int unsigned LEVELS    = $clog2(N_IN);
  localparam int unsigned EMAX_W    = EXP_PULSE_OFFSET + 2 * ((1 << E_W) - 1);
  localparam int unsigned EXP_WIN   = EMAX_W + LEVELS + 3;
  localparam int unsigned MAC_WIN   = (1 << M_W) + 1;
  localparam int unsigned CHG_W     = M_W + $clog2(N_IN) + 1;
  localparam int unsigned ACC_W     = 2 * M_W + $clog2(N_IN) + 1;
  localparam int unsigned ADC_SHIFT = ACC_W - 1 - ADC_BITS;
  localparam int unsigned TDC_W     = $clog2(EMAX_W + 1) + 1;

  // controller strobes
  logic                      clr, preload, exp_start, dac_ld, dac_cmd;
  logic                      integ, hold, adc_start, adc_done, adc_busy, fmt_valid;
  logic [$clog2(N_ROWS)-1:0] row_sel;

  // data path nets
  logic [E_W-1:0]   col_w_exp  [N_IN];
  logic [N_IN-1:0]  exp_pulse;
  logic             emax_pulse;
  logic [LEVELS-1:0] emax_id;
  logic [M_W-1:0]   mant_scaled [N_IN];
  logic [N_IN-1:0]  shift_en;
  logic [N_IN-1:0]  dac_pulse;
  logic [CHG_W-1:0] row_charge [N_ROWS];
  logic [ACC_W-1:0] v_int  [N_ROWS];
  logic [ACC_W-1:0] v_hold [N_ROWS];
  logic [ACC_W-1:0] adc_in;
  logic [ADC_BITS-1:0] adc_code;
  logic [TDC_W-1:0] emax_width;
  logic [ESUM_W-1:0] emax_sum;
  logic             fmt_out_valid;
  logic [1:0]       norm_shift;

  tf_controller #(
    .ROWS(N_ROWS), .EXP_WIN(EXP_WIN), .MAC_WIN(MAC_WIN)
  ) u_ctrl (
    .clk, .rst_n, .start, .busy, .done, .row_sel, .clr, .preload,
    .exp_start, .dac_ld, .dac_cmd, .integ, .hold, .adc_start, .adc_done,
    .fmt_valid
  );

  memristor_crossbar #(.ROWS(N_ROWS), .COLS(N_IN)) u_xbar (
    .clk,
    .prog_en   (w_prog_en),
    .prog_row  (w_prog_row),
    .prog_col  (w_prog_col),
    .prog_mant (w_prog.mant),
    .prog_exp  (w_prog.exp),
    .row_sel   (row_sel),
    .col_w_exp (col_w_exp),
    .col_pulse (dac_pulse),
    .row_charge(row_charge)
  );

  for (genvar i = 0; i < N_IN; i++) begin : g_col
    logic ld_i;
    assign ld_i = x_ld_en && (x_ld_idx == ($clog2(N_IN))'(i));

    exp_adder u_eadd (
      .clk, .rst_n,
      .ld     (ld_i),
      .ld_exp (x_ld.exp),
      .w_exp  (col_w_exp[i]),
      .start  (exp_start),
      .pulse  (exp_pulse[i])
    );

    mantissa_scaler #(.DELAY(LEVELS)) u_scale (
      .clk, .rst_n,
      .ld          (ld_i),
      .ld_mant     (x_ld.mant),
      .preload     (preload),
      .exp_pulse   (exp_pulse[i]),
      .emax_pulse  (emax_pulse),
      .shift_en    (shift_en[i]),
      .mant_scaled (mant_scaled[i])
    );

    time_dac u_tdac (
      .clk, .rst_n,
      .ld      (dac_ld),
      .ld_code (mant_scaled[i]),
      .cmd     (dac_cmd),
      .pulse   (dac_pulse[i])
    );
  end

  largest_exp_detector #(.N(N_IN)) u_det (
    .clk, .rst_n, .clr,
    .pulse     (exp_pulse),
    .max_pulse (emax_pulse),
    .id        (emax_id)
  );

  pulse_tdc #(.W(TDC_W)) u_tdc (
    .clk, .rst_n, .clr,
    .pulse (emax_pulse),
    .width (emax_width)
  );

  assign emax_sum = ESUM_W'(emax_width - TDC_W'(EXP_PULSE_OFFSET));

  for (genvar r = 0; r < N_ROWS; r++) begin : g_row
    charge_integrator #(.IN_W(CHG_W), .ACC_W(ACC_W)) u_int (
      .clk, .rst_n, .clr,
      .integ     (integ),
      .charge_in (row_charge[r]),
      .hold      (hold),
      .v_int     (v_int[r]),
      .v_hold    (v_hold[r])
    );
  end

  analog_mux #(.N(N_ROWS), .W(ACC_W)) u_mux (
    .vin  (v_hold),
    .sel  (row_sel),
    .vout (adc_in)
  );

  sar_adc #(.BITS(ADC_BITS), .IN_W(ACC_W), .SHIFT(ADC_SHIFT)) u_adc (
    .clk, .rst_n,
    .start (adc_start),
    .vin   (adc_in),
    .busy  (adc_busy),
    .done  (adc_done),
    .code  (adc_code)
  );

  fp_reformatter #(.ADC_SHIFT(ADC_SHIFT)) u_fmt (
    .clk, .rst_n,
    .in_valid   (fmt_valid),
    .code       (adc_code),
    .emax_sum   (emax_sum),
    .out_valid  (fmt_out_valid),
    .result     (y),
    .is_zero    (y_zero),
    .norm_shift (norm_shift)
  );

  // Side information captured with the row's result.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      y_row      <= '0;
      y_adc_code <= '0;
      y_emax_sum <= '0;
      y_emax_id  <= '0;
    end else if (fmt_valid) begin
      y_row      <= row_sel;
      y_adc_code <= adc_code;
      y_emax_sum <= emax_sum;
      y_emax_id  <= emax_id;
    end
  end

  assign y_valid = fmt_out_valid;

  // Operands must not change while rows are being processed: the input
  // registers and the crossbar are read throughout a run.
  a_no_load_while_busy: assert property (
    @(posedge clk) disable iff (!rst_n) busy |-> !(w_prog_en || x_ld_en))
    else $error("weights or inputs written during a run");

endmodule
