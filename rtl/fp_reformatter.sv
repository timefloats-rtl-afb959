// fp_reformatter: turns the digitised product-sum into floating point.
//
// Inputs are the ADC code D (ADC_BITS bits, D ~ P_sum / 2^ADC_SHIFT) and the
// largest exponent sum E_max = max_i(I_E^i + W_E^i) of the row. The value of
// the scalar product is D * 2^(ADC_SHIFT + E_max - 2*EXP_BIAS). The block
// normalises D so that its MSB is one (shift left by the leading-zero count
// lz) and emits
//     mant = D << lz,   exp = E_max + ADC_SHIFT - lz - 2*EXP_BIAS + OUT_BIAS
// saturated to the output exponent range. D = 0 gives mant = 0, exp = 0
// and `is_zero`. Registered: `out_valid` follows `in_valid` by one clock.
// The paper says only that the digitised data are reformatted to floating
// point; the encoding above is this design's.
module fp_reformatter
  import tf_pkg::*;
#(
  parameter int unsigned ADC_SHIFT = 10
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  input  logic [ADC_BITS-1:0] code,
  input  logic [ESUM_W-1:0]   emax_sum,
  output logic                out_valid,
  output fp_out_t             result,
  output logic                is_zero,
  output logic [1:0]          norm_shift   // leading zeros removed
);

  localparam int EXP_MAX = (1 << OUT_E_W) - 1;

  logic [ADC_BITS-1:0] mant_n;
  logic [1:0]          lz;
  int                  e;

  always_comb begin
    lz     = '0;
    mant_n = code;
    for (int k = 0; k < int'(ADC_BITS) - 1; k++) begin
      if (!mant_n[ADC_BITS-1]) begin
        mant_n = mant_n << 1;
        lz     = lz + 1'b1;
      end
    end
    e = int'(emax_sum) + int'(ADC_SHIFT) - int'(lz) - 2 * int'(EXP_BIAS) + int'(OUT_BIAS);
    if (e < 0)       e = 0;
    if (e > EXP_MAX) e = EXP_MAX;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid  <= 1'b0;
      result     <= '0;
      is_zero    <= 1'b0;
      norm_shift <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        if (code == '0) begin
          result     <= '0;
          is_zero    <= 1'b1;
          norm_shift <= '0;
        end else begin
          result.mant <= mant_n;
          result.exp  <= OUT_E_W'(e);
          is_zero     <= 1'b0;
          norm_shift  <= lz;
        end
      end
    end
  end

endmodule
