// adc: BEHAVIOURAL MODEL of one of the APU's ADCs (the paper gives 16 per
// APU with 6-bit sampling precision). It converts the held column value
// (the column current in units of one cell level) into an ADC_BITS code.
// Values above the full-scale code saturate at 2^ADC_BITS-1, as a real
// converter clips. The conversion is combinational here; the APU controller
// gives each conversion one clock cycle.
module adc #(
  parameter int ADC_BITS = 6
) (
  input  logic [8:0]          ain,
  output logic [ADC_BITS-1:0] code
);
  localparam int FULL = (1 << ADC_BITS) - 1;
  always_comb
    code = (int'(ain) > FULL) ? ADC_BITS'(FULL) : ADC_BITS'(ain);
endmodule
