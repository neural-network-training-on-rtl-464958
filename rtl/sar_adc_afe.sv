// sar_adc_afe: behavioural model of the analog front end of a column SAR
// ADC: sample-and-hold, capacitive DAC and comparator. Not synthesizable
// as an analog circuit; it models the ideal transfer with integers.
//
// Voltages are in row units (see imc_pkg). On `sample` the S/H captures
// `vin`. The DAC output for code d is VRef,n + d * (VRef,p - VRef,n) / 255,
// and `cmp` is 1 when the held voltage is not below it. Comparing
// 255 * (v - VRef,n) >= d * (VRef,p - VRef,n) keeps the model exact, so
// that a SAR search yields the paper's quantizer
//     code = min(255, floor(255 * (v - VRef,n) / (VRef,p - VRef,n)))
// with clipping at 0 and 255. `cmp` is combinational from the held value
// and the present code. Analog noise (the paper's additive input noise)
// is not modelled.
module sar_adc_afe
  import imc_pkg::*;
#(
  parameter int unsigned BITS = ADC_BITS
) (
  input  logic            clk,
  input  logic            sample,
  input  logic [RW-1:0]   vin,
  input  logic [RW-1:0]   vrefp,
  input  logic [RW-1:0]   vrefn,
  input  logic [BITS-1:0] dac_code,
  output logic            cmp
);

  localparam int unsigned FS = (1 << BITS) - 1;

  logic [RW-1:0] hold;

  always_ff @(posedge clk) begin
    if (sample) hold <= vin;
  end

  logic [RW-1:0] span, above;
  logic [31:0]   lhs, rhs;

  always_comb begin
    span  = (vrefp > vrefn) ? vrefp - vrefn : RW'(1);
    above = (hold > vrefn) ? hold - vrefn : '0;
    lhs   = 32'(FS) * 32'(above);
    rhs   = 32'(dac_code) * 32'(span);
    cmp   = (lhs >= rhs);
  end

endmodule
