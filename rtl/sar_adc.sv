// sar_adc: one column ADC, the SAR register (sar_logic) closed around the
// analog front end (sar_adc_afe), as in the paper's ADC block diagram:
// the SAR code drives the DAC, the comparator output returns to the SAR.
// `start` samples `vin` and begins a conversion; `eoc` marks `d` valid
// BITS+1 clock edges later (one for the sample, BITS for the decisions).
// `busy` of the SAR register is not brought out: the sequencer waits for
// `eoc`. Ports: clk, rst_n, start, vin, vrefp, vrefn (row units), d, eoc.
// The loop of SAR logic, DAC, comparator and S/H follows the paper's ADC
// description; the port set and the one-decision-per-clock timing are this
// design's choices.
module sar_adc
  import imc_pkg::*;
#(
  parameter int unsigned BITS = ADC_BITS
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  input  logic [RW-1:0]   vin,
  input  logic [RW-1:0]   vrefp,
  input  logic [RW-1:0]   vrefn,
  output logic [BITS-1:0] d,
  output logic            eoc
);

  logic sample, cmp, busy;

  sar_logic #(.BITS(BITS)) u_sar (
    .clk, .rst_n, .start, .cmp, .sample, .d, .busy, .eoc
  );

  sar_adc_afe #(.BITS(BITS)) u_afe (
    .clk, .sample, .vin, .vrefp, .vrefn, .dac_code(d), .cmp
  );

endmodule
