// sar_logic: successive-approximation register of the column ADC.
//
// A conversion starts with a one-cycle `start` pulse, which is also the
// sample command for the sample-and-hold. The register then holds a trial
// code with only the MSB set; the DAC turns it into a voltage and the
// comparator reports `cmp` = 1 when the held input is not below it. On each
// following clock the bit under test is kept if cmp = 1 and cleared
// otherwise, and the next lower bit is set to one. After the LSB has been
// decided (BITS clocks after `start`) `eoc` is high for one cycle and `d`
// holds the result until the next start. `busy` is high while deciding.
//
// From the paper: MSB-first trial, keep/clear rule, EOC. This design's own
// choices: one bit decided per clock, the single-cycle EOC pulse, and that
// a start during a conversion restarts it.
module sar_logic #(
  parameter int unsigned BITS = 8
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  input  logic            cmp,
  output logic            sample,
  output logic [BITS-1:0] d,
  output logic            busy,
  output logic            eoc
);

  localparam int unsigned IW = (BITS > 1) ? $clog2(BITS) : 1;

  logic [IW-1:0] idx;

  assign sample = start;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      d    <= '0;
      idx  <= '0;
      busy <= 1'b0;
      eoc  <= 1'b0;
    end else begin
      eoc <= 1'b0;
      if (start) begin
        d             <= '0;
        d[BITS-1]     <= 1'b1;
        idx           <= IW'(BITS - 1);
        busy          <= 1'b1;
      end else if (busy) begin
        if (!cmp) d[idx] <= 1'b0;
        if (idx == '0) begin
          busy <= 1'b0;
          eoc  <= 1'b1;
        end else begin
          d[idx - 1'b1] <= 1'b1;
          idx           <= idx - 1'b1;
        end
      end
    end
  end

endmodule
