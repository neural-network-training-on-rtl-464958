// nmc_datapath: near-memory-computing datapath behind the column ADCs. It
// turns the 8-bit column codes of each serial IMC operation into signed
// partial inner products, weights them by the input bit position, sums them
// over the serial operations, and finally combines the columns that hold
// the bits of one stored element into one output.
//
// Per column c and serial step (when `acc_en` is high):
//   pop   = code[c] * gain                  (row units, FRAC_BITS fraction)
//   part  = 2*pop - ROWS*2^F + n_masked*2^F (+/-1 inner product: the masked
//           rows, counted as -1 by the array, are offset back out)
//   acc_c += part << shift                  (shift = input-bit weight)
// `clr` zeroes the accumulators at the start of a run.
//
// Reconstruction (bit-parallel columns): on `rd_en` for output k the
// datapath returns, one cycle later on rd_data with rd_valid,
//   out_k = sum_{j < cim_bits} acc_(k*cim_bits + j) << pm1_shift(j)
// i.e. the stored element's bits read in the +/-1 format of imc_pkg.
// The result is a fixed-point number: the exact MVM output times
// 2^FRAC_BITS * 2 (stored +/-1 word, doubled) * S_in, where S_in = 2 for
// +/-1 inputs (doubled weights) and 64 for radix-4 inputs (4^(e-3) scaled
// by 4^3). Scaling to a training-layer format is left to the host.
//
// From the paper: offset by the masked-row count, scaling by the ADC range,
// binary weighting and summation across serial and parallel bits, radix-4
// weighting of the exponent steps. This design's choices: the fixed-point
// format, accumulator widths and the one-output-per-cycle read-out.
module nmc_datapath
  import imc_pkg::*;
#(
  parameter int unsigned N_ROWS = ROWS,
  parameter int unsigned N_COLS = COLS
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       clr,
  input  logic                       acc_en,
  input  logic [ADC_BITS-1:0]        code [N_COLS],
  input  logic [RW:0]                gain,
  input  logic [RW-1:0]              n_masked,
  input  logic [3:0]                 shift,
  input  logic [3:0]                 cim_bits,
  input  logic                       rd_en,
  input  logic [8:0]                 rd_idx,
  output logic                       rd_valid,
  output logic signed [OUT_W-1:0]    rd_data
);

  logic signed [ACC_W-1:0] acc [N_COLS];

  // offset common to all columns: (n_masked - ROWS) * 2^F
  logic signed [ACC_W-1:0] offset;
  assign offset = (ACC_W'(signed'({1'b0, n_masked})) - ACC_W'(N_ROWS)) <<< FRAC_BITS;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int c = 0; c < N_COLS; c++) acc[c] <= '0;
    end else if (clr) begin
      for (int c = 0; c < N_COLS; c++) acc[c] <= '0;
    end else if (acc_en) begin
      for (int c = 0; c < N_COLS; c++) begin
        logic signed [ACC_W-1:0] pop, part;
        pop  = ACC_W'(code[c]) * ACC_W'(gain);
        part = (pop <<< 1) + offset;
        acc[c] <= acc[c] + (part <<< shift);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_valid <= 1'b0;
      rd_data  <= '0;
    end else begin
      rd_valid <= rd_en;
      if (rd_en) begin
        logic signed [OUT_W-1:0] s;
        s = '0;
        for (int j = 0; j < 8; j++) begin
          int col;
          col = int'(rd_idx) * int'(cim_bits) + j;
          if (j < int'(cim_bits) && col < N_COLS)
            s += OUT_W'(acc[col]) <<< pm1_shift(4'(j));
        end
        rd_data <= s;
      end
    end
  end

endmodule
