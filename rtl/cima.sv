// cima: behavioural model of the compute-in-memory array (CIMA), a
// 2304-row by 256-column SRAM bit-cell array with charge-domain compute.
// The real part is a mixed-signal macro (bit cells, compute capacitors,
// column charge sharing); this model reproduces its ideal function with
// integer arithmetic and is not meant for synthesis as an array macro.
//
// Storage: written as 32-bit doublewords, row `wr_row`, doubleword
// `wr_word`; bit j of the doubleword is the cell in column 32*wr_word + j.
// A conventional read port returns one doubleword a cycle after `rd_en`.
//
// Compute: on `compute`, every column c produces the voltage, in row units,
// of its shorted capacitors: the number of active rows r whose stored bit
// equals the row input drive[r] (XNOR = 1 counts as +1 in the +/-1 domain).
// A masked row (active[r] = 0) performs no XNOR and leaves its capacitor at
// 0, which the near-memory datapath later corrects with a digital offset.
// The column voltages col_v are valid the cycle after `compute` and stay
// until the next one, like a sampled column line.
//
// From the paper: 2304 x 256 size, XNOR bit-cell multiply, column
// accumulation, row masking, doubleword loading. This model's own choices:
// the masked-row level (0), the row-unit voltage scale and the timing.
module cima
  import imc_pkg::*;
#(
  parameter int unsigned N_ROWS = ROWS,
  parameter int unsigned N_COLS = COLS
) (
  input  logic                 clk,
  // doubleword write / read
  input  logic                 wr_en,
  input  logic [RW-1:0]        wr_row,
  input  logic [3:0]           wr_word,
  input  logic [WORD_BITS-1:0] wr_data,
  input  logic                 rd_en,
  input  logic [RW-1:0]        rd_row,
  input  logic [3:0]           rd_word,
  output logic [WORD_BITS-1:0] rd_data,
  // in-memory compute
  input  logic                 compute,
  input  logic [N_ROWS-1:0]    drive,
  input  logic [N_ROWS-1:0]    active,
  output logic [RW-1:0]        col_v [N_COLS]
);

  localparam int unsigned N_WORDS = (N_COLS + WORD_BITS - 1) / WORD_BITS;
  localparam int unsigned AW      = (N_ROWS > 1) ? $clog2(N_ROWS) : 1;

  logic [N_WORDS*WORD_BITS-1:0] cells [N_ROWS];

  always_ff @(posedge clk) begin
    if (wr_en && int'(wr_row) < N_ROWS && int'(wr_word) < N_WORDS)
      cells[wr_row[AW-1:0]][wr_word*WORD_BITS +: WORD_BITS] <= wr_data;
  end

  always_ff @(posedge clk) begin
    if (rd_en && int'(rd_row) < N_ROWS && int'(rd_word) < N_WORDS)
      rd_data <= cells[rd_row[AW-1:0]][rd_word*WORD_BITS +: WORD_BITS];
  end

  always_ff @(posedge clk) begin
    if (compute) begin
      logic [RW-1:0] acc [N_COLS];
      for (int c = 0; c < N_COLS; c++) acc[c] = '0;
      for (int r = 0; r < N_ROWS; r++) begin
        if (active[r]) begin
          logic [N_WORDS*WORD_BITS-1:0] x;
          x = drive[r] ? cells[r] : ~cells[r];     // XNOR with the row input
          for (int c = 0; c < N_COLS; c++) acc[c] += RW'(x[c]);
        end
      end
      for (int c = 0; c < N_COLS; c++) col_v[c] <= acc[c];
    end
  end

endmodule
