// imc_top: in-memory-computing macro for the three training MVMs (forward,
// backward, weight update) with radix-4 gradients.
//
// The host loads a matrix into the compute-in-memory array (CIMA) as 32-bit
// doublewords, one stored element across cim_bits adjacent columns (weights
// as 5-bit +/-1 words for the forward and backward MVMs, activations as
// 6-bit +/-1 words for the weight-update MVM). It then streams an input
// vector into the input reshape buffer: +/-1 activations (forward MVM) or
// one-hot radix-4 gradients (backward and weight-update MVMs), and pulses
// `start`. Each serial IMC operation applies one input bit plane, or the
// gradient signs masked by one exponent bit, to all rows at once; every
// column's XNOR count is digitised by its own 8-bit SAR ADC, whose
// reference VRef,p is chosen from the row sparsity (fixed, variable or dual
// mode); the near-memory datapath offsets, scales and sums the codes, and
// after the last step streams out one reconstructed output per cycle on
// out_valid / out_idx / out_data (format: see nmc_datapath).
//
// Timing: 12 cycles per serial operation (7 operations for radix-4
// gradients), then one output per cycle, then `done`. in_ready is low and
// the array should not be written while busy. vref_p / vref_n show the
// reference chosen for the present operation, where an analog reference
// generator would be steered; hi_steps counts dual-mode high-range steps.
//
// Sizes, formats and the mapping follow the paper; the interfaces, the
// sequencing and the fixed-point output format are this design's choices.
module imc_top
  import imc_pkg::*;
#(
  parameter int unsigned N_ROWS = ROWS,
  parameter int unsigned N_COLS = COLS
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  cfg_t                     cfg,
  // array load / read
  input  logic                     cim_wr_en,
  input  logic [RW-1:0]            cim_wr_row,
  input  logic [3:0]               cim_wr_word,
  input  logic [WORD_BITS-1:0]     cim_wr_data,
  input  logic                     cim_rd_en,
  input  logic [RW-1:0]            cim_rd_row,
  input  logic [3:0]               cim_rd_word,
  output logic [WORD_BITS-1:0]     cim_rd_data,
  // input vector stream
  input  logic                     in_valid,
  output logic                     in_ready,
  input  logic [WORD_BITS-1:0]     in_data,
  // run control
  input  logic                     start,
  output logic                     busy,
  output logic                     done,
  // results
  output logic                     out_valid,
  output logic [8:0]               out_idx,
  output logic signed [OUT_W-1:0]  out_data,
  // status
  output logic [RW-1:0]            vref_p,
  output logic [RW-1:0]            vref_n,
  output logic [RW-1:0]            hi_steps
);

  logic              buf_apply, buf_lock, buf_rewind;
  logic [2:0]        step;
  logic              cima_compute, adc_start;
  logic              nmc_clr, nmc_acc, nmc_rd;
  logic [3:0]        nmc_shift;
  logic [8:0]        nmc_rd_idx;
  logic [N_ROWS-1:0] drive, active;
  logic [RW-1:0]     n_active;
  logic [RW-1:0]     col_v [N_COLS];
  logic [ADC_BITS-1:0] code [N_COLS];
  logic [N_COLS-1:0] eoc;
  logic [RW:0]       gain;
  logic              vref_hi;

  imc_controller #(.N_COLS(N_COLS)) u_ctrl (
    .clk, .rst_n, .start, .cfg,
    .adc_eoc(&eoc), .vref_hi,
    .busy, .done,
    .buf_apply, .buf_lock, .buf_rewind, .step,
    .cima_compute, .adc_start,
    .nmc_clr, .nmc_acc, .nmc_shift, .nmc_rd, .nmc_rd_idx,
    .hi_steps
  );

  input_reshape_buffer #(.N_ROWS(N_ROWS)) u_buf (
    .clk, .rst_n,
    .in_valid, .in_ready, .in_data,
    .lock(buf_lock), .rewind(buf_rewind), .apply(buf_apply),
    .mode(cfg.in_mode), .step, .vec_len(cfg.vec_len),
    .drive, .active, .n_active
  );

  cima #(.N_ROWS(N_ROWS), .N_COLS(N_COLS)) u_cima (
    .clk,
    .wr_en(cim_wr_en), .wr_row(cim_wr_row), .wr_word(cim_wr_word), .wr_data(cim_wr_data),
    .rd_en(cim_rd_en), .rd_row(cim_rd_row), .rd_word(cim_rd_word), .rd_data(cim_rd_data),
    .compute(cima_compute), .drive, .active, .col_v
  );

  vref_select u_vref (
    .mode(cfg.vref_mode), .n_active, .r_fixed(cfg.r_fixed), .r_high(cfg.r_high),
    .vrefp(vref_p), .vrefn(vref_n), .gain, .hi(vref_hi)
  );

  for (genvar c = 0; c < N_COLS; c++) begin : g_adc
    sar_adc #(.BITS(ADC_BITS)) u_adc (
      .clk, .rst_n, .start(adc_start), .vin(col_v[c]),
      .vrefp(vref_p), .vrefn(vref_n), .d(code[c]), .eoc(eoc[c])
    );
  end

  nmc_datapath #(.N_ROWS(N_ROWS), .N_COLS(N_COLS)) u_nmc (
    .clk, .rst_n, .clr(nmc_clr), .acc_en(nmc_acc), .code, .gain,
    .n_masked(RW'(N_ROWS) - n_active), .shift(nmc_shift), .cim_bits(cfg.cim_bits),
    .rd_en(nmc_rd), .rd_idx(nmc_rd_idx), .rd_valid(out_valid), .rd_data(out_data)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      out_idx <= '0;
    else if (nmc_rd) out_idx <= nmc_rd_idx;
  end

endmodule
