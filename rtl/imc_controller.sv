// imc_controller: sequences one MVM run of the IMC macro.
//
// After `start` (ignored while busy) the controller clears the near-memory
// accumulators and performs the serial IMC operations one after another:
// cfg.in_bits of them for +/-1 inputs, 7 (one per one-hot exponent bit) for
// radix-4 inputs. Each operation takes a fixed 12 cycles:
//   APPLY    the input buffer forms the row inputs of the step   (1 cycle)
//   COMPUTE  the array accumulates every column                  (1 cycle)
//   CONVERT  the column ADCs sample and start                    (1 cycle)
//   WAIT     8 SAR decisions; on EOC the datapath accumulates    (9 cycles)
// Then it reads out one reconstructed output per cycle (READ), as many as
// whole stored elements fit in the columns, raises `done` for one cycle and
// rewinds the input buffer for the next vector. `hi_steps` counts dual-mode
// operations that needed the high reference during the run.
//
// From the paper: serial application of bit planes / exponent masks, ADC
// conversion with EOC, NMC reconstruction. The state machine, its timing
// and the absence of overlap between operations are this design's choices.
module imc_controller
  import imc_pkg::*;
#(
  parameter int unsigned N_COLS = COLS
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  cfg_t          cfg,
  input  logic          adc_eoc,
  input  logic          vref_hi,
  output logic          busy,
  output logic          done,
  // to the input buffer
  output logic          buf_apply,
  output logic          buf_lock,
  output logic          buf_rewind,
  output logic [2:0]    step,
  // to the array and ADCs
  output logic          cima_compute,
  output logic          adc_start,
  // to the near-memory datapath
  output logic          nmc_clr,
  output logic          nmc_acc,
  output logic [3:0]    nmc_shift,
  output logic          nmc_rd,
  output logic [8:0]    nmc_rd_idx,
  output logic [RW-1:0] hi_steps
);

  typedef enum logic [2:0] {
    S_IDLE, S_APPLY, S_COMPUTE, S_CONVERT, S_WAIT, S_READ, S_DRAIN
  } state_e;

  state_e     state;
  logic [3:0] n_steps;
  logic       last_step, last_out;

  assign n_steps   = (cfg.in_mode == IN_RADIX4) ? 4'(EXP_STEPS) : cfg.in_bits;
  assign last_step = (4'(step) + 4'd1 >= n_steps);
  // another whole element after this one?
  assign last_out  = (int'(nmc_rd_idx) + 2) * int'(cfg.cim_bits) > N_COLS;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      step       <= '0;
      nmc_rd_idx <= '0;
      hi_steps   <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (start) begin
          state    <= S_APPLY;
          step     <= '0;
          hi_steps <= '0;
        end
        S_APPLY:   state <= S_COMPUTE;
        S_COMPUTE: state <= S_CONVERT;
        S_CONVERT: begin
          state <= S_WAIT;
          if (cfg.vref_mode == VREF_DUAL && vref_hi) hi_steps <= hi_steps + 1'b1;
        end
        S_WAIT: if (adc_eoc) begin
          if (last_step) begin
            state      <= S_READ;
            nmc_rd_idx <= '0;
          end else begin
            state <= S_APPLY;
            step  <= step + 1'b1;
          end
        end
        S_READ: begin
          if (last_out) state <= S_DRAIN;
          else          nmc_rd_idx <= nmc_rd_idx + 1'b1;
        end
        S_DRAIN: state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  always_comb begin
    busy         = (state != S_IDLE);
    done         = (state == S_DRAIN);
    buf_apply    = (state == S_APPLY);
    buf_lock     = busy;
    buf_rewind   = (state == S_DRAIN);
    cima_compute = (state == S_COMPUTE);
    adc_start    = (state == S_CONVERT);
    nmc_clr      = (state == S_IDLE) && start;
    nmc_acc      = (state == S_WAIT) && adc_eoc;
    nmc_rd       = (state == S_READ);
    nmc_shift    = (cfg.in_mode == IN_RADIX4) ? {step, 1'b0} : pm1_shift({1'b0, step});
  end

endmodule
