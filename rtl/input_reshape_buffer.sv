// input_reshape_buffer: holds one input vector for the CIMA and forms the
// row inputs of each serial IMC operation.
//
// The host streams the vector in as 32-bit doublewords (valid/ready). Each
// doubleword carries four input elements, one per byte, element 4w+j in
// byte j of doubleword w. Writing fills elements from row 0 upward; the
// pointer returns to row 0 when `rewind` is pulsed (end of a run). While
// `lock` is high (a run is reading the vector) the buffer is not ready.
//
// On `apply` the buffer registers, for serial step `step`:
//   IN_PM1    drive[r] = bit `step` of element r, every used row active
//             (bit-parallel/bit-serial application of a +/-1 word);
//   IN_RADIX4 drive[r] = sign bit (bit 7) of element r, active[r] = one-hot
//             exponent bit `step` of element r, so that only rows whose
//             gradient has the power 4^(step-3) take part.
// Rows at or above `vec_len` are masked in both modes. n_active is the
// number of active rows; it sets the ADC range and the masked-row offset.
// Outputs are valid the cycle after `apply`.
//
// From the paper: 32-bit doubleword streaming, the sign bit on the row
// input with the exponent bits as serially applied masks. This design's
// own choices: one element per byte, the row mapping and the handshake.
// The paper's buffer also re-aligns convolution windows to reuse data;
// that reuse scheme is not described and is not built here.
module input_reshape_buffer
  import imc_pkg::*;
#(
  parameter int unsigned N_ROWS = ROWS
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // doubleword stream from the host
  input  logic                 in_valid,
  output logic                 in_ready,
  input  logic [WORD_BITS-1:0] in_data,
  // control
  input  logic                 lock,
  input  logic                 rewind,
  input  logic                 apply,
  input  in_mode_e             mode,
  input  logic [2:0]           step,
  input  logic [RW-1:0]        vec_len,
  // row inputs for the CIMA
  output logic [N_ROWS-1:0]    drive,
  output logic [N_ROWS-1:0]    active,
  output logic [RW-1:0]        n_active
);

  localparam int unsigned PER_WORD = WORD_BITS / ELEM_BITS;
  localparam int unsigned N_WORDS  = (N_ROWS + PER_WORD - 1) / PER_WORD;
  localparam int unsigned PW       = (N_WORDS > 1) ? $clog2(N_WORDS + 1) : 1;

  logic [ELEM_BITS-1:0] elem [N_ROWS];
  logic [PW-1:0]        wptr;

  assign in_ready = !lock && (wptr < PW'(N_WORDS));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr <= '0;
    end else if (rewind) begin
      wptr <= '0;
    end else if (in_valid && in_ready) begin
      wptr <= wptr + 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid && in_ready) begin
      for (int j = 0; j < PER_WORD; j++) begin
        if (int'(wptr) * PER_WORD + j < N_ROWS)
          elem[int'(wptr) * PER_WORD + j] <= in_data[j*ELEM_BITS +: ELEM_BITS];
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      drive    <= '0;
      active   <= '0;
      n_active <= '0;
    end else if (apply) begin
      logic [RW-1:0] cnt;
      cnt = '0;
      for (int r = 0; r < N_ROWS; r++) begin
        logic used, act;
        used = (r < int'(vec_len));
        if (mode == IN_RADIX4) begin
          drive[r] <= elem[r][GRAD_BITS-1];
          act       = used && elem[r][step];
        end else begin
          drive[r] <= elem[r][step];
          act       = used;
        end
        active[r] <= act;
        cnt       += RW'(act);
      end
      n_active <= cnt;
    end
  end

  // Host rule of the doubleword stream: a word offered but not taken stays.
  a_in_hold : assert property (@(posedge clk) disable iff (!rst_n)
                 (in_valid && !in_ready && !lock) |=> (in_valid && $stable(in_data)))
    else $error("input_reshape_buffer: in_data changed while waiting for in_ready");

endmodule
