// imc_pkg: types, constants and number-format helpers shared by the
// in-memory-computing (IMC) training-MVM macro.
//
// Sizes that follow the paper: a 2304-row by 256-column compute-in-memory
// array (CIMA), one 8-bit SAR ADC per column, 32-bit doubleword transfers,
// 8-bit one-hot radix-4 gradient vectors (bit 7 = sign, bits 6:0 = exponent
// mask M_i of weight 4^(i-3)), 6-bit +/-1 activations and 5-bit +/-1 weights.
//
// Analog quantities (column voltage, VRef,p) are carried as integers in
// "row units": one unit is the column voltage step of one matching row,
// VRef,pmax / 2304. VRef,pmax = 2304 units corresponds to 0.8 V, and the
// high-precision reference V_prec = 255 units corresponds to 0.089 V.
//
// +/-1 format (paper Eq. 1): a K-bit word is stored with bit p = 1 meaning
// +1 and 0 meaning -1. Bit 0 is b0-, bit 1 is b0+ (both of weight 1/2) and
// bit p >= 2 is b_(p-1) of weight 2^(p-2). The field order is this design's
// choice; the paper gives only the weights.
package imc_pkg;

  parameter int unsigned ROWS       = 2304;  // CIMA rows (paper)
  parameter int unsigned COLS       = 256;   // CIMA columns (paper)
  parameter int unsigned ADC_BITS   = 8;     // SAR ADC resolution (paper)
  parameter int unsigned WORD_BITS  = 32;    // doubleword (paper)
  parameter int unsigned ELEM_BITS  = 8;     // one input element per byte (assumed)
  parameter int unsigned GRAD_BITS  = 8;     // one-hot radix-4 gradient (paper)
  parameter int unsigned EXP_STEPS  = 7;     // one-hot exponent bits = serial steps (paper)
  parameter int unsigned ACT_BITS   = 6;     // +/-1 activation bits (paper)
  parameter int unsigned WGT_BITS   = 5;     // +/-1 weight bits (paper)
  parameter int unsigned FRAC_BITS  = 8;     // NMC gain fraction bits (assumed)
  parameter int unsigned ADC_FS     = (1 << ADC_BITS) - 1;  // 255 codes above zero
  parameter int unsigned R_PREC     = 255;   // V_prec in row units (paper: 255/2304 of VRef,pmax)
  parameter int unsigned R_MAX      = 2304;  // VRef,pmax in row units
  parameter int unsigned RW         = 12;    // width of a row-unit quantity (0..4095)
  parameter int unsigned ACC_W      = 44;    // per-column accumulator width
  parameter int unsigned OUT_W      = 56;    // reconstructed output width

  // How the row inputs are formed from the buffered input elements.
  typedef enum logic [0:0] {
    IN_PM1    = 1'b0,   // bit-serial +/-1 planes (forward MVM activations)
    IN_RADIX4 = 1'b1    // sign bit masked by one one-hot exponent bit per step
  } in_mode_e;

  // How the ADC reference VRef,p is chosen (paper Sec. III-D).
  typedef enum logic [1:0] {
    VREF_FIXED    = 2'd0,
    VREF_VARIABLE = 2'd1,
    VREF_DUAL     = 2'd2
  } vref_mode_e;

  // Configuration of one MVM run, held stable by the host while busy.
  typedef struct packed {
    in_mode_e        in_mode;   // input format
    logic [3:0]      in_bits;   // serial planes in IN_PM1 mode (1..8)
    logic [3:0]      cim_bits;  // columns per stored element, BW (1..8)
    logic [RW-1:0]   vec_len;   // used rows (1..ROWS); the rest are masked
    vref_mode_e      vref_mode;
    logic [RW-1:0]   r_fixed;   // VRef,p for VREF_FIXED, row units
    logic [RW-1:0]   r_high;    // high-range VRef,p for VREF_DUAL, row units
  } cfg_t;

  // Weight (as a left shift) of bit p of a +/-1 word, doubled so that the
  // half-weighted bits b0-/b0+ become integers: 1,1,2,4,8,...
  function automatic logic [3:0] pm1_shift(input logic [3:0] p);
    return (p < 4'd2) ? 4'd0 : p - 4'd1;
  endfunction

  // Integer v in [-2^(K-2), 2^(K-2)] to the K-bit +/-1 format of Eq. 1,
  // by choosing each +/-1 digit from the most significant one down so that
  // the remainder shrinks (non-restoring conversion).
  function automatic logic [7:0] pm1_encode(input int v, input int k);
    logic [7:0] b;
    int rem;
    b   = '0;
    rem = 2 * v;                      // work in doubled units
    for (int p = k - 1; p >= 0; p--) begin
      int w;
      w = (p < 2) ? 1 : (1 << (p - 1));
      if (rem >= 0) begin b[p] = 1'b1; rem -= w; end
      else          begin b[p] = 1'b0; rem += w; end
    end
    return b;
  endfunction

  // Value (doubled) of a K-bit +/-1 word.
  function automatic int pm1_value2(input logic [7:0] b, input int k);
    int s;
    s = 0;
    for (int p = 0; p < k; p++) begin
      int w;
      w = (p < 2) ? 1 : (1 << (p - 1));
      s += b[p] ? w : -w;
    end
    return s;
  endfunction

  // Radix-4 4-bit code {neg, e[2:0]} to the 8-bit one-hot vector of Eq. 2.
  // Code e = 0 is the value zero (all mask bits clear); e = 1..7 stands for
  // 4^(e-4), i.e. 1/64 .. 64, and sets mask bit e-1. The code assignment is
  // this design's choice. neg = 1 becomes the -1 row input (bit 7 = 0).
  // The paper does this conversion off-chip, ahead of the doubleword stream.
  function automatic logic [7:0] radix4_onehot(input logic neg, input logic [2:0] e);
    logic [7:0] g;
    g = '0;
    g[7] = ~neg;
    if (e != 3'd0) g[e - 3'd1] = 1'b1;
    return g;
  endfunction

endpackage
