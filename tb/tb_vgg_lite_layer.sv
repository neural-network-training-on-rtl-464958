// tb_vgg_lite_layer: one tile of a VGG-lite 3x3 convolution layer with 256
// input channels (inner dimension 3 x 3 x 256 = 2304, the full row count),
// run on the macro at its default size through all three training MVMs:
//   forward       6-bit activations (ReLU outputs 0..16) x 5-bit weights,
//                 fixed 0.8 V reference;
//   backward      radix-4 gradients x the same weights, once under each
//                 reference mode: fixed 0.8 V, dual 0.8 V / 0.089 V and
//                 variable;
//   weight update radix-4 gradients x 6-bit activations held in the array,
//                 dual 0.4 V / 0.089 V.
// Unlike the end-to-end test, nothing here models the ADC bit for bit. Every
// output is compared with the exact integer MVM, and the difference must
// stay inside the bound that the 8-bit quantizer allows: per serial step and
// column, a code loses less than one step of VRef,p/255 rows and the gain
// rounding adds at most half an LSB per code, so the column error is at most
// 2 * (256 * VRef,p / 255 + 128) in output units before the step and bit
// weights are applied. A step run at V_prec (255 rows) with no more than 255
// active rows must add no error at all. The test also checks that, on the
// same gradient vector, the summed error falls from fixed to dual to
// variable reference, and that the macro's count of high-reference steps
// equals the number of steps with more than 255 active rows.
// The gradient statistics are this test's own choice: the layer shape is the
// paper's, but the gradient values are drawn here, 60 % zero (rows whose ReLU
// was off) and the rest log-normal, log4|g| ~ N(-1.5, 1), rounded to the
// nearest power of four in 4^-3 .. 4^3 and flushed to zero below 4^-3.
module tb_vgg_lite_layer;
  import imc_pkg::*;
  localparam int NR = ROWS, NC = COLS, NWC = NC / 32, NWI = NR / 4;

  logic clk = 0, rst_n = 0;
  cfg_t cfg;
  logic cim_wr_en = 0, cim_rd_en = 0;
  logic [RW-1:0] cim_wr_row, cim_rd_row;
  logic [3:0] cim_wr_word, cim_rd_word;
  logic [WORD_BITS-1:0] cim_wr_data, cim_rd_data;
  logic in_valid = 0, in_ready;
  logic [WORD_BITS-1:0] in_data;
  logic start = 0, busy, done, out_valid;
  logic [8:0] out_idx;
  logic signed [OUT_W-1:0] out_data;
  logic [RW-1:0] vref_p, vref_n, hi_steps;

  imc_top dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  logic [NC-1:0] img [NR];      // array image
  int            mat [NR][NC];  // stored element values
  logic [7:0]    el  [NR];      // input elements
  longint        got [NC];
  int            n_got;
  int            n_hi_model;    // steps with more than 255 active rows

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  always @(posedge clk) if (out_valid) begin
    got[out_idx[$clog2(NC)-1:0]] <= longint'(out_data);
    n_got <= n_got + 1;
  end

  // matrix of bw-bit +/-1 elements drawn from [lo, hi]; zero_pct percent
  // of them are set to zero (ReLU outputs, when lo = 0)
  task automatic load_matrix(input int bw, input int lo, input int hi, input int zero_pct);
    for (int r = 0; r < NR; r++) begin
      img[r] = '0;
      for (int k = 0; k < NC / bw; k++) begin
        logic [7:0] b;
        mat[r][k] = ($urandom_range(0, 99) < zero_pct) ? 0 : $urandom_range(0, hi - lo) + lo;
        b = pm1_encode(mat[r][k], bw);
        for (int j = 0; j < bw; j++) img[r][k * bw + j] = b[j];
      end
    end
    for (int r = 0; r < NR; r++)
      for (int w = 0; w < NWC; w++) begin
        @(negedge clk);
        cim_wr_en = 1; cim_wr_row = RW'(r); cim_wr_word = 4'(w);
        cim_wr_data = img[r][w * 32 +: 32];
      end
    @(negedge clk) cim_wr_en = 0;
  endtask

  // standard normal sample (Box-Muller)
  function automatic real gauss();
    real u1, u2;
    u1 = (real'($urandom_range(0, 999999)) + 1.0) / 1000001.0;
    u2 = real'($urandom_range(0, 999999)) / 1000000.0;
    return $sqrt(-2.0 * $ln(u1)) * $cos(6.283185307 * u2);
  endfunction

  task automatic make_grad();
    for (int r = 0; r < NR; r++) begin
      int p, e;
      if ($urandom_range(0, 99) < 60) e = 0;
      else begin
        p = int'($floor(-1.5 + gauss() + 0.5));   // nearest power of four
        if (p < -3) e = 0;
        else e = (p > 3 ? 3 : p) + 4;
      end
      el[r] = radix4_onehot($urandom_range(0, 1) == 1, 3'(e));
    end
  endtask

  task automatic make_act();
    for (int r = 0; r < NR; r++)
      el[r] = pm1_encode(($urandom_range(0, 99) < 50) ? 0 : $urandom_range(0, 16), ACT_BITS);
  endtask

  task automatic stream_vec();
    for (int w = 0; w < NWI; w++) begin
      @(negedge clk);
      in_valid = 1;
      in_data = {el[4*w+3], el[4*w+2], el[4*w+1], el[4*w]};
      #1;
      while (!in_ready) @(negedge clk);
    end
    @(negedge clk) in_valid = 0;
  endtask

  // Run one MVM on the vector in the buffer; check every output against the
  // exact result within the quantizer bound. Returns the summed |error|.
  task automatic run(input in_mode_e m, input int bw, input vref_mode_e vm,
                     input int rf, input int rh, input string name, output longint err_sum);
    longint bound [NC];
    longint exact [NC];
    longint colb;
    int n_steps, nk, cyc;
    bit clip_free;
    n_steps = (m == IN_RADIX4) ? EXP_STEPS : ACT_BITS;
    nk = NC / bw;
    clip_free = 1;
    n_hi_model = 0;
    for (int k = 0; k < nk; k++) bound[k] = 0;
    // error bound per serial step, from the active-row count and VRef,p
    for (int s = 0; s < n_steps; s++) begin
      int n, R;
      longint sw;
      n = 0;
      for (int r = 0; r < NR; r++) n += (m == IN_RADIX4) ? int'(el[r][s]) : 1;
      case (vm)
        VREF_FIXED:    R = rf;
        VREF_VARIABLE: R = (n < R_PREC) ? R_PREC : n;
        default:       R = (n > R_PREC) ? rh : R_PREC;
      endcase
      if (n > R_PREC) n_hi_model++;
      if (n > R) clip_free = 0;
      colb = (R == R_PREC && n <= R_PREC) ? 0 : 2 * ((256 * longint'(R) + 254) / 255 + 128);
      sw = (m == IN_RADIX4) ? (longint'(1) << (2 * s)) : (longint'(1) << pm1_shift(4'(s)));
      for (int k = 0; k < nk; k++)
        for (int j = 0; j < bw; j++) bound[k] += colb * sw * (longint'(1) << pm1_shift(4'(j)));
    end
    // exact MVM in output units: 2^8 * 2 * S_in * sum x*w
    for (int k = 0; k < nk; k++) begin
      exact[k] = 0;
      for (int r = 0; r < NR; r++) begin
        longint xs;
        if (m == IN_RADIX4) begin
          xs = 0;
          for (int i = 0; i < EXP_STEPS; i++)
            if (el[r][i]) xs = (el[r][7] ? 1 : -1) * (longint'(1) << (2 * i));
        end else xs = longint'(pm1_value2(el[r], ACT_BITS));
        exact[k] += xs * mat[r][k] * 2 * 256;
      end
    end
    cfg = '0;
    cfg.in_mode = m; cfg.in_bits = 4'(ACT_BITS); cfg.cim_bits = 4'(bw); cfg.vec_len = RW'(NR);
    cfg.vref_mode = vm; cfg.r_fixed = RW'(rf); cfg.r_high = RW'(rh);
    n_got = 0;
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    cyc = 1;
    while (!done && cyc < 100000) begin @(negedge clk); cyc++; end
    check(cyc - 1 == 12 * n_steps + nk, $sformatf("%s: run length %0d want %0d", name, cyc - 1, 12 * n_steps + nk));
    @(negedge clk);
    check(n_got == nk, $sformatf("%s: outputs %0d want %0d", name, n_got, nk));
    check(clip_free, $sformatf("%s: no step can clip", name));
    if (vm == VREF_DUAL)
      check(int'(hi_steps) == n_hi_model, $sformatf("%s: high-reference steps %0d want %0d", name, hi_steps, n_hi_model));
    err_sum = 0;
    begin
      real sq_err, sq_ref;
      sq_err = 0.0; sq_ref = 0.0;
      for (int k = 0; k < nk; k++) begin
        longint d;
        d = got[k] - exact[k];
        if (d < 0) d = -d;
        err_sum += d;
        sq_err += real'(d) * real'(d);
        sq_ref += real'(exact[k]) * real'(exact[k]);
        check(d <= bound[k], $sformatf("%s: out %0d error %0d above bound %0d", name, k, d, bound[k]));
      end
      $display("%-22s steps above 255 rows: %0d, relative RMS error %f", name, n_hi_model,
               (sq_ref > 0.0) ? $sqrt(sq_err / sq_ref) : 0.0);
    end
  endtask

  initial begin
    longint e_fwd, e_fix, e_dual, e_var, e_wu;
    cfg = '0; cim_wr_row = '0; cim_wr_word = '0; cim_wr_data = '0;
    cim_rd_row = '0; cim_rd_word = '0; in_data = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // filter weights of 51 output channels, 5-bit +/-1 in [-8, 8]
    load_matrix(WGT_BITS, -8, 8, 0);
    make_act(); stream_vec();
    run(IN_PM1, WGT_BITS, VREF_FIXED, R_MAX, 0, "forward, fixed 0.8 V", e_fwd);
    // the same gradient vector under the three reference modes
    make_grad();
    stream_vec(); run(IN_RADIX4, WGT_BITS, VREF_FIXED, R_MAX, 0, "backward, fixed 0.8 V", e_fix);
    stream_vec(); run(IN_RADIX4, WGT_BITS, VREF_DUAL, R_PREC, R_MAX, "backward, dual", e_dual);
    stream_vec(); run(IN_RADIX4, WGT_BITS, VREF_VARIABLE, R_PREC, R_MAX, "backward, variable", e_var);
    check(e_dual <= e_fix, $sformatf("dual error %0d not above fixed %0d", e_dual, e_fix));
    check(e_var <= e_dual, $sformatf("variable error %0d not above dual %0d", e_var, e_dual));
    check(e_fix > 0, "fixed 0.8 V reference loses precision on gradients");
    check(n_hi_model < EXP_STEPS, "some gradient steps fit the lossless range");
    // weight update: activations of 42 batch inputs in the array
    load_matrix(ACT_BITS, 0, 16, 50);
    make_grad(); stream_vec();
    run(IN_RADIX4, ACT_BITS, VREF_DUAL, R_PREC, 1152, "weight update, dual 0.4 V", e_wu);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
