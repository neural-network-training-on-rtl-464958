// tb_imc_full: the end-to-end test of tb_imc_top with the macro at its full
// size (2304 rows, 256 columns, no parameter overrides). It loads matrices into the array as doublewords, streams
// input vectors, runs forward (+/-1 activations x 5-bit weights), backward
// (radix-4 gradients x weights) and weight-update (radix-4 gradients x
// 6-bit activations) MVMs under fixed, variable and dual references, and
// compares every output with a model written here from the matrix values:
// per serial step it counts matching active rows, quantizes them as the
// paper's ADC does (floor(255*pop/VRef,p), clipped at 255), and rebuilds
// the result. Runs whose steps are all lossless are also compared with the
// exact integer MVM. It counts each mechanism (both input modes, the three
// reference modes, high and low dual selections, ADC clipping, lossy
// quantization, masked rows, a short vector, an input stall while busy, a
// mode switch) and counts a failure for any that never happened. It also
// checks the run length: 12 cycles per serial operation plus one per output.
module tb_imc_full;
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
  // mechanism counters
  int n_pm1, n_radix4, n_fixed, n_variable, n_dual_hi, n_dual_lo, n_clip, n_lossy,
      n_masked, n_short, n_stall, n_switch, n_exact;

  logic [NC-1:0] img  [NR];        // array image
  int            mat  [NR][NC];    // stored element values (per element k)
  logic [7:0]    el   [NR];        // input elements
  longint        got  [NC];
  int            n_got;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  always @(posedge clk) if (out_valid) begin
    got[out_idx[$clog2(NC)-1:0]] <= longint'(out_data);
    n_got <= n_got + 1;
  end

  // matrix of K-bit +/-1 elements, element k in columns k*bw .. k*bw+bw-1
  task automatic load_matrix(input int bw, input int lo, input int hi);
    for (int r = 0; r < NR; r++) begin
      img[r] = '0;
      for (int k = 0; k < NC / bw; k++) begin
        logic [7:0] b;
        mat[r][k] = $urandom_range(0, hi - lo) + lo;
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
    // read back a few doublewords
    for (int i = 0; i < 4; i++) begin
      int r, w;
      r = $urandom_range(0, NR - 1); w = $urandom_range(0, NWC - 1);
      cim_rd_en = 1; cim_rd_row = RW'(r); cim_rd_word = 4'(w);
      @(negedge clk) cim_rd_en = 0;
      check(cim_rd_data == img[r][w * 32 +: 32], "array read-back");
    end
  endtask

  // radix-4 gradients: zero with p_zero percent, else power 4^(e-4) with
  // e = dom for p_dom percent of the rest, otherwise uniform 1..7
  task automatic make_grad(input int p_zero, input int dom, input int p_dom);
    for (int r = 0; r < NR; r++) begin
      int e;
      if ($urandom_range(0, 99) < p_zero) e = 0;
      else if ($urandom_range(0, 99) < p_dom) e = dom;
      else e = $urandom_range(1, 7);
      el[r] = radix4_onehot($urandom_range(0, 1) == 1, 3'(e));
    end
  endtask

  task automatic make_act();
    for (int r = 0; r < NR; r++) el[r] = pm1_encode($urandom_range(0, 16), ACT_BITS);
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

  // model + run + compare
  task automatic run(input in_mode_e m, input int ib, input int bw, input vref_mode_e vm,
                     input int rf, input int rh, input int len);
    longint acc [NC];
    longint exact [NC];
    int n_steps, cyc, nk;
    bit lossless;
    n_steps = (m == IN_RADIX4) ? 7 : ib;
    nk = NC / bw;
    lossless = 1;
    for (int c = 0; c < NC; c++) acc[c] = 0;
    for (int s = 0; s < n_steps; s++) begin
      int n, R, g;
      bit drv [NR];
      bit act [NR];
      n = 0;
      for (int r = 0; r < NR; r++) begin
        if (m == IN_RADIX4) begin drv[r] = el[r][7]; act[r] = (r < len) && el[r][s]; end
        else                begin drv[r] = el[r][s]; act[r] = (r < len); end
        n += int'(act[r]);
      end
      if (n < len) n_masked++;
      case (vm)
        VREF_FIXED:    R = rf;
        VREF_VARIABLE: R = (n < 255) ? 255 : n;
        default: begin
          R = (n > 255) ? rh : 255;
          if (n > 255) n_dual_hi++; else n_dual_lo++;
        end
      endcase
      g = int'($floor(real'(R) * 256.0 / 255.0 + 0.5));
      for (int c = 0; c < NC; c++) begin
        int pop, code;
        pop = 0;
        for (int r = 0; r < NR; r++) if (act[r] && img[r][c] == drv[r]) pop++;
        code = (255 * pop) / R;
        if (code > 255) begin code = 255; n_clip++; end
        if (code * R != 255 * pop || R != 255) begin
          if (code * R != 255 * pop) n_lossy++;
          lossless = 0;
        end
        acc[c] += (2 * longint'(code) * g - longint'(n) * 256) *
                  ((m == IN_RADIX4) ? (longint'(1) << (2 * s)) : longint'(s < 2 ? 1 : (1 << (s - 1))));
      end
    end
    // exact MVM in output units: 2^8 * 2 * S_in * sum x*w
    for (int k = 0; k < nk; k++) begin
      exact[k] = 0;
      for (int r = 0; r < len; r++) begin
        longint xs;   // input value scaled by S_in
        if (m == IN_RADIX4) begin
          xs = 0;
          for (int i = 0; i < 7; i++) if (el[r][i]) xs = (el[r][7] ? 1 : -1) * (longint'(1) << (2 * i));
        end else xs = longint'(pm1_value2(el[r], ib));
        exact[k] += xs * mat[r][k] * 2 * 256;
      end
    end
    cfg = '0;
    cfg.in_mode = m; cfg.in_bits = 4'(ib); cfg.cim_bits = 4'(bw); cfg.vec_len = RW'(len);
    cfg.vref_mode = vm; cfg.r_fixed = RW'(rf); cfg.r_high = RW'(rh);
    n_got = 0;
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    // the next vector cannot enter while the run reads the buffer
    in_valid = 1; in_data = 32'h0;
    for (int i = 0; i < 4; i++) begin
      #1;
      check(!in_ready, "input stalled while busy");
      if (!in_ready) n_stall++;
      @(negedge clk);
    end
    in_valid = 0;
    cyc = 5;
    while (!done && cyc < 100000) begin @(negedge clk); cyc++; end
    check(cyc - 1 == 12 * n_steps + nk, $sformatf("run length %0d want %0d", cyc - 1, 12 * n_steps + nk));
    @(negedge clk);
    check(n_got == nk, $sformatf("outputs %0d want %0d", n_got, nk));
    for (int k = 0; k < nk; k++) begin
      longint e;
      e = 0;
      for (int j = 0; j < bw; j++) e += acc[k * bw + j] * ((j < 2) ? 1 : (longint'(1) << (j - 1)));
      check(got[k] == e, $sformatf("mode %0d vref %0d out %0d got %0d want %0d", m, vm, k, got[k], e));
      if (lossless) check(got[k] == exact[k], $sformatf("exact out %0d got %0d want %0d", k, got[k], exact[k]));
    end
    if (lossless) n_exact++;
    if (m == IN_RADIX4) n_radix4++; else n_pm1++;
    if (vm == VREF_FIXED) n_fixed++;
    if (vm == VREF_VARIABLE) n_variable++;
    if (len < NR) n_short++;
  endtask

  initial begin
    cfg = '0; cim_wr_row = '0; cim_wr_word = '0; cim_wr_data = '0;
    cim_rd_row = '0; cim_rd_word = '0; in_data = '0;
    n_pm1 = 0; n_radix4 = 0; n_fixed = 0; n_variable = 0; n_dual_hi = 0; n_dual_lo = 0;
    n_clip = 0; n_lossy = 0; n_masked = 0; n_short = 0; n_stall = 0; n_switch = 0; n_exact = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // weights, 5-bit +/-1 in [-8, 8]
    load_matrix(WGT_BITS, -8, 8);
    // forward MVM, fixed high reference (0.8 V = 2304 row units)
    make_act(); stream_vec();
    run(IN_PM1, ACT_BITS, WGT_BITS, VREF_FIXED, 2304, 0, NR);
    // forward MVM with a low fixed reference: clipping
    stream_vec();
    run(IN_PM1, ACT_BITS, WGT_BITS, VREF_FIXED, 128, 0, NR);
    // backward MVM, dual reference 0.8 V / 0.089 V, one dominant exponent
    make_grad(30, 4, 70); stream_vec();
    run(IN_RADIX4, 0, WGT_BITS, VREF_DUAL, 255, 2304, NR);
    n_switch++;
    // backward MVM, variable reference, short vector
    make_grad(40, 2, 30); stream_vec();
    run(IN_RADIX4, 0, WGT_BITS, VREF_VARIABLE, 255, 2304, 500);
    // sparse gradients: every step lossless, exact MVM expected
    make_grad(80, 1, 0); stream_vec();
    run(IN_RADIX4, 0, WGT_BITS, VREF_VARIABLE, 255, 2304, NR);
    // weight-update MVM: 6-bit activations in the array, dual 0.4 V high
    load_matrix(ACT_BITS, 0, 16);
    make_grad(30, 5, 70); stream_vec();
    run(IN_RADIX4, 0, ACT_BITS, VREF_DUAL, 255, 1152, NR);
    // switch back to +/-1 inputs on the same array
    make_act(); stream_vec();
    run(IN_PM1, ACT_BITS, ACT_BITS, VREF_VARIABLE, 255, 2304, NR);
    n_switch++;

    $display("mechanisms: pm1=%0d radix4=%0d fixed=%0d variable=%0d dual_hi=%0d dual_lo=%0d clip=%0d lossy=%0d masked=%0d short=%0d stall=%0d switch=%0d exact=%0d",
             n_pm1, n_radix4, n_fixed, n_variable, n_dual_hi, n_dual_lo, n_clip, n_lossy,
             n_masked, n_short, n_stall, n_switch, n_exact);
    check(n_pm1 > 0, "pm1 input mode used");
    check(n_radix4 > 0, "radix-4 input mode used");
    check(n_fixed > 0, "fixed reference used");
    check(n_variable > 0, "variable reference used");
    check(n_dual_hi > 0, "dual high reference used");
    check(n_dual_lo > 0, "dual low reference used");
    check(n_clip > 0, "ADC clipping happened");
    check(n_lossy > 0, "lossy quantization happened");
    check(n_masked > 0, "masked rows happened");
    check(n_short > 0, "short vector run");
    check(n_stall > 0, "input stall while busy");
    check(n_switch > 0, "input mode switch");
    check(n_exact > 0, "lossless run compared with exact MVM");
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
