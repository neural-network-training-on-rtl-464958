// tb_vref_select: checks the reference chosen in each mode against the
// rules (fixed; variable = active rows clamped to [255, 2304]; dual = 255
// up to 255 active rows, else the high value), the dual-mode high flag,
// VRef,n = 0, and the gain against round(VRef,p * 256 / 255) computed in
// real arithmetic.
module tb_vref_select;
  import imc_pkg::*;
  vref_mode_e mode;
  logic [RW-1:0] n_active, r_fixed, r_high, vrefp, vrefn;
  logic [RW:0] gain;
  logic hi;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  vref_select dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic one(input vref_mode_e m, input int n, input int rf, input int rh);
    int er, eg;
    bit ehi;
    mode = m; n_active = RW'(n); r_fixed = RW'(rf); r_high = RW'(rh);
    #1;
    ehi = 0;
    case (m)
      VREF_FIXED:    er = rf;
      VREF_VARIABLE: er = (n < 255) ? 255 : (n > 2304 ? 2304 : n);
      default: begin ehi = (n > 255); er = ehi ? rh : 255; end
    endcase
    eg = int'($floor(real'(er) * 256.0 / 255.0 + 0.5));
    check(int'(vrefp) == er, $sformatf("mode %0d n=%0d vrefp %0d want %0d", m, n, vrefp, er));
    check(vrefn == '0, "vrefn is 0");
    check(hi == ehi, $sformatf("hi flag mode %0d n=%0d", m, n));
    check(int'(gain) == eg, $sformatf("gain %0d want %0d for R=%0d", gain, eg, er));
  endtask

  initial begin
    one(VREF_FIXED, 10, 2304, 0);
    one(VREF_FIXED, 2000, 255, 0);
    one(VREF_VARIABLE, 0, 0, 0);
    one(VREF_VARIABLE, 255, 0, 0);
    one(VREF_VARIABLE, 256, 0, 0);
    one(VREF_VARIABLE, 2304, 0, 0);
    one(VREF_VARIABLE, 1000, 0, 0);
    one(VREF_DUAL, 255, 0, 2304);
    one(VREF_DUAL, 256, 0, 2304);
    one(VREF_DUAL, 2000, 0, 1152);
    for (int i = 0; i < 500; i++)
      one(vref_mode_e'($urandom_range(0, 2)), $urandom_range(0, 2304),
          $urandom_range(1, 2304), $urandom_range(256, 2304));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
