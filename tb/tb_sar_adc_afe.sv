// tb_sar_adc_afe: samples random column voltages and references into the
// ADC front end and sweeps the DAC code around the expected transition.
// The expected code is the paper's quantizer, floor(255 v / VRef,p)
// clipped to 255, worked out here with plain integer division; the
// comparator must be 1 up to that code and 0 just above it. Also checks
// that the S/H holds its sample while vin changes.
module tb_sar_adc_afe;
  import imc_pkg::*;
  logic clk = 0, sample = 0, cmp;
  logic [RW-1:0] vin, vrefp, vrefn;
  logic [7:0] dac_code;
  int checks = 0, failures = 0;

  sar_adc_afe dut (.*);
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic one(input int v, input int rp);
    int exp_code;
    exp_code = (255 * v) / rp;
    if (exp_code > 255) exp_code = 255;
    @(negedge clk) begin vin = RW'(v); vrefp = RW'(rp); vrefn = '0; sample = 1; end
    @(negedge clk) begin sample = 0; vin = RW'($urandom_range(0, 4095)); end
    dac_code = 8'(exp_code); #1;
    check(cmp == 1'b1, $sformatf("v=%0d R=%0d code %0d should be below v", v, rp, exp_code));
    if (exp_code < 255) begin
      dac_code = 8'(exp_code + 1); #1;
      check(cmp == 1'b0, $sformatf("v=%0d R=%0d code %0d should be above v", v, rp, exp_code + 1));
    end
    dac_code = 8'h00; #1;
    check(cmp == 1'b1, "code 0 always below");
  endtask

  initial begin
    one(0, 255); one(255, 255); one(100, 255); one(2304, 2304); one(1000, 2304);
    one(300, 255); one(9, 2304); one(10, 2304);
    for (int i = 0; i < 300; i++) one($urandom_range(0, 2304), $urandom_range(255, 2304));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
