// tb_sar_logic: drives the SAR register with an ideal comparator that
// compares a hidden target code with the trial code, and checks that each
// conversion returns the target, that the first trial code has only the
// MSB set, that EOC comes exactly BITS clocks after start and lasts one
// cycle, and that a restart in mid-conversion begins a fresh conversion.
module tb_sar_logic;
  localparam int BITS = 8;
  logic clk = 0, rst_n = 0, start = 0, cmp, sample, busy, eoc;
  logic [BITS-1:0] d;
  int checks = 0, failures = 0;
  int target;

  sar_logic #(.BITS(BITS)) dut (.*);

  always #5 clk = ~clk;
  // ideal comparator: held input is "target + 0.5" code steps
  assign cmp = (target >= int'(d));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic convert(input int t);
    int cyc;
    target = t;
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    check(d == 8'h80, $sformatf("first trial code %h", d));
    cyc = 1;
    while (!eoc && cyc < 40) begin @(negedge clk); cyc++; end
    check(cyc == BITS + 1, $sformatf("EOC after %0d edges (want %0d)", cyc, BITS + 1));
    check(d == BITS'(t), $sformatf("target %0d got %0d", t, d));
    @(negedge clk);
    check(!eoc, "EOC lasts one cycle");
    check(d == BITS'(t), "result holds after EOC");
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    convert(0); convert(255); convert(128); convert(127); convert(1);
    for (int i = 0; i < 200; i++) convert($urandom_range(0, 255));
    // restart during a conversion
    target = 200;
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    repeat (3) @(negedge clk);
    convert(17);
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
