// tb_imc_controller: runs the controller against a model ADC whose EOC
// arrives 9 cycles after its start (sample plus 8 decisions, as the SAR
// does) and checks, for radix-4 and +/-1 runs with several element widths:
// the number of serial operations (7 for radix-4 gradients, in_bits for
// +/-1 inputs), the 12-cycle period of each operation, the order
// apply -> compute -> convert, accumulation on EOC, the input-bit shift of
// each step (2e for 4^e, 1,1,2,4.. weights for +/-1 bits), the count and
// order of output reads (COLS / cim_bits), done and rewind, the lock while
// busy, that a start while busy is ignored, and the dual-mode high-range
// step count.
module tb_imc_controller;
  import imc_pkg::*;
  logic clk = 0, rst_n = 0, start = 0, adc_eoc, vref_hi = 0;
  cfg_t cfg;
  logic busy, done, buf_apply, buf_lock, buf_rewind, cima_compute, adc_start;
  logic nmc_clr, nmc_acc, nmc_rd;
  logic [2:0] step;
  logic [3:0] nmc_shift;
  logic [8:0] nmc_rd_idx;
  logic [RW-1:0] hi_steps;
  int checks = 0, failures = 0;
  int adc_cnt;

  imc_controller dut (.*);
  always #5 clk = ~clk;

  // model ADC: eoc 9 edges after start
  always_ff @(posedge clk) begin
    if (adc_start) adc_cnt <= 9;
    else if (adc_cnt > 0) adc_cnt <= adc_cnt - 1;
  end
  assign adc_eoc = (adc_cnt == 1);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic run(input in_mode_e m, input int ib, input int bw, input bit dual);
    int n_exp, applies, last_apply, cyc, reads, accs, exp_hi;
    bit prev_apply, prev_compute;
    cfg = '0;
    cfg.in_mode = m; cfg.in_bits = 4'(ib); cfg.cim_bits = 4'(bw);
    cfg.vref_mode = dual ? VREF_DUAL : VREF_VARIABLE;
    n_exp = (m == IN_RADIX4) ? 7 : ib;
    applies = 0; reads = 0; accs = 0; cyc = 0; last_apply = -1; exp_hi = 0;
    prev_apply = 0; prev_compute = 0;
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    check(busy, "busy after start");
    while (!done && cyc < 5000) begin
      if (cyc == 20) start = 1; else start = 0;     // ignored while busy
      vref_hi = (applies % 2 == 1);
      #1;
      check(buf_lock == busy, "lock while busy");
      if (buf_apply) begin
        check(int'(step) == applies, $sformatf("step %0d want %0d", step, applies));
        if (last_apply >= 0)
          check(cyc - last_apply == 12, $sformatf("operation period %0d", cyc - last_apply));
        last_apply = cyc;
        applies++;
      end
      if (cima_compute) check(prev_apply, "compute follows apply");
      if (adc_start) begin
        check(prev_compute, "convert follows compute");
        if (dual && vref_hi) exp_hi++;
      end
      if (nmc_acc) begin
        int esh;
        check(adc_eoc, "accumulate on EOC");
        esh = (m == IN_RADIX4) ? 2 * int'(step) : ((step < 2) ? 0 : int'(step) - 1);
        check(int'(nmc_shift) == esh, $sformatf("shift %0d want %0d", nmc_shift, esh));
        accs++;
      end
      if (nmc_rd) begin
        check(int'(nmc_rd_idx) == reads, "read order");
        reads++;
      end
      prev_apply = buf_apply; prev_compute = cima_compute;
      @(negedge clk);
      cyc++;
    end
    start = 0;
    check(done, "done reached");
    check(buf_rewind, "rewind with done");
    check(applies == n_exp, $sformatf("operations %0d want %0d", applies, n_exp));
    check(accs == n_exp, "one accumulation per operation");
    check(reads == COLS / bw, $sformatf("reads %0d want %0d", reads, COLS / bw));
    check(int'(hi_steps) == exp_hi, $sformatf("hi_steps %0d want %0d", hi_steps, exp_hi));
    check(cyc == 12 * n_exp + COLS / bw,
          $sformatf("run length %0d cycles want %0d", cyc, 12 * n_exp + COLS / bw));
    @(negedge clk);
    check(!busy, "idle after done");
  endtask

  initial begin
    cfg = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    run(IN_RADIX4, 0, 5, 1'b1);
    run(IN_PM1, 6, 5, 1'b0);
    run(IN_RADIX4, 0, 6, 1'b0);
    run(IN_PM1, 1, 1, 1'b1);
    run(IN_PM1, 8, 8, 1'b0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
