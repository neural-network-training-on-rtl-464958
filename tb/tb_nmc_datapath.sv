// tb_nmc_datapath: feeds random ADC codes, gains, masked-row counts and
// input-bit shifts for several serial steps into a reduced datapath
// (64 rows, 24 columns), keeps its own 64-bit model of every column sum
// (inner product 2*code*gain - active_rows*256, weighted by 2^shift), and
// checks every reconstructed output for stored-element widths 1..8 against
// sum_j col(k*BW+j) * w(j) with w = 1,1,2,4,.. (the +/-1 bit weights).
// Also checks the one-cycle read latency and that clr empties the sums.
module tb_nmc_datapath;
  import imc_pkg::*;
  localparam int NR = 64, NC = 24;
  logic clk = 0, rst_n = 0, clr = 0, acc_en = 0, rd_en = 0, rd_valid;
  logic [ADC_BITS-1:0] code [NC];
  logic [RW:0] gain;
  logic [RW-1:0] n_masked;
  logic [3:0] shift, cim_bits;
  logic [8:0] rd_idx;
  logic signed [OUT_W-1:0] rd_data;
  longint model [NC];
  int checks = 0, failures = 0;

  nmc_datapath #(.N_ROWS(NR), .N_COLS(NC)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic longint bitw(input int j);
    return (j < 2) ? 1 : (longint'(1) << (j - 1));
  endfunction

  task automatic run(input int steps);
    @(negedge clk) clr = 1;
    @(negedge clk) clr = 0;
    for (int c = 0; c < NC; c++) model[c] = 0;
    for (int s = 0; s < steps; s++) begin
      int g, nm, sh;
      g  = $urandom_range(256, 2313);
      nm = $urandom_range(0, NR);
      sh = $urandom_range(0, 12);
      gain = (RW+1)'(g); n_masked = RW'(nm); shift = 4'(sh);
      for (int c = 0; c < NC; c++) begin
        int cd;
        cd = $urandom_range(0, 255);
        code[c] = 8'(cd);
        model[c] += (2 * longint'(cd) * g - (longint'(NR) - longint'(nm)) * 64'd256) * (longint'(1) << sh);
      end
      acc_en = 1;
      @(negedge clk) acc_en = 0;
      if ($urandom_range(0, 1) == 1) @(negedge clk);
    end
    for (int bw = 1; bw <= 8; bw++) begin
      cim_bits = 4'(bw);
      for (int k = 0; k < NC / bw; k++) begin
        longint e;
        e = 0;
        for (int j = 0; j < bw; j++) e += model[k * bw + j] * bitw(j);
        rd_idx = 9'(k); rd_en = 1;
        @(negedge clk) rd_en = 0;
        check(rd_valid, "rd_valid one cycle after rd_en");
        check(longint'(rd_data) == e, $sformatf("bw=%0d k=%0d got %0d want %0d", bw, k, rd_data, e));
      end
    end
  endtask

  initial begin
    for (int c = 0; c < NC; c++) code[c] = '0;
    gain = '0; n_masked = '0; shift = '0; cim_bits = 4'd5; rd_idx = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    run(7); run(6); run(1); run(7);
    // clr empties the sums
    @(negedge clk) clr = 1;
    @(negedge clk) begin clr = 0; cim_bits = 4'd1; rd_idx = 9'd3; rd_en = 1; end
    @(negedge clk) rd_en = 0;
    check(rd_data == '0, "clr zeroes accumulators");
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
