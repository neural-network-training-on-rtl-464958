// tb_input_reshape_buffer: streams a 22-element vector (6 doublewords, the
// last one partly used) into a reduced buffer with random valid gaps and
// a lock period that must hold in_ready low, then applies every step in
// both input modes with several used lengths, and compares drive, active
// and the active-row count with values worked out here from the elements.
// Also checks that rewind lets a second vector be written from row 0.
module tb_input_reshape_buffer;
  import imc_pkg::*;
  localparam int NR = 22, NWD = (NR + 3) / 4;
  logic clk = 0, rst_n = 0, in_valid = 0, in_ready, lock = 0, rewind = 0, apply = 0;
  logic [WORD_BITS-1:0] in_data;
  in_mode_e mode;
  logic [2:0] step;
  logic [RW-1:0] vec_len, n_active;
  logic [NR-1:0] drive, active;
  logic [7:0] el [NWD*4];
  int checks = 0, failures = 0, stalls = 0;

  input_reshape_buffer #(.N_ROWS(NR)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic load();
    for (int i = 0; i < NWD * 4; i++) el[i] = 8'($urandom);
    for (int w = 0; w < NWD; w++) begin
      in_data  = {el[4*w+3], el[4*w+2], el[4*w+1], el[4*w]};
      in_valid = 1;
      if (w == 2) begin
        lock = 1;
        repeat (3) begin
          @(negedge clk);
          check(!in_ready, "not ready while locked");
          stalls++;
        end
        lock = 0;
      end
      #1;
      while (!in_ready) @(negedge clk);
      @(negedge clk);
      in_valid = 0;
      if ($urandom_range(0, 1) == 1) @(negedge clk);
    end
  endtask

  task automatic apply_chk(input in_mode_e m, input int s, input int len);
    int n;
    mode = m; step = 3'(s); vec_len = RW'(len); apply = 1;
    @(negedge clk) apply = 0;
    n = 0;
    for (int r = 0; r < NR; r++) begin
      logic ed, ea;
      if (m == IN_RADIX4) begin ed = el[r][7]; ea = (r < len) && el[r][s]; end
      else                begin ed = el[r][s]; ea = (r < len); end
      n += int'(ea);
      check(drive[r] == ed && active[r] == ea,
            $sformatf("mode %0d step %0d row %0d", m, s, r));
    end
    check(int'(n_active) == n, $sformatf("n_active %0d want %0d", n_active, n));
  endtask

  initial begin
    in_data = '0; mode = IN_PM1; step = '0; vec_len = RW'(NR);
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    load();
    check(!in_ready, "full buffer not ready");
    for (int s = 0; s < 8; s++) apply_chk(IN_PM1, s, NR);
    for (int s = 0; s < 7; s++) apply_chk(IN_RADIX4, s, NR);
    for (int s = 0; s < 7; s++) apply_chk(IN_RADIX4, s, 13);
    apply_chk(IN_PM1, 3, 5);
    rewind = 1;
    @(negedge clk) rewind = 0;
    check(in_ready, "ready after rewind");
    load();
    for (int s = 0; s < 7; s++) apply_chk(IN_RADIX4, s, NR);
    apply_chk(IN_PM1, 0, NR);
    check(stalls > 0, "lock stall exercised");
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
