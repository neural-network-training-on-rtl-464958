// tb_cima: loads a reduced array (48 rows x 64 columns) with random
// doublewords, reads every doubleword back, then applies random row inputs
// and masks and compares each column voltage with a count worked out here
// row by row (active rows whose stored bit equals the row input). Includes
// the all-masked, all-active and all-matching cases.
module tb_cima;
  import imc_pkg::*;
  localparam int NR = 48, NC = 64, NW = NC / 32;
  logic clk = 0, wr_en = 0, rd_en = 0, compute = 0;
  logic [RW-1:0] wr_row, rd_row;
  logic [3:0] wr_word, rd_word;
  logic [WORD_BITS-1:0] wr_data, rd_data;
  logic [NR-1:0] drive, active;
  logic [RW-1:0] col_v [NC];
  logic [31:0] img [NR][NW];
  int checks = 0, failures = 0;

  cima #(.N_ROWS(NR), .N_COLS(NC)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic do_compute(input logic [NR-1:0] dv, input logic [NR-1:0] av);
    drive = dv; active = av; compute = 1;
    @(negedge clk) compute = 0;
    for (int c = 0; c < NC; c++) begin
      int n;
      n = 0;
      for (int r = 0; r < NR; r++)
        if (av[r] && (img[r][c / 32][c % 32] == dv[r])) n++;
      check(int'(col_v[c]) == n, $sformatf("col %0d got %0d want %0d", c, col_v[c], n));
    end
  endtask

  initial begin
    @(negedge clk);
    for (int r = 0; r < NR; r++)
      for (int w = 0; w < NW; w++) begin
        img[r][w] = $urandom;
        wr_en = 1; wr_row = RW'(r); wr_word = 4'(w); wr_data = img[r][w];
        @(negedge clk);
      end
    wr_en = 0;
    for (int r = 0; r < NR; r++)
      for (int w = 0; w < NW; w++) begin
        rd_en = 1; rd_row = RW'(r); rd_word = 4'(w);
        @(negedge clk) rd_en = 0;
        check(rd_data == img[r][w], $sformatf("read r%0d w%0d", r, w));
      end
    do_compute('0, '0);
    do_compute('1, '1);
    do_compute('0, '1);
    for (int i = 0; i < 30; i++) do_compute(NR'({$urandom, $urandom}), NR'({$urandom, $urandom}));
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
