// tb_pim_array: checks the 1-bit multiply cells and the column sums.
//
// Random weight words are written into every row through the write port;
// then random input bit vectors are applied and each column sum is compared
// with a count of rows where both the input bit and the stored weight bit
// are one, computed from the testbench's own copy of the weights. A second
// write pass checks that rewriting one row changes only that row.
module tb_pim_array;
  localparam int unsigned ROWS = 8;
  localparam int unsigned COLS = 16;
  localparam int unsigned AW   = $clog2(ROWS);
  localparam int unsigned SB   = $clog2(ROWS + 1);

  logic            clk = 0, w_we = 0;
  logic [AW-1:0]   w_addr = '0;
  logic [COLS-1:0] w_data = '0;
  logic [ROWS-1:0] row_bit = '0;
  logic [SB-1:0]   col_sum [COLS];
  logic [COLS-1:0] wmodel [ROWS];
  int              checks = 0, failures = 0;

  pim_array dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic write_row(int r, logic [COLS-1:0] d);
    @(negedge clk);
    w_we = 1; w_addr = AW'(r); w_data = d;
    @(negedge clk);
    w_we = 0;
    wmodel[r] = d;
  endtask

  task automatic check_sums();
    for (int c = 0; c < COLS; c++) begin
      int e = 0;
      for (int r = 0; r < ROWS; r++) e += (row_bit[r] && wmodel[r][c]) ? 1 : 0;
      checks++;
      if (int'(col_sum[c]) != e) begin
        failures++;
        $display("col %0d: got %0d expected %0d (in=%b)", c, col_sum[c], e, row_bit);
      end
    end
  endtask

  initial begin
    for (int r = 0; r < ROWS; r++) write_row(r, COLS'($urandom));
    // all-ones inputs and weights give the maximum sum
    for (int r = 0; r < ROWS; r++) write_row(r, '1);
    row_bit = '1; #1; check_sums();
    for (int r = 0; r < ROWS; r++) write_row(r, COLS'($urandom));
    for (int i = 0; i < 100; i++) begin
      row_bit = ROWS'($urandom);
      #1;
      check_sums();
      if (i % 10 == 9) write_row($urandom % ROWS, COLS'($urandom));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
