// tb_shift_accumulator: checks the ACC4 -> ACC8 -> ACC16 shift-and-add tree.
//
// For each trial the testbench clears the tree, feeds P random sets of 16
// column sums as bit-planes t = 0..P-1, then strobes en8 and en16. Its own
// model (64-bit integers) computes
//   ACC4,i  = sum_t 2^t * sum_j 2^j * col_sum[4i+j](t)
//   ACC8,k  = ACC4,2k + 16 * ACC4,2k+1
//   ACC16   = ACC8,0 + 256 * ACC8,1
// and every level is compared after each step. Includes all-maximum column
// sums over 16 planes, the largest value the registers must hold.
module tb_shift_accumulator;
  import pim_pkg::*;
  localparam int unsigned ROWS = 8;
  localparam int unsigned SB   = $clog2(ROWS + 1);
  localparam int unsigned W4   = SB + 4 + MAX_PREC;
  localparam int unsigned W8   = SB + 8 + MAX_PREC;
  localparam int unsigned W16  = SB + 16 + MAX_PREC;

  logic           clk = 0, rst_n = 0, clear = 0, en = 0, en8 = 0, en16 = 0;
  logic [3:0]     bitpos = '0;
  logic [SB-1:0]  col_sum [NUM_COLS];
  logic [W4-1:0]  acc4  [NUM_ACC4];
  logic [W8-1:0]  acc8  [NUM_ACC8];
  logic [W16-1:0] acc16;
  longint         m4 [NUM_ACC4];
  longint         m8 [NUM_ACC8];
  longint         m16;
  int             checks = 0, failures = 0;

  shift_accumulator dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic compare(string what);
    for (int i = 0; i < NUM_ACC4; i++) begin
      checks++;
      if (longint'(acc4[i]) != m4[i]) begin
        failures++;
        $display("%s: ACC4,%0d = %0d expected %0d", what, i + 1, acc4[i], m4[i]);
      end
    end
    for (int k = 0; k < NUM_ACC8; k++) begin
      checks++;
      if (longint'(acc8[k]) != m8[k]) begin
        failures++;
        $display("%s: ACC8,%0d = %0d expected %0d", what, k + 1, acc8[k], m8[k]);
      end
    end
    checks++;
    if (longint'(acc16) != m16) begin
      failures++;
      $display("%s: ACC16 = %0d expected %0d", what, acc16, m16);
    end
  endtask

  task automatic run(int planes, bit maxed);
    @(negedge clk);
    clear = 1;
    @(negedge clk);
    clear = 0;
    for (int i = 0; i < NUM_ACC4; i++) m4[i] = 0;
    for (int k = 0; k < NUM_ACC8; k++) m8[k] = 0;
    m16 = 0;
    compare("after clear");
    for (int t = 0; t < planes; t++) begin
      for (int c = 0; c < NUM_COLS; c++)
        col_sum[c] = maxed ? SB'(ROWS) : SB'($urandom % (ROWS + 1));
      for (int i = 0; i < NUM_ACC4; i++) begin
        longint s = 0;
        for (int j = 0; j < 4; j++) s += longint'(col_sum[4*i+j]) << j;
        m4[i] += s << t;
      end
      en = 1; bitpos = 4'(t);
      @(negedge clk);
      en = 0;
      compare("bit-plane");
    end
    en8 = 1;
    @(negedge clk);
    en8 = 0;
    for (int k = 0; k < NUM_ACC8; k++) m8[k] = m4[2*k] + (m4[2*k+1] << 4);
    compare("en8");
    en16 = 1;
    @(negedge clk);
    en16 = 0;
    m16 = m8[0] + (m8[1] << 8);
    compare("en16");
  endtask

  initial begin
    for (int c = 0; c < NUM_COLS; c++) col_sum[c] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    run(16, 1'b1);
    for (int trial = 0; trial < 12; trial++) run(2 << (trial % 4), 1'b0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
