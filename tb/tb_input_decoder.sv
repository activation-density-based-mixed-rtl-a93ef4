// tb_input_decoder: checks the bit-serial activation feed and the row mask.
//
// Random activations and masks are loaded; after the load the testbench
// expects row_bit[r] to equal bit t of activation r (0 for masked rows) in
// the t-th cycle, for all 16 bit-planes, and checks that an idle cycle
// (no shift) holds the current plane.
module tb_input_decoder;
  import pim_pkg::*;
  localparam int unsigned ROWS = 8;

  logic                clk = 0, rst_n = 0, load = 0, shift = 0;
  logic [MAX_PREC-1:0] act_in [ROWS];
  logic [ROWS-1:0]     row_en, row_bit;
  int                  checks = 0, failures = 0;

  input_decoder dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_plane(int t, logic [MAX_PREC-1:0] a [ROWS], logic [ROWS-1:0] m);
    for (int r = 0; r < ROWS; r++) begin
      logic e;
      e = m[r] & a[r][t];
      checks++;
      if (row_bit[r] !== e) begin
        failures++;
        $display("plane %0d row %0d: got %0b expected %0b", t, r, row_bit[r], e);
      end
    end
  endtask

  initial begin
    logic [MAX_PREC-1:0] a [ROWS];
    logic [ROWS-1:0]     m;
    for (int r = 0; r < ROWS; r++) act_in[r] = '0;
    row_en = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int trial = 0; trial < 20; trial++) begin
      for (int r = 0; r < ROWS; r++) a[r] = MAX_PREC'($urandom);
      m = (trial < 10) ? '1 : ROWS'($urandom);
      @(negedge clk);
      act_in = a; row_en = m; load = 1;
      @(negedge clk);
      load = 0;
      // scramble the inputs: the decoder must hold what it captured
      for (int r = 0; r < ROWS; r++) act_in[r] = MAX_PREC'($urandom);
      row_en = ROWS'($urandom);
      for (int t = 0; t < MAX_PREC; t++) begin
        check_plane(t, a, m);
        if (t == 3) begin
          @(negedge clk);   // idle cycle: plane must not move
          check_plane(t, a, m);
        end
        shift = 1;
        @(negedge clk);
        shift = 0;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
