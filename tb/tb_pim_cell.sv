// tb_pim_cell: checks one 1-bit SRAM-multiply cell.
//
// Writes 0 and 1 into the cell and, for each stored value, applies both
// input bits: the product must be the AND of input and stored bit. A cycle
// with we low and a different wbit must leave the stored bit unchanged.
module tb_pim_cell;
  logic clk = 0, we = 0, wbit = 0, in_bit = 0, prod;
  int   checks = 0, failures = 0;

  pim_cell dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int trial = 0; trial < 8; trial++) begin
      automatic logic v = trial[0];
      @(negedge clk);
      we = 1; wbit = v;
      @(negedge clk);
      we = 0; wbit = ~v;       // not written: must be ignored
      @(negedge clk);
      for (int i = 0; i < 2; i++) begin
        in_bit = i[0];
        #1;
        checks++;
        if (prod !== (in_bit & v)) begin
          failures++;
          $display("stored %0b in %0b: prod %0b", v, in_bit, prod);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
