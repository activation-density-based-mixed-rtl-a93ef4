// tb_precision_mapper: exhaustive check of the bit-width rounding.
//
// Every 5-bit k_l from 0 to 31 is applied and compared with the rule
// "round up to 2, 4, 8 or 16; 0 = removed layer; above 16 = unsupported",
// worked out here with plain integer comparisons. Includes the worked
// examples 3 -> 4 and 5 -> 8.
module tb_precision_mapper;
  import pim_pkg::*;

  logic [KW-1:0] k_bits;
  prec_e         prec;
  logic [KW-1:0] eff_bits;
  logic          layer_off, unsupported;
  int            checks = 0, failures = 0;

  precision_mapper dut (.*);

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int k = 0; k < 32; k++) begin
      int exp_bits;
      k_bits = KW'(k);
      #1;
      exp_bits = (k <= 2) ? 2 : (k <= 4) ? 4 : (k <= 8) ? 8 : 16;
      checks++;
      if (int'(eff_bits) != exp_bits) begin
        failures++;
        $display("k=%0d eff_bits=%0d expected %0d", k, eff_bits, exp_bits);
      end
      checks++;
      if (layer_off != (k == 0)) begin
        failures++;
        $display("k=%0d layer_off=%0b", k, layer_off);
      end
      checks++;
      if (unsupported != (k > 16)) begin
        failures++;
        $display("k=%0d unsupported=%0b", k, unsupported);
      end
      checks++;
      if (prec_bits(prec) != exp_bits) begin
        failures++;
        $display("k=%0d prec=%0d", k, prec);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
