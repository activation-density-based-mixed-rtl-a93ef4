// precision_mapper: rounds a layer's bit-width up to a precision the tile has.
//
// The quantization method assigns each layer an arbitrary bit-width k_l, but
// the PIM tile only implements 2-, 4-, 8- and 16-bit data. Following the
// paper, a width that is not supported is rounded up: 1 and 2 run as 2-bit,
// 3 and 4 as 4-bit, 5..8 as 8-bit and 9..16 as 16-bit. Two cases the paper
// does not cover are this design's choices: k_l = 0 marks a layer that was
// removed (the "x" entry of a pruned network) and raises layer_off, and
// k_l > 16 cannot be held by the tile and raises unsupported (prec then
// reads PREC_16).
//
// Interface: purely combinational, k_bits in, prec / eff_bits / flags out.
module precision_mapper
  import pim_pkg::*;
(
  input  logic [KW-1:0] k_bits,      // trained bit-width of the layer
  output prec_e         prec,        // supported precision used for it
  output logic [KW-1:0] eff_bits,    // number of bits of prec (2/4/8/16)
  output logic          layer_off,   // k_bits == 0: layer removed
  output logic          unsupported  // k_bits > 16: wider than the tile
);

  always_comb begin
    layer_off   = (k_bits == '0);
    unsupported = (k_bits > KW'(MAX_PREC));
    if (k_bits <= KW'(2))      prec = PREC_2;
    else if (k_bits <= KW'(4)) prec = PREC_4;
    else if (k_bits <= KW'(8)) prec = PREC_8;
    else                       prec = PREC_16;
    eff_bits = KW'(prec_bits(prec));
  end

endmodule
