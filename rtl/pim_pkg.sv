// pim_pkg: types and constants shared by the mixed-precision PIM tile.
//
// The tile supports four data precisions, 2, 4, 8 and 16 bits, for both
// weights and activations; a layer trained at any other width is rounded up
// to the next supported one (3 -> 4, 5 -> 8, ...), as the architecture
// description asks. The PIM array is 16 one-bit columns wide: four column
// slices of four columns, one slice per lowest-level accumulator (ACC4,1..4),
// which pair up into ACC8,1..2 and then ACC16,1. Those slice and level counts
// are the paper's; the encodings below are this design's own.
package pim_pkg;

  // Supported precisions. The encoding is log2(bits) - 1.
  typedef enum logic [1:0] {
    PREC_2  = 2'd0,
    PREC_4  = 2'd1,
    PREC_8  = 2'd2,
    PREC_16 = 2'd3
  } prec_e;

  localparam int unsigned MAX_PREC   = 16;  // widest supported precision
  localparam int unsigned SLICE_COLS = 4;   // columns read together by one ACC4
  localparam int unsigned NUM_ACC4   = 4;   // ACC4,1 .. ACC4,4
  localparam int unsigned NUM_ACC8   = 2;   // ACC8,1 .. ACC8,2
  localparam int unsigned NUM_COLS   = SLICE_COLS * NUM_ACC4;  // 16
  localparam int unsigned KW         = 5;   // width of a raw layer bit-width k_l (0..31)

  // Number of bits of a supported precision.
  function automatic int unsigned prec_bits(prec_e p);
    return 32'd2 << p;
  endfunction

endpackage
