// shift_accumulator: the three-level shift-and-add tree under the PIM block.
//
// Level 1, ACC4,1..4: each reads four adjacent columns together. It weighs
// the column sums by their bit position in the weight slice (column j counts
// 2^j), shifts the result by the index t of the activation bit-plane now on
// the rows, and adds it to its register. After P bit-planes ACC4,i holds
// sum_r a_r * w_r for the 4-bit weight slice of its columns.
// Level 2, ACC8,1..2: on en8, ACC8,k <= ACC4,2k-1 + (ACC4,2k << 4), which
// joins two 4-bit slices into an 8-bit weight.
// Level 3, ACC16,1: on en16, ACC16,1 <= ACC8,1 + (ACC8,2 << 8), a 16-bit weight.
// The levels, their names and which level feeds which are the paper's. The
// shift amounts follow from the column layout chosen here (weight bits in
// ascending column order). The 4b/8b/16b labels of the paper name the weight
// width a level covers; the registers are wider so that a whole dot product
// over ROWS rows with up to 16-bit activations never overflows.
//
// Timing: clear zeroes all levels; en adds one bit-plane into ACC4 (one
// cycle per activation bit); en8 and en16 each take one further cycle.
module shift_accumulator
  import pim_pkg::*;
#(
  parameter int unsigned ROWS = 8,
  localparam int unsigned SB  = $clog2(ROWS + 1),
  localparam int unsigned W4  = SB + 4 + MAX_PREC,    // ACC4 width
  localparam int unsigned W8  = SB + 8 + MAX_PREC,    // ACC8 width
  localparam int unsigned W16 = SB + 16 + MAX_PREC    // ACC16 width
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clear,                  // zero every level
  input  logic          en,                     // accumulate one bit-plane
  input  logic [3:0]    bitpos,                 // activation bit index t
  input  logic          en8,                    // load ACC8 from ACC4
  input  logic          en16,                   // load ACC16 from ACC8
  input  logic [SB-1:0] col_sum [NUM_COLS],
  output logic [W4-1:0]  acc4  [NUM_ACC4],
  output logic [W8-1:0]  acc8  [NUM_ACC8],
  output logic [W16-1:0] acc16
);

  // Weighted sum of one 4-column slice: sum_j col_sum[4i+j] << j.
  logic [SB+3:0] slice [NUM_ACC4];

  always_comb begin
    for (int i = 0; i < NUM_ACC4; i++) begin
      slice[i] = '0;
      for (int j = 0; j < SLICE_COLS; j++)
        slice[i] += (SB+4)'(col_sum[SLICE_COLS*i + j]) << j;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NUM_ACC4; i++) acc4[i] <= '0;
      for (int k = 0; k < NUM_ACC8; k++) acc8[k] <= '0;
      acc16 <= '0;
    end else if (clear) begin
      for (int i = 0; i < NUM_ACC4; i++) acc4[i] <= '0;
      for (int k = 0; k < NUM_ACC8; k++) acc8[k] <= '0;
      acc16 <= '0;
    end else begin
      if (en)
        for (int i = 0; i < NUM_ACC4; i++)
          acc4[i] <= acc4[i] + (W4'(slice[i]) << bitpos);
      if (en8)
        for (int k = 0; k < NUM_ACC8; k++)
          acc8[k] <= W8'(acc4[2*k]) + (W8'(acc4[2*k+1]) << 4);
      if (en16)
        acc16 <= W16'(acc8[0]) + (W16'(acc8[1]) << 8);
    end
  end

endmodule
