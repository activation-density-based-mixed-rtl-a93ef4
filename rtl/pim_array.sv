// pim_array: the PIM block, a ROWS x COLS array of 1-bit multiply cells.
//
// Every cell holds one weight bit and multiplies it with the input bit of its
// row (see pim_cell). The products of each column are summed into col_sum,
// the count of rows whose input bit and weight bit are both one. A multi-bit
// weight occupies several columns of one row, bit j of the weight in column j
// of its slice; the shift-accumulator weighs the columns afterwards.
// The paper gives the cell function and the 16 columns (four ACC4 units of
// four columns); how a column's products are read out is not described, and
// here it is a plain digital population count. ROWS = 8 follows the number of
// rows drawn in the figure, a count the paper does not state.
//
// Interface: a row write port (w_we, w_addr, w_data) that stores a COLS-bit
// word in one row, the row input bits, and the column sums.
// Timing: writes take effect at the clock edge; col_sum is combinational.
module pim_array #(
  parameter int unsigned ROWS = 8,
  parameter int unsigned COLS = 16,
  localparam int unsigned AW  = (ROWS > 1) ? $clog2(ROWS) : 1,
  localparam int unsigned SB  = $clog2(ROWS + 1)
) (
  input  logic            clk,
  input  logic            w_we,
  input  logic [AW-1:0]   w_addr,
  input  logic [COLS-1:0] w_data,
  input  logic [ROWS-1:0] row_bit,
  output logic [SB-1:0]   col_sum [COLS]
);

  logic [COLS-1:0] prod [ROWS];

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    for (genvar c = 0; c < COLS; c++) begin : g_col
      pim_cell u_cell (
        .clk    (clk),
        .we     (w_we && (w_addr == AW'(r))),
        .wbit   (w_data[c]),
        .in_bit (row_bit[r]),
        .prod   (prod[r][c])
      );
    end
  end

  always_comb begin
    for (int c = 0; c < COLS; c++) begin
      col_sum[c] = '0;
      for (int r = 0; r < ROWS; r++) col_sum[c] += SB'(prod[r][c]);
    end
  end

endmodule
