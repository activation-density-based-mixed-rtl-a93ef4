// pim_cell: one 1-bit SRAM-memory-and-multiply cell of the PIM block.
//
// The cell stores one weight bit, written through the array's row write
// port, and multiplies it by the input bit on its row. A 1-bit unsigned
// product is the AND of the two bits. The storage bit models the SRAM
// cell: like an SRAM it has no reset and must be written before it is read.
//
// Timing: the stored bit changes on the clock edge of a write; prod is
// combinational from the stored bit and in_bit.
module pim_cell (
  input  logic clk,
  input  logic we,       // write this cell's row
  input  logic wbit,     // weight bit to store
  input  logic in_bit,   // input (activation) bit on the row
  output logic prod      // in_bit * stored weight bit
);

  logic w_q;

  always_ff @(posedge clk) begin
    if (we) w_q <= wbit;
  end

  assign prod = in_bit & w_q;

endmodule
