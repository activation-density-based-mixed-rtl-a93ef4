// input_decoder: feeds one layer's input activations to the PIM rows.
//
// Each row of the PIM block receives one activation of the previous layer.
// The cells multiply single bits, so the decoder presents the activations
// bit-serially: on load it captures all ROWS activations, and from the next
// cycle on row_bit[r] is bit t of activation r, t counting up from the LSB by
// one on every shift. Rows cleared in row_en (pruned input channels) are held
// at zero for the whole operation, so they add nothing to any column.
// The paper says only that the decoder feeds the activations "in a structured
// pattern"; the bit-serial, LSB-first order and the row mask are this
// design's choice.
//
// Timing: load and shift are single-cycle strobes from the controller;
// row_bit is a registered output (no combinational path from act_in).
module input_decoder
  import pim_pkg::*;
#(
  parameter int unsigned ROWS = 8
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                load,            // capture act_in and row_en
  input  logic                shift,           // advance to the next bit-plane
  input  logic [MAX_PREC-1:0] act_in [ROWS],   // unsigned activations
  input  logic [ROWS-1:0]     row_en,          // 0 = pruned row
  output logic [ROWS-1:0]     row_bit          // current bit-plane
);

  logic [MAX_PREC-1:0] sreg [ROWS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int r = 0; r < ROWS; r++) sreg[r] <= '0;
    end else if (load) begin
      for (int r = 0; r < ROWS; r++) sreg[r] <= row_en[r] ? act_in[r] : '0;
    end else if (shift) begin
      for (int r = 0; r < ROWS; r++) sreg[r] <= sreg[r] >> 1;
    end
  end

  always_comb begin
    for (int r = 0; r < ROWS; r++) row_bit[r] = sreg[r][0];
  end

  // load and shift come from different controller states.
  assert property (@(posedge clk) disable iff (!rst_n) !(load && shift))
    else $error("input_decoder: load and shift in the same cycle");

endmodule
