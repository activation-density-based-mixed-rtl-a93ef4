// pim_accelerator: one precision-scalable process-in-memory tile.
//
// The tile computes dot products between ROWS input activations and weights
// stored in a 1-bit SRAM-multiply array, at a precision chosen per layer:
//   - precision_mapper rounds the layer's trained bit-width k_bits up to
//     2, 4, 8 or 16 bits (or flags a removed / too-wide layer);
//   - input_decoder presents the activations bit-serially to the rows;
//   - pim_array multiplies each input bit with the stored weight bits and
//     sums every column;
//   - shift_accumulator weighs columns and bit-planes in ACC4,1..4, joins
//     them in ACC8,1..2 and ACC16,1;
//   - pim_controller sequences one operation and activates only the
//     accumulator levels the precision needs.
// The three sections (input decoder, PIM block, shift-accumulator block) and
// the accumulator tree follow the paper's tile; the weight layout, the
// bit-serial input order and the control are this design's own.
//
// Weight layout (row r holds the weights that multiply activation r):
//   2/4-bit: four independent weights per row, weight i in columns 4i..4i+3
//            (2-bit weights zero-extended); results res4[0..3], valid4.
//   8-bit:   two weights per row, weight k in columns 8k..8k+7;
//            results res8[0..1], valid8.
//   16-bit:  one weight per row in columns 0..15; result res16, valid16.
// Activations and weights are unsigned integers, as produced by the k-bit
// quantizer x_q = round((x - x_min)(2^k - 1)/(x_max - x_min)); activation
// bits above the precision are not read.
//
// Timing: write weights (one row per cycle) while idle; pulse start with
// k_bits, act_in and row_en stable in that cycle (they are sampled one cycle
// later, in LOAD, so hold them until busy rises). done pulses P + 2
// cycles after start for 2/4-bit, P + 3 for 8-bit and P + 4 for 16-bit; the
// results stay valid until the next start. A removed or too-wide layer
// finishes one cycle after start with done_skip and no valid result.
module pim_accelerator
  import pim_pkg::*;
#(
  parameter int unsigned ROWS = 8,
  localparam int unsigned AW  = (ROWS > 1) ? $clog2(ROWS) : 1,
  localparam int unsigned SB  = $clog2(ROWS + 1),
  localparam int unsigned W4  = SB + 4 + MAX_PREC,
  localparam int unsigned W8  = SB + 8 + MAX_PREC,
  localparam int unsigned W16 = SB + 16 + MAX_PREC
) (
  input  logic                clk,
  input  logic                rst_n,
  // weight write port of the PIM block
  input  logic                w_we,
  input  logic [AW-1:0]       w_addr,
  input  logic [NUM_COLS-1:0] w_data,
  // one MAC operation
  input  logic                start,
  input  logic [KW-1:0]       k_bits,            // layer bit-width k_l
  input  logic [MAX_PREC-1:0] act_in [ROWS],     // activations of layer l-1
  input  logic [ROWS-1:0]     row_en,            // 0 = pruned input channel
  output logic                busy,
  output logic                done,
  output logic                done_skip,
  output logic [1:0]          prec,              // precision used (prec_e)
  output logic [KW-1:0]       eff_bits,          // its number of bits
  output logic                layer_off,
  output logic                unsupported,
  output logic [W4-1:0]       res4  [NUM_ACC4],  // ACC4,1..4
  output logic [W8-1:0]       res8  [NUM_ACC8],  // ACC8,1..2
  output logic [W16-1:0]      res16,             // ACC16,1
  output logic                valid4,
  output logic                valid8,
  output logic                valid16
);

  prec_e           prec_m, prec_q;
  logic            load, shift, acc_en, en8, en16;
  logic [3:0]      bitpos;
  logic [ROWS-1:0] row_bit;
  logic [SB-1:0]   col_sum [NUM_COLS];
  logic            res_ok_q;

  precision_mapper u_mapper (
    .k_bits      (k_bits),
    .prec        (prec_m),
    .eff_bits    (eff_bits),
    .layer_off   (layer_off),
    .unsupported (unsupported)
  );

  pim_controller u_ctrl (
    .clk       (clk),
    .rst_n     (rst_n),
    .start     (start),
    .prec      (prec_m),
    .skip      (layer_off || unsupported),
    .busy      (busy),
    .load      (load),
    .shift     (shift),
    .acc_en    (acc_en),
    .bitpos    (bitpos),
    .en8       (en8),
    .en16      (en16),
    .done      (done),
    .done_skip (done_skip),
    .prec_q    (prec_q)
  );

  input_decoder #(.ROWS(ROWS)) u_dec (
    .clk     (clk),
    .rst_n   (rst_n),
    .load    (load),
    .shift   (shift),
    .act_in  (act_in),
    .row_en  (row_en),
    .row_bit (row_bit)
  );

  pim_array #(.ROWS(ROWS), .COLS(NUM_COLS)) u_array (
    .clk     (clk),
    .w_we    (w_we && !busy),
    .w_addr  (w_addr),
    .w_data  (w_data),
    .row_bit (row_bit),
    .col_sum (col_sum)
  );

  shift_accumulator #(.ROWS(ROWS)) u_acc (
    .clk     (clk),
    .rst_n   (rst_n),
    .clear   (load),
    .en      (acc_en),
    .bitpos  (bitpos),
    .en8     (en8),
    .en16    (en16),
    .col_sum (col_sum),
    .acc4    (res4),
    .acc8    (res8),
    .acc16   (res16)
  );

  // A result is held valid from done until the next start.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                    res_ok_q <= 1'b0;
    else if (start && !busy)       res_ok_q <= 1'b0;
    else if (done && !done_skip)   res_ok_q <= 1'b1;
  end

  logic res_ok;
  assign res_ok  = res_ok_q || (done && !done_skip);
  assign prec    = prec_q;
  assign valid4  = res_ok && (prec_q == PREC_2 || prec_q == PREC_4);
  assign valid8  = res_ok && (prec_q == PREC_8);
  assign valid16 = res_ok && (prec_q == PREC_16);

endmodule
