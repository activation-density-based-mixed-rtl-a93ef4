// pim_controller: sequences one multi-bit MAC operation of the PIM tile.
//
// On start it latches the layer's precision and either runs or, for a
// removed layer (layer_off) or one wider than 16 bits (unsupported), goes
// straight to DONE without computing (a bypass). A run is:
//   LOAD   1 cycle   decoder captures the activations, accumulators clear
//   BITS   P cycles  one activation bit-plane per cycle into ACC4, t = 0..P-1
//   COMB8  1 cycle   ACC8 <- ACC4 pairs          (8- and 16-bit only)
//   COMB16 1 cycle   ACC16 <- ACC8 pair          (16-bit only)
//   DONE   1 cycle   done = 1, result of the precision's level is valid
// so only the accumulator levels a precision needs are activated, as the
// paper describes; 2- and 4-bit results are final in ACC4, 8-bit in ACC8,
// 16-bit in ACC16. The state machine, the cycle counts and the bypass are
// this design's own; the paper does not describe the control.
//
// Timing: start is sampled in IDLE only; busy is high from LOAD to DONE.
module pim_controller
  import pim_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       start,
  input  prec_e      prec,         // precision of the layer (from the mapper)
  input  logic       skip,         // layer_off or unsupported: do not compute
  output logic       busy,
  output logic       load,         // to input decoder and accumulator clear
  output logic       shift,        // to input decoder
  output logic       acc_en,       // accumulate a bit-plane into ACC4
  output logic [3:0] bitpos,       // index of the bit-plane on the rows
  output logic       en8,
  output logic       en16,
  output logic       done,         // one-cycle pulse at the end
  output logic       done_skip,    // done without a result (bypass)
  output prec_e      prec_q        // precision of the running operation
);

  typedef enum logic [2:0] {
    S_IDLE, S_LOAD, S_BITS, S_COMB8, S_COMB16, S_DONE
  } state_e;

  state_e     state;
  logic [3:0] t_q;
  logic       skip_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= S_IDLE;
      t_q    <= '0;
      skip_q <= 1'b0;
      prec_q <= PREC_2;
    end else begin
      unique case (state)
        S_IDLE: if (start) begin
          prec_q <= prec;
          skip_q <= skip;
          state  <= skip ? S_DONE : S_LOAD;
        end
        S_LOAD: begin
          t_q   <= '0;
          state <= S_BITS;
        end
        S_BITS: begin
          t_q <= t_q + 4'd1;
          if (32'(t_q) == prec_bits(prec_q) - 1)
            state <= (prec_q == PREC_8 || prec_q == PREC_16) ? S_COMB8 : S_DONE;
        end
        S_COMB8:  state <= (prec_q == PREC_16) ? S_COMB16 : S_DONE;
        S_COMB16: state <= S_DONE;
        S_DONE: begin
          skip_q <= 1'b0;
          state  <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  always_comb begin
    busy      = (state != S_IDLE);
    load      = (state == S_LOAD);
    shift     = (state == S_BITS);
    acc_en    = (state == S_BITS);
    bitpos    = t_q;
    en8       = (state == S_COMB8);
    en16      = (state == S_COMB16);
    done      = (state == S_DONE);
    done_skip = (state == S_DONE) && skip_q;
  end

  // A bit-plane index never exceeds the widest precision.
  assert property (@(posedge clk) disable iff (!rst_n)
                   acc_en |-> (32'(bitpos) < prec_bits(prec_q)))
    else $error("pim_controller: bit-plane index out of range");

endmodule
