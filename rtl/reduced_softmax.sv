// reduced_softmax: the reduced softmax activation layer, top of the design.
//
// An inference accelerator only needs the predicted class, not the class
// probabilities. Softmax divides each exp(x_i) by the same positive sum, and exp is
// strictly increasing, so the class with the largest softmax output is the class with
// the largest input x_i. This unit therefore replaces the softmax computation and the
// maximum search behind it by a maximum search on the raw inputs (argmax_tree).
//
// Interface: when in_valid is high at a rising clock edge, the K scores on x are taken
// and their argmax is registered; out_valid is high in the next cycle with class_idx
// (0-based) and max_val. When in_valid is low, out_valid drops and class_idx and
// max_val hold their last values. A new vector can be accepted every cycle; latency is
// one cycle. rst_n is an active-low synchronous reset that clears all outputs.
//
// From the method: a comparator-only layer whose output is the predicted class. This
// design's choices: the valid signalling, the output register (one cycle of latency),
// the reset, the score format and exposing the winning score next to the index.
module reduced_softmax
  import rs_pkg::*;
#(
  parameter int unsigned K  = K_DEFAULT,
  parameter int unsigned W  = W_DEFAULT,
  localparam int unsigned IW = idx_width(K)
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  input  logic signed [W-1:0] x [K],
  output logic                out_valid,
  output logic        [IW-1:0] class_idx,
  output logic signed [W-1:0] max_val
);

  logic        [IW-1:0] idx_c;
  logic signed [W-1:0]  max_c;

  argmax_tree #(.K(K), .W(W)) u_max (
    .x      (x),
    .idx    (idx_c),
    .max_val(max_c)
  );

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      class_idx <= '0;
      max_val   <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        class_idx <= idx_c;
        max_val   <= max_c;
      end
    end
  end

  // The winner is always one of the K real classes.
  a_idx_in_range: assert property (@(posedge clk) disable iff (!rst_n)
                                   out_valid |-> (32'(class_idx) < K));

endmodule
