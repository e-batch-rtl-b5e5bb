// dpu: dot-product unit of one E-PUR lane.
//
// Each valid cycle it multiplies WIDTH input elements by WIDTH weights
// (the weight word is broadcast to every lane of a compute unit), sums the
// products in an adder tree and accumulates the sum. A neuron's input and
// weight vectors are split into K sub-vectors of WIDTH elements: the cycle
// flagged `first` restarts the accumulator, the cycle flagged `last`
// completes the neuron and raises `acc_valid` one cycle later together with
// the full dot product. With `first` and `last` both set, K = 1.
//
// The paper fixes the structure (multiply, sum, accumulate over K
// sub-vectors) and the width (64 operations). The 8-bit operands and the
// 32-bit accumulator are this design's choice. A lane that is power gated
// (en = 0) ignores its inputs and produces no result.
//
// Timing: one sub-vector per cycle, result one cycle after the `last` beat.
module dpu
  import ebatch_pkg::*;
#(
  parameter int unsigned WIDTH = 64
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  en,
  input  logic  in_valid,
  input  logic  first,
  input  logic  last,
  input  data_t x [WIDTH],
  input  data_t w [WIDTH],
  output logic  acc_valid,
  output acc_t  acc
);

  acc_t dot;
  acc_t acc_q;

  always_comb begin
    dot = '0;
    for (int i = 0; i < WIDTH; i++) begin
      dot += acc_t'(x[i]) * acc_t'(w[i]);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc_q     <= '0;
      acc_valid <= 1'b0;
    end else begin
      acc_valid <= en && in_valid && last;
      if (en && in_valid) begin
        acc_q <= first ? dot : acc_q + dot;
      end
    end
  end

  assign acc = acc_q;

endmodule
