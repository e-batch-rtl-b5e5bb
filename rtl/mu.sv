// mu: multi-functional unit of one E-PUR lane.
//
// Takes the finished dot product of a neuron from the DPU, adds the neuron's
// bias and applies the gate's activation function: sigmoid for the input,
// forget and output gates, tanh for the update gate g. The result is the
// gate output in signed 8-bit Q1.6.
//
// The paper gives the unit's function (bias, scalar operations, sigmoid and
// tanh) but not how it computes them. Here the activation is the
// piecewise-linear approximation of ebatch_pkg (shifts and adds), and the
// bias is a 16-bit Q.12 value. The LSTM element-wise products that use the
// gate outputs are done in cell_update.
//
// Timing: one registered stage; out_valid follows in_valid by one cycle.
module mu
  import ebatch_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  acc_t  acc,
  input  cell_t bias,
  input  act_e  func,
  output logic  out_valid,
  output data_t y
);

  logic signed [31:0] pre;
  logic signed [31:0] act;

  always_comb begin
    pre = acc + 32'(bias);
    act = (func == ACT_TANH) ? tanh_q12(pre) : sigmoid_q12(pre);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      y         <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) y <= q12_to_q6(act);
    end
  end

endmodule
