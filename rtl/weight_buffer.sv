// weight_buffer: on-chip weight buffer of one E-PUR compute unit.
//
// Holds the weights of one LSTM gate for the layer being evaluated. Word
// k*K + j holds the j-th sub-vector (WIDTH 8-bit weights) of neuron k's
// weight row [W_x W_h], K being the number of sub-vectors per row. Its read
// word is broadcast to the DPUs of all lanes, so one weight fetch serves
// every sequence in the batch; that sharing is what batching saves.
//
// Size follows the paper (2 MiB per compute unit, Table II); the DPU-wide
// word and the one-write one-read port pair are this design's choice.
// Weights are loaded from main memory whenever a new layer starts.
//
// Timing: write on the clock edge; read data valid one cycle after re.
module weight_buffer #(
  parameter int unsigned BYTES = 2097152,
  parameter int unsigned WIDTH = 64,
  parameter int unsigned DW    = 8,
  localparam int unsigned DEPTH = (BYTES * 8) / (WIDTH * DW),
  localparam int unsigned AW    = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic                  clk,
  input  logic                  we,
  input  logic [AW-1:0]         waddr,
  input  logic [WIDTH*DW-1:0]   wdata,
  input  logic                  re,
  input  logic [AW-1:0]         raddr,
  output logic [WIDTH*DW-1:0]   rdata
);

  logic [WIDTH*DW-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end

endmodule
