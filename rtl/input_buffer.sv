// input_buffer: private on-chip input buffer of one E-PUR lane.
//
// Holds the lane's current input vector [x_t ; h_{t-1}] as words of WIDTH
// 8-bit elements, one word per DPU sub-vector: word j holds elements
// WIDTH*j .. WIDTH*j+WIDTH-1. It is filled from main memory before each
// time-step and read by the lane's DPU, one word per cycle.
//
// Size follows the paper (128 KiB per compute unit, shared out as a private
// buffer per lane: 128 KiB / 64 lanes = 2 KiB). The single write port, the
// single synchronous read port and the word layout are this design's choice.
//
// Timing: write on the clock edge; read data valid one cycle after re.
module input_buffer #(
  parameter int unsigned BYTES = 2048,
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
