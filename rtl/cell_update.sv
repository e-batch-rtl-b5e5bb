// cell_update: LSTM element-wise stage of one lane.
//
// Combines the four gate outputs that the four compute units produce for the
// same neuron k of the same lane:
//     c_t[k] = f[k] * c_{t-1}[k] + i[k] * g[k]
//     h_t[k] = o[k] * tanh(c_t[k])
// (the LSTM cell equations). c_{t-1} comes from a small per-lane cell-state
// store, which is loaded from main memory together with the lane's input
// buffer before a time-step and is updated in place as each c_t[k] is made.
//
// The paper assigns these scalar operations to the multi-functional units
// but does not say where they sit or where c is kept; the separate stage
// and the per-lane store (NEURONS 16-bit entries, written a word of 32
// entries at a time) are this design's choice. Formats: gates and h Q1.6,
// c Q4.12 with saturation; products are truncated (arithmetic shift).
//
// Timing: out_valid, out_h and out_c follow in_valid by 2 cycles (store
// read, then compute and register). A power-gated lane (en = 0) leaves its
// store untouched and raises no out_valid.
module cell_update
  import ebatch_pkg::*;
#(
  parameter int unsigned NEURONS = 1024,
  parameter int unsigned WORD_W  = 512,
  localparam int unsigned CPW    = WORD_W / CW,
  localparam int unsigned CWORDS = (NEURONS + CPW - 1) / CPW,
  localparam int unsigned NW     = (NEURONS > 1) ? $clog2(NEURONS) : 1,
  localparam int unsigned CAW    = (CWORDS > 1) ? $clog2(CWORDS) : 1,
  localparam int unsigned EW     = (CPW > 1) ? $clog2(CPW) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              en,
  // cell-state load from main memory
  input  logic              c_we,
  input  logic [CAW-1:0]    c_waddr,
  input  logic [WORD_W-1:0] c_wdata,
  // gate outputs of neuron `neuron`
  input  logic              in_valid,
  input  logic [NW-1:0]     neuron,
  input  data_t             gi,
  input  data_t             gf,
  input  data_t             gg,
  input  data_t             go,
  // results
  output logic              out_valid,
  output logic [NW-1:0]     out_neuron,
  output data_t             out_h,
  output cell_t             out_c
);

  cell_t cmem [CWORDS][CPW];

  logic          v1;
  logic [NW-1:0] n1;
  data_t         i1, f1, g1, o1;
  cell_t         cprev;

  logic signed [31:0] fc, ig, cnew32, th;
  cell_t              cnew;

  function automatic logic [CAW-1:0] word_of(input logic [NW-1:0] n);
    return CAW'(32'(n) / CPW);
  endfunction

  function automatic logic [EW-1:0] elem_of(input logic [NW-1:0] n);
    return EW'(32'(n) % CPW);
  endfunction

  always_comb begin
    fc     = (32'(f1) * 32'(cprev)) >>> FRAC_D;   // Q.6 * Q.12 -> Q.12
    ig     = 32'(i1) * 32'(g1);                   // Q.6 * Q.6  -> Q.12
    cnew32 = fc + ig;
    cnew   = sat_cell(cnew32);
    th     = tanh_q12(32'(cnew));
  end

  always_ff @(posedge clk) begin
    if (c_we) begin
      for (int e = 0; e < CPW; e++) cmem[c_waddr][e] <= cell_t'(c_wdata[e*CW +: CW]);
    end
    if (in_valid && en) cprev <= cmem[word_of(neuron)][elem_of(neuron)];
    if (v1) cmem[word_of(n1)][elem_of(n1)] <= cnew;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0; n1 <= '0;
      i1 <= '0; f1 <= '0; g1 <= '0; o1 <= '0;
      out_valid <= 1'b0; out_neuron <= '0; out_h <= '0; out_c <= '0;
    end else begin
      v1 <= in_valid && en;
      if (in_valid) begin
        n1 <= neuron;
        i1 <= gi; f1 <= gf; g1 <= gg; o1 <= go;
      end
      out_valid <= v1;
      if (v1) begin
        out_neuron <= n1;
        out_c      <= cnew;
        out_h      <= q12_to_q6((32'(o1) * th) >>> FRAC_D);  // Q.6 * Q.12 -> Q.12
      end
    end
  end

endmodule
