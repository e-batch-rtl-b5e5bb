// compute_unit: one E-PUR compute unit (CU) extended with batching lanes.
//
// A CU evaluates one LSTM gate (i, f, g or o) for LANES sequences at once.
// It holds one weight buffer shared by all lanes and, per lane, a private
// input buffer, a dot-product unit (DPU) and a multi-functional unit (MU),
// as in the paper's CU figure. Every issue beat reads one weight word and
// broadcasts it to all lanes; each lane multiplies it with its own input
// word. After the K beats of a neuron, each lane's MU adds the neuron's
// bias and applies the gate's activation.
//
// Following the paper: shared weight buffer with broadcast, private input
// buffers, one DPU + MU per lane, 64-wide DPU, 2 MiB / 128 KiB buffers.
// This design's choice: the bias table (one 16-bit entry per neuron, up to
// NEURONS), the issue interface driven by the batch controller, and the
// per-lane enable that stands for power gating an idle lane.
//
// Interface: weights, biases and input words are written through simple
// write ports. Issue beats carry the weight and input word addresses, the
// neuron index and first/last flags. Timing: gate_valid, gate_neuron and
// gate_y come out 3 cycles after the `last` beat of a neuron (buffer read,
// DPU accumulate, MU), one neuron every K cycles when issued back to back.
module compute_unit
  import ebatch_pkg::*;
#(
  parameter int unsigned LANES    = 64,
  parameter int unsigned WIDTH    = 64,
  parameter int unsigned WB_BYTES = 2097152,
  parameter int unsigned IB_BYTES = 131072,
  parameter int unsigned NEURONS  = 1024,
  parameter act_e        FUNC     = ACT_SIGMOID,
  localparam int unsigned WB_DEPTH = (WB_BYTES * 8) / (WIDTH * DW),
  localparam int unsigned WB_AW    = (WB_DEPTH > 1) ? $clog2(WB_DEPTH) : 1,
  localparam int unsigned IB_LANE  = IB_BYTES / LANES,
  localparam int unsigned IB_DEPTH = (IB_LANE * 8) / (WIDTH * DW),
  localparam int unsigned IB_AW    = (IB_DEPTH > 1) ? $clog2(IB_DEPTH) : 1,
  localparam int unsigned NW       = (NEURONS > 1) ? $clog2(NEURONS) : 1,
  localparam int unsigned LW       = (LANES > 1) ? $clog2(LANES) : 1
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // weight and bias load
  input  logic                  wb_we,
  input  logic [WB_AW-1:0]      wb_waddr,
  input  logic [WIDTH*DW-1:0]   wb_wdata,
  input  logic                  bias_we,
  input  logic [NW-1:0]         bias_waddr,
  input  cell_t                 bias_wdata,
  // input buffer load, one lane at a time
  input  logic                  ib_we,
  input  logic [LW-1:0]         ib_lane,
  input  logic [IB_AW-1:0]      ib_waddr,
  input  logic [WIDTH*DW-1:0]   ib_wdata,
  // issue beats from the batch controller
  input  logic                  iss_valid,
  input  logic                  iss_first,
  input  logic                  iss_last,
  input  logic [WB_AW-1:0]      iss_waddr,
  input  logic [IB_AW-1:0]      iss_iaddr,
  input  logic [NW-1:0]         iss_neuron,
  input  logic [LANES-1:0]      lane_en,
  // gate outputs, all lanes together
  output logic                  gate_valid,
  output logic [NW-1:0]         gate_neuron,
  output data_t                 gate_y [LANES]
);

  // ---- shared weight buffer (broadcast) ----
  logic [WIDTH*DW-1:0] w_word;

  weight_buffer #(.BYTES(WB_BYTES), .WIDTH(WIDTH), .DW(DW)) u_wbuf (
    .clk   (clk),
    .we    (wb_we),
    .waddr (wb_waddr),
    .wdata (wb_wdata),
    .re    (iss_valid),
    .raddr (iss_waddr),
    .rdata (w_word)
  );

  data_t w_vec [WIDTH];
  always_comb begin
    for (int i = 0; i < WIDTH; i++) w_vec[i] = data_t'(w_word[i*DW +: DW]);
  end

  // ---- bias table ----
  cell_t bias_mem [NEURONS];
  cell_t bias_q;

  // ---- control pipeline: issue (s0) -> data (s1) -> acc (s2) -> mu (s3) ----
  logic          v1, first1, last1;
  logic [NW-1:0] n1, n2, n3;
  logic          v2;

  always_ff @(posedge clk) begin
    if (bias_we) bias_mem[bias_waddr] <= bias_wdata;
    if (v1 && last1) bias_q <= bias_mem[n1];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0; first1 <= 1'b0; last1 <= 1'b0;
      v2 <= 1'b0; gate_valid <= 1'b0;
      n1 <= '0; n2 <= '0; n3 <= '0;
    end else begin
      v1     <= iss_valid;
      first1 <= iss_first;
      last1  <= iss_last;
      n1     <= iss_neuron;
      v2     <= v1 && last1;
      n2     <= n1;
      gate_valid <= v2;
      n3     <= n2;
    end
  end

  assign gate_neuron = n3;

  // ---- lanes: input buffer -> DPU -> MU ----
  for (genvar l = 0; l < LANES; l++) begin : g_lane
    logic [WIDTH*DW-1:0] x_word;
    data_t               x_vec [WIDTH];
    logic                acc_valid;
    acc_t                acc;
    logic                y_valid;

    input_buffer #(.BYTES(IB_LANE), .WIDTH(WIDTH), .DW(DW)) u_ibuf (
      .clk   (clk),
      .we    (ib_we && (ib_lane == LW'(l))),
      .waddr (ib_waddr),
      .wdata (ib_wdata),
      .re    (iss_valid && lane_en[l]),
      .raddr (iss_iaddr),
      .rdata (x_word)
    );

    always_comb begin
      for (int i = 0; i < WIDTH; i++) x_vec[i] = data_t'(x_word[i*DW +: DW]);
    end

    dpu #(.WIDTH(WIDTH)) u_dpu (
      .clk       (clk),
      .rst_n     (rst_n),
      .en        (lane_en[l]),
      .in_valid  (v1),
      .first     (first1),
      .last      (last1),
      .x         (x_vec),
      .w         (w_vec),
      .acc_valid (acc_valid),
      .acc       (acc)
    );

    mu u_mu (
      .clk       (clk),
      .rst_n     (rst_n),
      .in_valid  (acc_valid),
      .acc       (acc),
      .bias      (bias_q),
      .func      (FUNC),
      .out_valid (y_valid),
      .y         (gate_y[l])
    );

    // An enabled lane's MU finishes in step with the unit's control pipeline.
    assert property (@(posedge clk) disable iff (!rst_n)
      lane_en[l] |-> y_valid == gate_valid);
  end

endmodule
