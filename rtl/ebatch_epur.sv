// ebatch_epur: E-PUR LSTM accelerator with E-Batch hardware support.
//
// Four compute units evaluate the four LSTM gates (i, f, g, o) of the same
// neuron for up to LANES sequences at once; each lane (one DPU and one MU per
// compute unit, plus a private input buffer) carries one sequence, and each
// compute unit's weight buffer is shared by all its lanes. A per-lane
// cell_update stage turns the four gate outputs into c_t and h_t, which go
// out to main memory; inter-layer results live in main memory, as in the
// paper, and are loaded back into the input buffers for the next time-step
// or layer.
//
// E-Batch adds a request buffer (lane and time-step counts of every
// request of the batch), the N register, a lane-idle interrupt that lets
// the runtime add a request to an idle lane while the first layer runs, and
// a report of the time-steps evaluated per request at the end of a batch.
// All of that is driven by batch_controller.
//
// Main memory (DRAM) and the runtime (host CPU software) are outside this
// module; their connections are ports:
//   * runtime: configuration registers, request append (valid/ready),
//     batch_start, interrupts with pending/ack bits, completion report.
//   * weight load: while wl_req is high, memory writes weight words
//     (wl_we, wl_cu selects the gate's compute unit) and biases, then
//     pulses wl_done. Happens at the start of every layer.
//   * input load: while ld_req is high, memory writes for every active lane
//     (lane_active, sched_req = request id, sched_ts = time-step index
//     within this batch) its [x_t ; h_{t-1}] words into the input buffers
//     (ld_sel = 0; written to all four compute units at once) and its
//     c_{t-1} words into the cell-state store (ld_sel = 1), then pulses
//     ld_done.
//   * output: one beat per neuron with h_t and c_t of every lane; out_mask
//     marks the lanes that computed a real time-step.
// The port-level protocol and the number formats are this design's choices;
// block structure, sizes and the E-Batch rules follow the paper. Only the
// LSTM cell is built: the paper does not give its GRU equations.
module ebatch_epur
  import ebatch_pkg::*;
#(
  parameter int unsigned LANES    = 64,
  parameter int unsigned WIDTH    = 64,
  parameter int unsigned WB_BYTES = 2097152,
  parameter int unsigned IB_BYTES = 131072,
  parameter int unsigned NEURONS  = 1024,
  parameter int unsigned ENTRIES  = 256,
  localparam int unsigned WORD_W   = WIDTH * DW,
  localparam int unsigned WB_DEPTH = (WB_BYTES * 8) / WORD_W,
  localparam int unsigned WB_AW    = (WB_DEPTH > 1) ? $clog2(WB_DEPTH) : 1,
  localparam int unsigned IB_DEPTH = ((IB_BYTES / LANES) * 8) / WORD_W,
  localparam int unsigned IB_AW    = (IB_DEPTH > 1) ? $clog2(IB_DEPTH) : 1,
  localparam int unsigned CPW      = WORD_W / CW,
  localparam int unsigned CWORDS   = (NEURONS + CPW - 1) / CPW,
  localparam int unsigned CAW      = (CWORDS > 1) ? $clog2(CWORDS) : 1,
  localparam int unsigned LD_AW    = (IB_AW > CAW) ? IB_AW : CAW,
  localparam int unsigned NW       = (NEURONS > 1) ? $clog2(NEURONS) : 1,
  localparam int unsigned LW       = (LANES > 1) ? $clog2(LANES) : 1,
  localparam int unsigned IW       = (ENTRIES > 1) ? $clog2(ENTRIES) : 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // runtime: configuration
  input  logic                 cfg_we,
  input  logic [2:0]           cfg_addr,
  input  logic [31:0]          cfg_wdata,
  // runtime: batch contents and control
  input  logic                 req_valid,
  output logic                 req_ready,
  input  req_desc_t            req_desc,
  input  logic                 batch_start,
  output logic                 busy,
  output logic                 locked,
  output logic [7:0]           layer,
  output logic [TS_W-1:0]      ts_cnt,
  // runtime: interrupts
  output logic                 irq,
  output logic [LANES-1:0]     idle_pend,
  input  logic [LANES-1:0]     idle_ack,
  output logic                 done_pend,
  input  logic                 done_ack,
  // runtime: completion report
  output logic                 rep_valid,
  input  logic                 rep_ready,
  output req_report_t          rep_data,
  // main memory: weights and biases
  output logic                 wl_req,
  input  logic                 wl_done,
  input  logic                 wl_we,
  input  logic [1:0]           wl_cu,
  input  logic [WB_AW-1:0]     wl_addr,
  input  logic [WORD_W-1:0]    wl_data,
  input  logic                 bias_we,
  input  logic [1:0]           bias_cu,
  input  logic [NW-1:0]        bias_addr,
  input  cell_t                bias_data,
  // main memory: per-time-step inputs and cell state
  output logic                 ld_req,
  input  logic                 ld_done,
  output logic [LANES-1:0]     lane_active,
  output logic [RID_W-1:0]     sched_req [LANES],
  output logic [TS_W-1:0]      sched_ts  [LANES],
  input  logic                 ld_we,
  input  logic                 ld_sel,
  input  logic [LW-1:0]        ld_lane,
  input  logic [LD_AW-1:0]     ld_addr,
  input  logic [WORD_W-1:0]    ld_data,
  // main memory: results
  output logic                 out_valid,
  output logic [NW-1:0]        out_neuron,
  output logic [LANES-1:0]     out_mask,
  output data_t                out_h [LANES],
  output cell_t                out_c [LANES]
);

  // ---- request buffer ----
  logic              rb_accept_en, rb_clear, rb_clear_cur, rb_latch_l0, rb_layer0;
  logic              rb_inc_valid, rb_lk_hit;
  logic [IW-1:0]     rb_inc_idx, rb_lk_idx, rb_rd_idx;
  logic [LANE_W-1:0] rb_lk_lane;
  req_entry_t        rb_rd_entry;
  logic [IW:0]       rb_count;
  logic [TS_W-1:0]   rb_max_steps;

  request_buffer #(.ENTRIES(ENTRIES)) u_rbuf (
    .clk       (clk),
    .rst_n     (rst_n),
    .accept_en (rb_accept_en),
    .wr_valid  (req_valid),
    .wr_ready  (req_ready),
    .wr_desc   (req_desc),
    .clear     (rb_clear),
    .clear_cur (rb_clear_cur),
    .latch_l0  (rb_latch_l0),
    .layer0    (rb_layer0),
    .inc_valid (rb_inc_valid),
    .inc_idx   (rb_inc_idx),
    .lk_lane   (rb_lk_lane),
    .lk_hit    (rb_lk_hit),
    .lk_idx    (rb_lk_idx),
    .rd_idx    (rb_rd_idx),
    .rd_entry  (rb_rd_entry),
    .count     (rb_count),
    .max_steps (rb_max_steps)
  );

  // ---- controller ----
  logic             iss_valid, iss_first, iss_last;
  logic [WB_AW-1:0] iss_waddr;
  logic [IB_AW-1:0] iss_iaddr;
  logic [NW-1:0]    iss_neuron;

  batch_controller #(
    .LANES(LANES), .ENTRIES(ENTRIES), .NEURONS(NEURONS),
    .WB_DEPTH(WB_DEPTH), .IB_DEPTH(IB_DEPTH), .PIPE_LAT(5)
  ) u_ctrl (
    .clk          (clk),
    .rst_n        (rst_n),
    .cfg_we       (cfg_we),
    .cfg_addr     (cfg_addr),
    .cfg_wdata    (cfg_wdata),
    .batch_start  (batch_start),
    .busy         (busy),
    .locked       (locked),
    .layer        (layer),
    .ts_cnt       (ts_cnt),
    .irq          (irq),
    .idle_pend    (idle_pend),
    .idle_ack     (idle_ack),
    .done_pend    (done_pend),
    .done_ack     (done_ack),
    .rb_accept_en (rb_accept_en),
    .rb_clear     (rb_clear),
    .rb_clear_cur (rb_clear_cur),
    .rb_latch_l0  (rb_latch_l0),
    .rb_layer0    (rb_layer0),
    .rb_inc_valid (rb_inc_valid),
    .rb_inc_idx   (rb_inc_idx),
    .rb_lk_lane   (rb_lk_lane),
    .rb_lk_hit    (rb_lk_hit),
    .rb_lk_idx    (rb_lk_idx),
    .rb_rd_idx    (rb_rd_idx),
    .rb_rd_entry  (rb_rd_entry),
    .rb_count     (rb_count),
    .rb_max_steps (rb_max_steps),
    .wl_req       (wl_req),
    .wl_done      (wl_done),
    .ld_req       (ld_req),
    .ld_done      (ld_done),
    .lane_active  (lane_active),
    .sched_req    (sched_req),
    .sched_ts     (sched_ts),
    .iss_valid    (iss_valid),
    .iss_first    (iss_first),
    .iss_last     (iss_last),
    .iss_waddr    (iss_waddr),
    .iss_iaddr    (iss_iaddr),
    .iss_neuron   (iss_neuron),
    .rep_valid    (rep_valid),
    .rep_ready    (rep_ready),
    .rep_data     (rep_data)
  );

  // ---- four compute units, one per gate ----
  logic          gate_valid [NGATES];
  logic [NW-1:0] gate_neuron [NGATES];
  data_t         gate_y [NGATES][LANES];

  for (genvar g = 0; g < NGATES; g++) begin : g_cu
    compute_unit #(
      .LANES(LANES), .WIDTH(WIDTH), .WB_BYTES(WB_BYTES), .IB_BYTES(IB_BYTES),
      .NEURONS(NEURONS), .FUNC((g == int'(GATE_G)) ? ACT_TANH : ACT_SIGMOID)
    ) u_cu (
      .clk         (clk),
      .rst_n       (rst_n),
      .wb_we       (wl_we && wl_cu == 2'(g)),
      .wb_waddr    (wl_addr),
      .wb_wdata    (wl_data),
      .bias_we     (bias_we && bias_cu == 2'(g)),
      .bias_waddr  (bias_addr),
      .bias_wdata  (bias_data),
      .ib_we       (ld_we && !ld_sel),
      .ib_lane     (ld_lane),
      .ib_waddr    (IB_AW'(ld_addr)),
      .ib_wdata    (ld_data),
      .iss_valid   (iss_valid),
      .iss_first   (iss_first),
      .iss_last    (iss_last),
      .iss_waddr   (iss_waddr),
      .iss_iaddr   (iss_iaddr),
      .iss_neuron  (iss_neuron),
      .lane_en     (lane_active),
      .gate_valid  (gate_valid[g]),
      .gate_neuron (gate_neuron[g]),
      .gate_y      (gate_y[g])
    );
  end

  // ---- per-lane LSTM cell update ----
  logic [NW-1:0] lane_neuron [LANES];

  for (genvar l = 0; l < LANES; l++) begin : g_cell
    cell_update #(.NEURONS(NEURONS), .WORD_W(WORD_W)) u_cell (
      .clk        (clk),
      .rst_n      (rst_n),
      .en         (lane_active[l]),
      .c_we       (ld_we && ld_sel && ld_lane == LW'(l)),
      .c_waddr    (CAW'(ld_addr)),
      .c_wdata    (ld_data),
      .in_valid   (gate_valid[GATE_I]),
      .neuron     (gate_neuron[GATE_I]),
      .gi         (gate_y[GATE_I][l]),
      .gf         (gate_y[GATE_F][l]),
      .gg         (gate_y[GATE_G][l]),
      .go         (gate_y[GATE_O][l]),
      .out_valid  (out_mask[l]),
      .out_neuron (lane_neuron[l]),
      .out_h      (out_h[l]),
      .out_c      (out_c[l])
    );
  end

  // Neuron tag of the output beat, aligned with the cell-update latency.
  logic [NW-1:0] n_d1, n_d2;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      n_d1 <= '0; n_d2 <= '0;
    end else begin
      n_d1 <= gate_neuron[GATE_I];
      n_d2 <= n_d1;
    end
  end

  assign out_valid  = |out_mask;
  assign out_neuron = n_d2;

  // Every lane that produced a result reports the same neuron as the tag.
  for (genvar l = 0; l < LANES; l++) begin : g_tag_chk
    assert property (@(posedge clk) disable iff (!rst_n)
      out_mask[l] |-> lane_neuron[l] == n_d2);
  end

  // The four compute units run in lock-step.
  assert property (@(posedge clk) disable iff (!rst_n)
    gate_valid[GATE_I] == gate_valid[GATE_O] && gate_neuron[GATE_I] == gate_neuron[GATE_F]);

endmodule
