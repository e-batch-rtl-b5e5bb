// batch_controller: sequencing of an E-Batch batch on the batched E-PUR.
//
// A batch is a set of request-buffer entries, each bound to a lane. The
// controller evaluates it layer by layer. In each layer it runs time-steps
// in lock-step over all lanes; before every time-step it looks up, lane by
// lane, the lane's active request (the first of its entries with time-steps
// left in this layer), asks main memory to fill the lanes' input buffers and
// cell state, issues the matrix-vector work of every neuron to the four
// compute units, and afterwards counts the time-step in each active entry.
//
// E-Batch rules, from the paper:
//   * A lane that runs out of requests during the first layer raises a
//     lane-idle interrupt. The controller holds the next time-step until
//     the runtime acknowledges it; if the runtime appended a request for
//     the lane first, that request starts right away ("join"). A lane with
//     nothing to do is power gated (its enable is low) instead of computing
//     padding. A request appended later for a gated lane, still during the
//     first layer, starts at the following time-step.
//   * The first layer stops after N time-steps (the N register); N = 0 means
//     the longest request present when the batch starts.
//   * Once the first layer ends the batch is locked: no more joins. Deeper
//     layers replay, per lane, exactly the time-steps the first layer did.
//   * When the last layer ends, the time-steps evaluated per request are
//     reported to the runtime and a batch-done interrupt is raised.
// This design's choices: the register map, the load/compute/report
// handshakes, ending a layer early when every lane is idle, one lane per
// cycle for lookups and count updates, and the interrupt pending/ack bits.
//
// Configuration registers (cfg_we, cfg_addr, cfg_wdata):
//   0 N (max time-steps per lane in a batch), 1 number of layers,
//   2 neurons per gate (cell size), 3 input sub-vectors of layer 1,
//   4 hidden-state sub-vectors (also the input of deeper layers).
// Timing per time-step: LANES cycles of lookup (plus the runtime's response
// time for each lane-idle interrupt), the input load (external),
// neurons*K issue cycles, PIPE_LAT drain cycles, LANES cycles of count update.
module batch_controller
  import ebatch_pkg::*;
#(
  parameter int unsigned LANES    = 64,
  parameter int unsigned ENTRIES  = 256,
  parameter int unsigned NEURONS  = 1024,
  parameter int unsigned WB_DEPTH = 32768,
  parameter int unsigned IB_DEPTH = 32,
  parameter int unsigned PIPE_LAT = 5,
  localparam int unsigned IW      = (ENTRIES > 1) ? $clog2(ENTRIES) : 1,
  localparam int unsigned LW      = (LANES > 1) ? $clog2(LANES) : 1,
  localparam int unsigned NW      = (NEURONS > 1) ? $clog2(NEURONS) : 1,
  localparam int unsigned WB_AW   = (WB_DEPTH > 1) ? $clog2(WB_DEPTH) : 1,
  localparam int unsigned IB_AW   = (IB_DEPTH > 1) ? $clog2(IB_DEPTH) : 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // configuration registers
  input  logic                 cfg_we,
  input  logic [2:0]           cfg_addr,
  input  logic [31:0]          cfg_wdata,
  // batch control from the runtime
  input  logic                 batch_start,
  output logic                 busy,
  output logic                 locked,
  output logic [7:0]           layer,
  output logic [TS_W-1:0]      ts_cnt,
  // interrupts
  output logic                 irq,
  output logic [LANES-1:0]     idle_pend,
  input  logic [LANES-1:0]     idle_ack,
  output logic                 done_pend,
  input  logic                 done_ack,
  // request buffer
  output logic                 rb_accept_en,
  output logic                 rb_clear,
  output logic                 rb_clear_cur,
  output logic                 rb_latch_l0,
  output logic                 rb_layer0,
  output logic                 rb_inc_valid,
  output logic [IW-1:0]        rb_inc_idx,
  output logic [LANE_W-1:0]    rb_lk_lane,
  input  logic                 rb_lk_hit,
  input  logic [IW-1:0]        rb_lk_idx,
  output logic [IW-1:0]        rb_rd_idx,
  input  req_entry_t           rb_rd_entry,
  input  logic [IW:0]          rb_count,
  input  logic [TS_W-1:0]      rb_max_steps,
  // weight load handshake with main memory
  output logic                 wl_req,
  input  logic                 wl_done,
  // per-time-step input load handshake with main memory
  output logic                 ld_req,
  input  logic                 ld_done,
  output logic [LANES-1:0]     lane_active,
  output logic [RID_W-1:0]     sched_req [LANES],
  output logic [TS_W-1:0]      sched_ts  [LANES],
  // issue to the compute units
  output logic                 iss_valid,
  output logic                 iss_first,
  output logic                 iss_last,
  output logic [WB_AW-1:0]     iss_waddr,
  output logic [IB_AW-1:0]     iss_iaddr,
  output logic [NW-1:0]        iss_neuron,
  // completion report to the runtime
  output logic                 rep_valid,
  input  logic                 rep_ready,
  output req_report_t          rep_data
);

  typedef enum logic [3:0] {
    S_IDLE, S_WLOAD, S_LK, S_JOIN, S_LKEND, S_LOAD, S_COMP, S_DRAIN, S_INC, S_LEND, S_REPORT, S_DONE
  } state_e;

  state_e state;

  // configuration registers
  logic [TS_W-1:0] cfg_n;
  logic [7:0]      cfg_layers;
  logic [NW:0]     cfg_neurons;
  logic [IB_AW:0]  cfg_xw, cfg_hw;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cfg_n <= '0; cfg_layers <= 8'd1; cfg_neurons <= (NW+1)'(1);
      cfg_xw <= (IB_AW+1)'(1); cfg_hw <= (IB_AW+1)'(1);
    end else if (cfg_we) begin
      unique case (cfg_addr)
        3'd0: cfg_n       <= cfg_wdata[TS_W-1:0];
        3'd1: cfg_layers  <= cfg_wdata[7:0];
        3'd2: cfg_neurons <= cfg_wdata[NW:0];
        3'd3: cfg_xw      <= cfg_wdata[IB_AW:0];
        3'd4: cfg_hw      <= cfg_wdata[IB_AW:0];
        default: ;
      endcase
    end
  end

  logic [TS_W-1:0]   n_eff;
  logic [LW:0]       lane_i;
  logic [IW-1:0]     cur [LANES];
  logic [LANES-1:0]  notified;
  logic [NW:0]       k;
  logic [IB_AW:0]    j;
  logic [WB_AW:0]    wbase;
  logic [7:0]        drain;
  logic [IW:0]       rep_i;
  logic [IB_AW:0]    kw;

  assign kw = ((layer == 8'd0) ? cfg_xw : cfg_hw) + cfg_hw;

  // request-buffer controls
  assign rb_layer0    = (layer == 8'd0);
  assign rb_accept_en = !locked && (state != S_REPORT) && (state != S_DONE);
  assign rb_lk_lane   = LANE_W'(lane_i);
  assign rb_rd_idx    = (state == S_REPORT) ? rep_i[IW-1:0] : rb_lk_idx;
  assign rb_inc_valid = (state == S_INC) && lane_active[lane_i[LW-1:0]];
  assign rb_inc_idx   = cur[lane_i[LW-1:0]];
  assign rb_clear     = (state == S_DONE);
  assign rb_clear_cur = (state == S_WLOAD) && wl_done;
  assign rb_latch_l0  = (state == S_LEND) && (layer == 8'd0);

  assign busy   = (state != S_IDLE);
  assign wl_req = (state == S_WLOAD);
  assign ld_req = (state == S_LOAD);
  assign irq    = (|idle_pend) || done_pend;

  // issue beats
  assign iss_valid  = (state == S_COMP);
  assign iss_first  = (j == '0);
  assign iss_last   = (j == kw - 1'b1);
  assign iss_waddr  = WB_AW'(wbase + (WB_AW+1)'(j));
  assign iss_iaddr  = IB_AW'(j);
  assign iss_neuron = NW'(k);

  // report
  assign rep_valid = (state == S_REPORT);
  assign rep_data  = '{req_id: rb_rd_entry.req_id, lane: rb_rd_entry.lane,
                       steps_done: rb_rd_entry.steps_l0};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= S_IDLE;
      locked      <= 1'b0;
      layer       <= '0;
      ts_cnt      <= '0;
      n_eff       <= '0;
      lane_i      <= '0;
      lane_active <= '0;
      notified    <= '0;
      idle_pend   <= '0;
      done_pend   <= 1'b0;
      k <= '0; j <= '0; wbase <= '0; drain <= '0; rep_i <= '0;
      for (int l = 0; l < LANES; l++) begin
        cur[l] <= '0; sched_req[l] <= '0; sched_ts[l] <= '0;
      end
    end else begin
      idle_pend <= idle_pend & ~idle_ack;
      if (done_ack) done_pend <= 1'b0;

      unique case (state)
        S_IDLE: begin
          locked <= 1'b0;
          if (batch_start && rb_count != '0) begin
            layer    <= '0;
            n_eff    <= (cfg_n == '0) ? rb_max_steps : cfg_n;
            notified <= '0;
            state    <= S_WLOAD;
          end
        end

        S_WLOAD: if (wl_done) begin
          ts_cnt      <= '0;
          lane_i      <= '0;
          lane_active <= '0;
          state       <= S_LK;
        end

        // one lane per cycle: find its active request
        S_LK: begin
          lane_active[lane_i[LW-1:0]] <= rb_lk_hit;
          cur[lane_i[LW-1:0]]         <= rb_lk_idx;
          if (rb_lk_hit) begin
            sched_req[lane_i[LW-1:0]] <= rb_rd_entry.req_id;
            sched_ts[lane_i[LW-1:0]]  <= rb_rd_entry.steps_cur;
            notified[lane_i[LW-1:0]]  <= 1'b0;
          end
          if (!rb_lk_hit && layer == 8'd0 && !notified[lane_i[LW-1:0]]) begin
            // lane ran dry in the first layer: interrupt the runtime and
            // give it the chance to add a request before going on
            idle_pend[lane_i[LW-1:0]] <= 1'b1;
            notified[lane_i[LW-1:0]]  <= 1'b1;
            state <= S_JOIN;
          end else if (lane_i == (LW+1)'(LANES - 1)) begin
            state <= S_LKEND;
          end else begin
            lane_i <= lane_i + 1'b1;
          end
        end

        // wait for the runtime to acknowledge the lane-idle interrupt, then
        // look the lane up again (it may have appended a request for it)
        S_JOIN: if (!idle_pend[lane_i[LW-1:0]]) state <= S_LK;

        S_LKEND: begin
          lane_i <= '0;
          state  <= (lane_active == '0) ? S_LEND : S_LOAD;
        end

        S_LOAD: if (ld_done) begin
          k <= '0; j <= '0; wbase <= '0;
          state <= S_COMP;
        end

        S_COMP: begin
          if (j == kw - 1'b1) begin
            j     <= '0;
            wbase <= wbase + (WB_AW+1)'(kw);
            k     <= k + 1'b1;
            if (k == cfg_neurons - 1'b1) begin
              drain <= 8'(PIPE_LAT);
              state <= S_DRAIN;
            end
          end else begin
            j <= j + 1'b1;
          end
        end

        S_DRAIN: begin
          if (drain == 8'd0) state <= S_INC;
          else drain <= drain - 1'b1;
        end

        // one lane per cycle: count the evaluated time-step
        S_INC: begin
          if (lane_i == (LW+1)'(LANES - 1)) begin
            lane_i <= '0;
            ts_cnt <= ts_cnt + 1'b1;
            state  <= (ts_cnt + 1'b1 == n_eff) ? S_LEND : S_LK;
          end else begin
            lane_i <= lane_i + 1'b1;
          end
        end

        S_LEND: begin
          lane_active <= '0;
          if (layer == 8'd0) locked <= 1'b1;
          if (layer + 1'b1 == cfg_layers) begin
            rep_i <= '0;
            state <= S_REPORT;
          end else begin
            layer <= layer + 1'b1;
            state <= S_WLOAD;
          end
        end

        S_REPORT: if (rep_ready) begin
          if (rep_i + 1'b1 == rb_count) state <= S_DONE;
          else rep_i <= rep_i + 1'b1;
        end

        S_DONE: begin
          done_pend <= 1'b1;
          locked    <= 1'b0;
          layer     <= '0;
          state     <= S_IDLE;
        end

        default: state <= S_IDLE;
      endcase
    end
  end

  // The weights of one layer must fit the weight buffer, and the input
  // vector must fit an input buffer.
  assert property (@(posedge clk) disable iff (!rst_n)
    state == S_COMP |-> (cfg_neurons * kw) <= (WB_DEPTH) && kw <= (IB_AW+1)'(IB_DEPTH));
  // Issue beats only while computing, and never for a locked-out join.
  assert property (@(posedge clk) disable iff (!rst_n) iss_valid |-> state == S_COMP);

endmodule
