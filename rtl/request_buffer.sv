// request_buffer: the E-Batch request buffer.
//
// One entry per request of the current batch, in the order the runtime sent
// them: request id, assigned lane, time-steps still to evaluate, time-steps
// evaluated in the first layer and time-steps evaluated in the current layer.
// The requests of one lane are evaluated in entry order, so a lane's active
// request is always its first entry whose current-layer count is below its
// limit; the lookup port finds it. The limit is the remaining time-steps of
// the request in the first layer, and the count reached in the first layer
// for every deeper layer (deeper layers replay exactly what layer one did).
//
// From the paper: the buffer records the lane of each request and the number
// of time-steps to process, and its counts are updated as time-steps are
// evaluated and reported at the end of the batch. The entry count (ENTRIES),
// the field widths and the lookup/replay organisation are this design's.
//
// Interface: append port (valid/ready, accepted only while `accept_en`),
// `clear` empties the buffer, `clear_cur` zeroes all current-layer counts,
// `latch_l0` copies them to the first-layer counts, `inc_valid/inc_idx` adds
// one to an entry's current-layer count. `lk_*` is a combinational lookup by
// lane and `rd_*` a combinational read by index. All updates take effect at
// the clock edge.
module request_buffer
  import ebatch_pkg::*;
#(
  parameter int unsigned ENTRIES = 256,
  localparam int unsigned IW     = (ENTRIES > 1) ? $clog2(ENTRIES) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  // append
  input  logic              accept_en,
  input  logic              wr_valid,
  output logic              wr_ready,
  input  req_desc_t         wr_desc,
  // bulk control
  input  logic              clear,
  input  logic              clear_cur,
  input  logic              latch_l0,
  input  logic              layer0,
  // progress
  input  logic              inc_valid,
  input  logic [IW-1:0]     inc_idx,
  // lookup of a lane's active entry
  input  logic [LANE_W-1:0] lk_lane,
  output logic              lk_hit,
  output logic [IW-1:0]     lk_idx,
  // read by index
  input  logic [IW-1:0]     rd_idx,
  output req_entry_t        rd_entry,
  // status
  output logic [IW:0]       count,
  output logic [TS_W-1:0]   max_steps
);

  req_entry_t ent [ENTRIES];

  assign wr_ready = accept_en && (count < (IW+1)'(ENTRIES));

  function automatic logic [TS_W-1:0] limit_of(input req_entry_t e, input logic l0);
    return l0 ? e.steps_req : e.steps_l0;
  endfunction

  always_comb begin
    lk_hit = 1'b0;
    lk_idx = '0;
    for (int i = ENTRIES - 1; i >= 0; i--) begin
      if ((IW+1)'(i) < count && ent[i].lane == lk_lane &&
          ent[i].steps_cur < limit_of(ent[i], layer0)) begin
        lk_hit = 1'b1;
        lk_idx = IW'(i);
      end
    end
  end

  assign rd_entry = ent[rd_idx];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      count     <= '0;
      max_steps <= '0;
      for (int i = 0; i < ENTRIES; i++) ent[i] <= '0;
    end else begin
      if (clear) begin
        count     <= '0;
        max_steps <= '0;
      end else if (wr_valid && wr_ready) begin
        ent[count[IW-1:0]] <= '{req_id: wr_desc.req_id, lane: wr_desc.lane,
                                steps_req: wr_desc.steps, steps_l0: '0, steps_cur: '0};
        count <= count + 1'b1;
        if (wr_desc.steps > max_steps) max_steps <= wr_desc.steps;
      end
      for (int i = 0; i < ENTRIES; i++) begin
        if (clear_cur)      ent[i].steps_cur <= '0;
        else if (inc_valid && inc_idx == IW'(i)) ent[i].steps_cur <= ent[i].steps_cur + 1'b1;
        if (latch_l0)       ent[i].steps_l0  <= ent[i].steps_cur;
      end
    end
  end

  // A new entry must never be appended to a full buffer.
  assert property (@(posedge clk) disable iff (!rst_n) wr_valid && wr_ready |-> count < (IW+1)'(ENTRIES));

endmodule
