// tb_batch_controller: self-checking test of the E-Batch controller together
// with the request buffer, replaying the paper's scheduling examples on a
// 4-lane machine:
//   A. One layer, N = 3: batch 0 with requests of 1, 2, 3, 4 time-steps on
//      lanes 0-3; requests of 3 and 2 time-steps wait and join lanes 0 and 1
//      when these run dry. Then batch 1 with the leftovers plus new requests,
//      where one request arrives while lane 0 is already power gated.
//   B. Two layers, N = 3: joins in layer one, replay in layer two, and
//      requests arriving in layer two are refused (batch locked).
//   C. N = 0 (longest request) and a layer that ends early because every
//      lane is idle.
// A small runtime model here answers lane-idle interrupts with the oldest
// waiting request. Checked: the request each lane runs at every time-step,
// the report of time-steps per request, issue beats per time-step
// (neurons x sub-vectors), weight loads per batch (one per layer), and that
// the interrupt, padding, join, lock and early-end mechanisms all occur.
module tb_batch_controller;
  import ebatch_pkg::*;
  localparam int L = 4, E = 16, NEUR = 3;

  logic clk = 1'b0, rst_n = 1'b0;
  logic cfg_we; logic [2:0] cfg_addr; logic [31:0] cfg_wdata;
  logic batch_start, busy, locked; logic [7:0] layer; logic [TS_W-1:0] ts_cnt;
  logic irq, done_pend, done_ack; logic [L-1:0] idle_pend, idle_ack;
  logic rb_accept_en, rb_clear, rb_clear_cur, rb_latch_l0, rb_layer0, rb_inc_valid, rb_lk_hit;
  logic [3:0] rb_inc_idx, rb_lk_idx, rb_rd_idx;
  logic [LANE_W-1:0] rb_lk_lane;
  req_entry_t rb_rd_entry;
  logic [4:0] rb_count;
  logic [TS_W-1:0] rb_max_steps;
  logic wl_req, wl_done, ld_req, ld_done;
  logic [L-1:0] lane_active;
  logic [RID_W-1:0] sched_req [L];
  logic [TS_W-1:0] sched_ts [L];
  logic iss_valid, iss_first, iss_last;
  logic [5:0] iss_waddr; logic [1:0] iss_iaddr; logic [1:0] iss_neuron;
  logic rep_valid, rep_ready; req_report_t rep_data;
  logic req_valid, req_ready; req_desc_t req_desc;

  int checks = 0, failures = 0;
  int n_irq = 0, n_join = 0, n_late_join = 0, n_pad = 0, n_lock_refused = 0, n_early_end = 0, n_layer_replay = 0;

  batch_controller #(.LANES(L), .ENTRIES(E), .NEURONS(4), .WB_DEPTH(64), .IB_DEPTH(4), .PIPE_LAT(5)) dut (.*);

  request_buffer #(.ENTRIES(E)) u_rb (
    .clk(clk), .rst_n(rst_n), .accept_en(rb_accept_en), .wr_valid(req_valid), .wr_ready(req_ready),
    .wr_desc(req_desc), .clear(rb_clear), .clear_cur(rb_clear_cur), .latch_l0(rb_latch_l0),
    .layer0(rb_layer0), .inc_valid(rb_inc_valid), .inc_idx(rb_inc_idx), .lk_lane(rb_lk_lane),
    .lk_hit(rb_lk_hit), .lk_idx(rb_lk_idx), .rd_idx(rb_rd_idx), .rd_entry(rb_rd_entry),
    .count(rb_count), .max_steps(rb_max_steps));

  always #5 clk = ~clk;

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // ---------------- main-memory model: weight and input loads ----------------
  int wl_count = 0;
  int step_log [64][L];      // request id per lane per evaluated step (0 = gated)
  int step_layer [64];
  int nsteps = 0;
  int beats = 0;

  always @(posedge clk) begin
    if (iss_valid) beats <= beats + 1;
  end

  initial begin
    wl_done = 1'b0; ld_done = 1'b0;
    forever begin
      @(negedge clk);
      wl_done = 1'b0; ld_done = 1'b0;
      if (wl_req) begin
        repeat (2) @(negedge clk);
        wl_count++;
        wl_done = 1'b1;
      end else if (ld_req) begin
        if (nsteps > 0) check(beats == NEUR * 2, $sformatf("issue beats per step %0d", beats));
        beats = 0;
        for (int l = 0; l < L; l++) begin
          step_log[nsteps][l] = lane_active[l] ? int'(sched_req[l]) : 0;
          if (!lane_active[l]) n_pad++;
        end
        step_layer[nsteps] = int'(layer);
        if (layer != 0) n_layer_replay++;
        nsteps++;
        ld_done = 1'b1;
        @(negedge clk);
        ld_done = 1'b0;
      end
    end
  end

  // ---------------- runtime model ----------------
  // waiting requests and when they arrive: 100 * layer + time-step
  int q_id [$], q_steps [$], q_arr [$];
  int idle_lanes [$];                     // lanes known to be gated
  int rep_id [$], rep_steps [$];
  logic rt_busy = 1'b0;

  task automatic append(input int id, input int lane, input int steps);
    @(negedge clk);
    req_valid = 1'b1;
    req_desc = '{req_id: RID_W'(id), lane: LANE_W'(lane), steps: TS_W'(steps)};
    @(posedge clk);
    while (!req_ready) @(posedge clk);
    @(negedge clk);
    req_valid = 1'b0;
  endtask

  // interrupts and late arrivals
  initial begin
    idle_ack = '0;
    forever begin
      @(negedge clk);
      idle_ack = '0;
      if (rst_n && !rt_busy) begin
        for (int l = 0; l < L; l++) begin
          if (idle_pend[l]) begin
            int pick;
            n_irq++;
            pick = -1;
            foreach (q_id[i]) if (pick < 0 && q_arr[i] < int'(ts_cnt)) pick = i;
            if (pick >= 0) begin
              append(q_id[pick], l, q_steps[pick]);
              q_id.delete(pick); q_steps.delete(pick); q_arr.delete(pick);
              n_join++;
            end else begin
              idle_lanes.push_back(l);
            end
            @(negedge clk);
            idle_ack[l] = 1'b1;
            @(negedge clk);
            idle_ack = '0;
            break;
          end
        end
        // a request arriving while a lane is gated joins it (first layer only)
        if (ld_req && q_id.size() > 0 && q_arr[0] <= 100 * int'(layer) + int'(ts_cnt)) begin
          if (locked) begin
            req_valid = 1'b1;
            req_desc = '{req_id: RID_W'(q_id[0]), lane: '0, steps: TS_W'(q_steps[0])};
            #1;
            check(req_ready == 1'b0, "append refused while the batch is locked");
            n_lock_refused++;
            @(negedge clk);
            req_valid = 1'b0;
            q_arr[0] = 100000;   // stays queued for a later batch
          end else if (idle_lanes.size() > 0) begin
            append(q_id[0], idle_lanes[0], q_steps[0]);
            q_id.delete(0); q_steps.delete(0); q_arr.delete(0);
            idle_lanes.delete(0);
            n_late_join++;
          end
        end
      end
    end
  end

  // report collector
  initial begin
    rep_ready = 1'b1;
    forever begin
      @(posedge clk);
      if (rep_valid && rep_ready) begin
        rep_id.push_back(int'(rep_data.req_id));
        rep_steps.push_back(int'(rep_data.steps_done));
      end
    end
  end

  task automatic cfg(input int a, input int v);
    @(negedge clk);
    cfg_we = 1'b1; cfg_addr = 3'(a); cfg_wdata = v;
    @(negedge clk);
    cfg_we = 1'b0;
  endtask

  task automatic run_batch();
    nsteps = 0; wl_count = 0;
    rep_id.delete(); rep_steps.delete(); idle_lanes.delete();
    @(negedge clk);
    batch_start = 1'b1;
    @(negedge clk);
    batch_start = 1'b0;
    while (!done_pend) @(negedge clk);
    done_ack = 1'b1;
    @(negedge clk);
    done_ack = 1'b0;
  endtask

  task automatic expect_steps(input int s, input int a0, input int a1, input int a2, input int a3);
    check(step_log[s][0] == a0 && step_log[s][1] == a1 && step_log[s][2] == a2 && step_log[s][3] == a3,
          $sformatf("step %0d lanes = %0d %0d %0d %0d, expected %0d %0d %0d %0d", s,
                    step_log[s][0], step_log[s][1], step_log[s][2], step_log[s][3], a0, a1, a2, a3));
  endtask

  task automatic expect_report(input int id, input int steps);
    int found = 0;
    foreach (rep_id[i]) if (rep_id[i] == id) begin
      found = 1;
      check(rep_steps[i] == steps, $sformatf("req %0d evaluated %0d steps, expected %0d", id, rep_steps[i], steps));
    end
    check(found == 1, $sformatf("req %0d reported", id));
  endtask

  initial begin
    cfg_we = 0; cfg_addr = '0; cfg_wdata = '0; batch_start = 0; done_ack = 0;
    req_valid = 0; req_desc = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    cfg(2, NEUR); cfg(3, 1); cfg(4, 1);

    // ---------------- A: one layer, N = 3 ----------------
    cfg(0, 3); cfg(1, 1);
    append(1, 0, 1); append(2, 1, 2); append(3, 2, 3); append(4, 3, 4);
    q_id = '{5, 6}; q_steps = '{3, 2}; q_arr = '{0, 0};
    run_batch();
    check(nsteps == 3, $sformatf("A0: 3 time-steps (%0d)", nsteps));
    check(wl_count == 1, "A0: one weight load");
    expect_steps(0, 1, 2, 3, 4);
    expect_steps(1, 5, 2, 3, 4);
    expect_steps(2, 5, 6, 3, 4);
    expect_report(1, 1); expect_report(2, 2); expect_report(3, 3);
    expect_report(4, 3); expect_report(5, 2); expect_report(6, 1);
    check(rep_id.size() == 6, "A0: six requests reported");
    // batch 1: greedy assignment of the leftovers and requests 7, 8
    append(7, 3, 4); append(8, 2, 2); append(4, 1, 1); append(6, 1, 1); append(5, 0, 1);
    q_id = '{9}; q_steps = '{6}; q_arr = '{1};
    run_batch();
    check(nsteps == 3, "A1: 3 time-steps");
    expect_steps(0, 5, 4, 8, 7);
    expect_steps(1, 0, 6, 8, 7);
    expect_steps(2, 9, 0, 0, 7);
    expect_report(7, 3); expect_report(8, 2); expect_report(4, 1);
    expect_report(6, 1); expect_report(5, 1); expect_report(9, 1);

    // ---------------- B: two layers, N = 3 ----------------
    cfg(1, 2);
    append(1, 0, 1); append(2, 1, 2); append(3, 2, 3); append(4, 3, 4);
    q_id = '{5, 6, 7}; q_steps = '{3, 3, 2}; q_arr = '{0, 100, 100};  // 6, 7 arrive in layer two
    run_batch();
    check(wl_count == 2, "B: one weight load per layer");
    check(nsteps == 6, $sformatf("B: 3 + 3 time-steps (%0d)", nsteps));
    for (int ly = 0; ly < 2; ly++) begin
      check(step_layer[3 * ly] == ly, "B: layer order");
      expect_steps(3 * ly + 0, 1, 2, 3, 4);
      expect_steps(3 * ly + 1, 5, 2, 3, 4);
      expect_steps(3 * ly + 2, 5, 0, 3, 4);
    end
    expect_report(1, 1); expect_report(2, 2); expect_report(3, 3);
    expect_report(4, 3); expect_report(5, 2);
    check(rep_id.size() == 5, "B: requests 6 and 7 did not join a locked batch");
    q_id.delete(); q_steps.delete(); q_arr.delete();

    // ---------------- C: N = 0 and early end ----------------
    cfg(1, 1); cfg(0, 0);
    append(20, 0, 2); append(21, 1, 5);
    run_batch();
    check(nsteps == 5, $sformatf("C: N=0 runs the longest request, 5 steps (%0d)", nsteps));
    expect_report(20, 2); expect_report(21, 5);
    cfg(0, 4);
    append(22, 0, 2); append(23, 1, 1);
    run_batch();
    check(nsteps == 2, $sformatf("C: layer ends when every lane is idle (%0d)", nsteps));
    if (nsteps == 2) n_early_end++;
    expect_report(22, 2); expect_report(23, 1);

    // every mechanism happened
    check(n_irq > 0, "lane-idle interrupts");
    check(n_join > 0, "joins on interrupt");
    check(n_late_join > 0, "join of a late request into a gated lane");
    check(n_pad > 0, "power-gated (padding) lane-steps");
    check(n_lock_refused > 0, "append refused when locked");
    check(n_layer_replay > 0, "deeper-layer replay");
    check(n_early_end > 0, "early layer end");
    $display("irq=%0d join=%0d late_join=%0d gated=%0d refused=%0d replay=%0d early_end=%0d",
             n_irq, n_join, n_late_join, n_pad, n_lock_refused, n_layer_replay, n_early_end);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
