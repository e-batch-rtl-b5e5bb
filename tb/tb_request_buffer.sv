// tb_request_buffer: self-checking test of the E-Batch request buffer.
// Keeps a model of the entries here and, after random appends, increments,
// layer-limit switches, latch and clear operations, checks for every lane
// that the lookup returns the first entry of that lane with time-steps left
// (limit = remaining steps in layer one, first-layer count in deeper layers),
// the read port, the count, the maximum request length, and that appends are
// refused when the buffer is full or locked.
module tb_request_buffer;
  import ebatch_pkg::*;
  localparam int E = 256;
  localparam int L = 8;     // lanes used by this test

  logic clk = 1'b0, rst_n = 1'b0;
  logic accept_en, wr_valid, wr_ready, clear, clear_cur, latch_l0, layer0, inc_valid, lk_hit;
  req_desc_t wr_desc;
  logic [7:0] inc_idx, lk_idx, rd_idx;
  logic [LANE_W-1:0] lk_lane;
  req_entry_t rd_entry;
  logic [8:0] count;
  logic [TS_W-1:0] max_steps;
  int checks = 0, failures = 0;

  int m_lane [E], m_req [E], m_cur [E], m_l0 [E], m_id [E];
  int m_count = 0, m_max = 0;

  request_buffer #(.ENTRIES(E)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
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

  task automatic idle_inputs();
    wr_valid = 1'b0; clear = 1'b0; clear_cur = 1'b0; latch_l0 = 1'b0; inc_valid = 1'b0;
  endtask

  task automatic append(input int lane, input int steps, input logic expect_ok);
    @(negedge clk);
    idle_inputs();
    wr_valid = 1'b1;
    wr_desc = '{req_id: RID_W'(m_count + 1000), lane: LANE_W'(lane), steps: TS_W'(steps)};
    #1;
    check(wr_ready == expect_ok, $sformatf("wr_ready=%0d expected %0d", wr_ready, expect_ok));
    if (expect_ok) begin
      m_lane[m_count] = lane; m_req[m_count] = steps; m_cur[m_count] = 0; m_l0[m_count] = 0;
      m_id[m_count] = m_count + 1000;
      if (steps > m_max) m_max = steps;
      m_count++;
    end
    @(negedge clk);
    wr_valid = 1'b0;
  endtask

  task automatic check_lookups(input logic l0);
    int exp_idx;
    @(negedge clk);
    idle_inputs();
    layer0 = l0;
    for (int l = 0; l < L; l++) begin
      lk_lane = LANE_W'(l);
      exp_idx = -1;
      for (int i = 0; i < m_count; i++)
        if (exp_idx < 0 && m_lane[i] == l && m_cur[i] < (l0 ? m_req[i] : m_l0[i])) exp_idx = i;
      #1;
      check(lk_hit == (exp_idx >= 0), $sformatf("lane %0d hit %0d exp idx %0d", l, lk_hit, exp_idx));
      if (exp_idx >= 0) check(int'(lk_idx) == exp_idx, $sformatf("lane %0d idx %0d exp %0d", l, lk_idx, exp_idx));
    end
    check(int'(count) == m_count, "count");
    check(int'(max_steps) == m_max, "max_steps");
    for (int i = 0; i < m_count; i++) begin
      rd_idx = 8'(i); #1;
      check(int'(rd_entry.req_id) == m_id[i] && int'(rd_entry.lane) == m_lane[i] &&
            int'(rd_entry.steps_cur) == m_cur[i] && int'(rd_entry.steps_l0) == m_l0[i] &&
            int'(rd_entry.steps_req) == m_req[i], $sformatf("read entry %0d", i));
    end
  endtask

  // increment the active entry of every lane once (one time-step)
  task automatic step_all(input logic l0);
    int idx;
    for (int l = 0; l < L; l++) begin
      @(negedge clk);
      idle_inputs();
      layer0 = l0; lk_lane = LANE_W'(l);
      #1;
      if (lk_hit) begin
        idx = int'(lk_idx);
        inc_valid = 1'b1; inc_idx = lk_idx;
        m_cur[idx]++;
      end
    end
    @(negedge clk);
    idle_inputs();
  endtask

  initial begin
    idle_inputs();
    accept_en = 1'b1; layer0 = 1'b1; inc_idx = '0; lk_lane = '0; rd_idx = '0; wr_desc = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int b = 0; b < 3; b++) begin
      for (int i = 0; i < 20; i++) append($urandom % L, $urandom % 6, 1'b1);
      for (int t = 0; t < 8; t++) begin
        check_lookups(1'b1);
        step_all(1'b1);
        if (t == 3) append($urandom % L, 1 + $urandom % 4, 1'b1);   // join while running
      end
      // lock and go to deeper layers: latch, then clear current counts
      accept_en = 1'b0;
      append(0, 3, 1'b0);
      @(negedge clk); idle_inputs(); latch_l0 = 1'b1;
      for (int i = 0; i < m_count; i++) m_l0[i] = m_cur[i];
      @(negedge clk); idle_inputs(); clear_cur = 1'b1;
      for (int i = 0; i < m_count; i++) m_cur[i] = 0;
      for (int t = 0; t < 9; t++) begin
        check_lookups(1'b0);
        step_all(1'b0);
      end
      check_lookups(1'b0);
      @(negedge clk); idle_inputs(); clear = 1'b1;
      m_count = 0; m_max = 0;
      @(negedge clk); idle_inputs();
      accept_en = 1'b1;
      check_lookups(1'b1);
    end
    // fill to capacity
    for (int i = 0; i < E; i++) append(i % L, 2, 1'b1);
    append(1, 1, 1'b0);
    check_lookups(1'b1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
