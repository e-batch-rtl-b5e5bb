// tb_ebatch_epur_mnmt: the machine-translation workload on the accelerator
// at its default parameters: an LSTM of 8 layers with 1024 cells per layer
// and 1024 inputs, so every layer's weights fill the 2 MiB weight buffers
// (1024 neurons x 32 sub-vectors of 64 bytes per gate) and every lane's input
// fills its 2 KiB input buffer. Three requests of 1 to 3 time-steps are
// batched with N = 2, so one batch splits a request and a second batch
// finishes it; the other lanes stay power gated. Weights are random and small
// (|w| <= 1/64) so that pre-activations spread over the activation range.
// Every h and c value of every request, layer and time-step is compared bit
// for bit with the sequential fixed-point model, and each time-step's
// latency (1024 x 32 + 5 cycles from load to last result) is checked.

module tb_ebatch_epur_mnmt;
  import ebatch_pkg::*;
  localparam int LANES = 64;
  localparam int WIDTH = 64;
  localparam int NEURONS_P = 1024;
  localparam int H = 1024;          // neurons per gate used by the test
  localparam int KX = 16, KH = 16; // sub-vectors of x and of h (x as wide as h)
  localparam int KK = KX + KH;
  localparam int CWD = (H + 31) / 32;  // cell-state words per lane
  localparam int LAYERS = 8;
  localparam int NMAX = 2;    // the N register
  localparam int R = 3;       // requests
  localparam int TMAX = 3;    // longest request
  localparam int WB_BYTES_P = 2097152;
  localparam int WB_AW = $clog2((WB_BYTES_P * 8) / (WIDTH * 8));
  localparam int NW = $clog2(NEURONS_P);
  localparam int LW = $clog2(LANES);
  localparam int IB_AW = $clog2(((131072 / LANES) * 8) / (WIDTH * 8));
  localparam int CAW = ((NEURONS_P + 31) / 32 > 1) ? $clog2((NEURONS_P + 31) / 32) : 1;
  localparam int LD_AW = (IB_AW > CAW) ? IB_AW : CAW;

  logic clk = 1'b0, rst_n = 1'b0;
  logic cfg_we; logic [2:0] cfg_addr; logic [31:0] cfg_wdata;
  logic req_valid, req_ready; req_desc_t req_desc;
  logic batch_start, busy, locked; logic [7:0] layer; logic [TS_W-1:0] ts_cnt;
  logic irq, done_pend, done_ack; logic [LANES-1:0] idle_pend, idle_ack;
  logic rep_valid, rep_ready; req_report_t rep_data;
  logic wl_req, wl_done, wl_we, bias_we; logic [1:0] wl_cu, bias_cu;
  logic [WB_AW-1:0] wl_addr; logic [WIDTH*8-1:0] wl_data, ld_data;
  logic [NW-1:0] bias_addr; cell_t bias_data;
  logic ld_req, ld_done, ld_we, ld_sel; logic [LW-1:0] ld_lane; logic [LD_AW-1:0] ld_addr;
  logic [LANES-1:0] lane_active, out_mask;
  logic [RID_W-1:0] sched_req [LANES];
  logic [TS_W-1:0] sched_ts [LANES];
  logic out_valid; logic [NW-1:0] out_neuron;
  data_t out_h [LANES]; cell_t out_c [LANES];

  ebatch_epur  dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (20000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  // ------------- reference LSTM arithmetic (fixed point, see README) -------------
  function automatic longint r_sig(input longint x);     // Q.12 in, Q.12 out
    longint a, y;
    a = (x < 0) ? -x : x;
    if (a >= 5 * 4096) y = 4096;
    else if (a >= 9728) y = a / 32 + 3456;
    else if (a >= 4096) y = a / 8 + 2560;
    else y = a / 4 + 2048;
    return (x < 0) ? 4096 - y : y;
  endfunction
  function automatic longint r_tanh(input longint x);
    return 2 * r_sig(2 * x) - 4096;
  endfunction
  function automatic longint r_q6(input longint x);      // Q.12 -> Q1.6, round, saturate
    longint r;
    r = (x + 32) >>> 6;
    return (r > 127) ? 127 : ((r < -128) ? -128 : r);
  endfunction
  function automatic longint r_sat16(input longint x);
    return (x > 32767) ? 32767 : ((x < -32768) ? -32768 : x);
  endfunction

  // ------------- model data -------------
  int xin  [R][TMAX][KX*WIDTH];              // layer-one inputs
  byte wgt [LAYERS][4][H][KK*WIDTH];         // weights per layer, gate, neuron
  int bia  [LAYERS][4][H];
  int hm   [R][LAYERS][TMAX][H];             // DUT results as stored in main memory
  int cm   [R][LAYERS][TMAX][H];
  int wr_count [R][LAYERS][TMAX];            // how often each (request, layer, step) was produced
  int len [R];
  longint arrive [R];
  int done [R];                              // time-steps finished (all layers) per request
  logic in_batch [R];

  // mechanism counters
  int n_irq = 0, n_join = 0, n_late_join = 0, n_gated = 0, n_split = 0, n_refused = 0;
  int n_batches = 0, n_timeout = 0, n_multi = 0, n_steps = 0, n_wloads = 0;

  // ------------- main memory: weights -------------
  initial begin
    wl_done = 0; wl_we = 0; bias_we = 0; wl_cu = '0; bias_cu = '0; wl_addr = '0; wl_data = '0;
    bias_addr = '0; bias_data = '0;
    forever begin
      @(negedge clk);
      if (wl_req) begin
        int ly;
        ly = int'(layer);
        n_wloads++;
        for (int g = 0; g < 4; g++) begin
          for (int k = 0; k < H; k++) begin
            for (int j = 0; j < KK; j++) begin
              wl_we = 1; wl_cu = 2'(g); wl_addr = WB_AW'(k * KK + j);
              for (int e = 0; e < WIDTH; e++) wl_data[e*8 +: 8] = 8'(wgt[ly][g][k][j*WIDTH+e]);
              @(negedge clk);
            end
            wl_we = 0;
            bias_we = 1; bias_cu = 2'(g); bias_addr = NW'(k); bias_data = cell_t'(bia[ly][g][k]);
            @(negedge clk);
            bias_we = 0;
          end
        end
        wl_done = 1;
        @(negedge clk);
        wl_done = 0;
      end
    end
  end

  // ------------- main memory: per-step inputs, and timing of the step -------------
  longint t_lddone;
  int step_H_K_checked = 0;
  initial begin
    ld_done = 0; ld_we = 0; ld_sel = 0; ld_lane = '0; ld_addr = '0; ld_data = '0;
    forever begin
      @(negedge clk);
      if (ld_req) begin
        int ly;
        ly = int'(layer);
        n_steps++;
        for (int l = 0; l < LANES; l++) begin
          if (!lane_active[l]) begin
            n_gated++;
            continue;
          end
          begin
            int r, t;
            r = int'(sched_req[l]);
            t = done[r] + int'(sched_ts[l]);
            // words 0..KX-1: x_t (layer one) or the previous layer's h_t
            for (int j = 0; j < KX; j++) begin
              ld_we = 1; ld_sel = 0; ld_lane = LW'(l); ld_addr = LD_AW'(j); ld_data = '0;
              for (int e = 0; e < WIDTH; e++)
                if (ly == 0) ld_data[e*8 +: 8] = 8'(xin[r][t][j*WIDTH+e]);
                else if (j * WIDTH + e < H) ld_data[e*8 +: 8] = 8'(hm[r][ly-1][t][j*WIDTH+e]);
              @(negedge clk);
            end
            // words KX..KX+KH-1: h_{t-1}
            for (int j = 0; j < KH; j++) begin
              ld_addr = LD_AW'(KX + j); ld_data = '0;
              for (int e = 0; e < WIDTH; e++)
                if (j * WIDTH + e < H)
                  ld_data[e*8 +: 8] = (t == 0) ? 8'd0 : 8'(hm[r][ly][t-1][j*WIDTH+e]);
              @(negedge clk);
            end
            // cell state c_{t-1}, 32 values per word
            for (int j = 0; j < CWD; j++) begin
              ld_sel = 1; ld_addr = LD_AW'(j); ld_data = '0;
              for (int e = 0; e < 32; e++)
                if (j * 32 + e < H)
                  ld_data[e*16 +: 16] = (t == 0) ? 16'd0 : 16'(cm[r][ly][t-1][j*32+e]);
              @(negedge clk);
            end
            ld_we = 0; ld_sel = 0;
          end
        end
        ld_done = 1;
        @(posedge clk);
        t_lddone = cyc;
        @(negedge clk);
        ld_done = 0;
      end
    end
  end

  // ------------- main memory: results -------------
  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      int k;
      k = int'(out_neuron);
      for (int l = 0; l < LANES; l++) begin
        if (out_mask[l]) begin
          int r, t;
          r = int'(sched_req[l]);
          t = done[r] + int'(sched_ts[l]);
          hm[r][int'(layer)][t][k] = int'(out_h[l]);
          cm[r][int'(layer)][t][k] = int'(out_c[l]);
          if (k == H - 1) wr_count[r][int'(layer)][t]++;
        end
      end
      if (k == H - 1) begin
        // one neuron per K cycles: last result H*K + 5 cycles after the load
        check(cyc - t_lddone == longint'(H * KK + 5),
              $sformatf("step latency %0d, expected %0d", cyc - t_lddone, H * KK + 5));
      end
    end
  end

  // ------------- runtime -------------
  logic [LANES-1:0] gated_known;

  function automatic int oldest_waiting();
    int best = -1;
    for (int r = 0; r < R; r++)
      if (!in_batch[r] && done[r] < len[r] && arrive[r] <= cyc)
        if (best < 0 || arrive[r] < arrive[best]) best = r;
    return best;
  endfunction

  task automatic append(input int r, input int lane);
    @(negedge clk);
    req_valid = 1;
    req_desc = '{req_id: RID_W'(r), lane: LANE_W'(lane), steps: TS_W'(len[r] - done[r])};
    @(posedge clk);
    while (!req_ready) @(posedge clk);
    @(negedge clk);
    req_valid = 0;
    in_batch[r] = 1;
  endtask

  task automatic create_batch();
    int avail [$];
    int tot [LANES];
    int per_lane [LANES];
    foreach (tot[l]) begin tot[l] = 0; per_lane[l] = 0; end
    for (int r = 0; r < R; r++)
      if (done[r] < len[r] && arrive[r] <= cyc) avail.push_back(r);
    // greedy multi-way partitioning: longest remaining first, to the lightest lane
    avail.sort() with (-(len[item] - done[item]) * 1000 + item);
    foreach (avail[i]) begin
      int best = 0;
      for (int l = 1; l < LANES; l++) if (tot[l] < tot[best]) best = l;
      tot[best] += len[avail[i]] - done[avail[i]];
      per_lane[best]++;
      append(avail[i], best);
    end
    foreach (per_lane[l]) if (per_lane[l] > 1) n_multi++;
    gated_known = '0;
    n_batches++;
  endtask

  initial begin
    req_valid = 0; req_desc = '0; batch_start = 0; done_ack = 0; idle_ack = '0; rep_ready = 1;
    cfg_we = 0; cfg_addr = '0; cfg_wdata = '0;
    // workload: request lengths 1..TMAX, staggered arrivals
    begin
      longint a = 0;
      for (int r = 0; r < R; r++) begin
        len[r] = 1 + int'($urandom % TMAX);
        arrive[r] = a;
        a += (r < R) ? 0 : longint'($urandom % 1);
        done[r] = 0; in_batch[r] = 0;
        for (int t = 0; t < TMAX; t++)
          for (int e = 0; e < KX * WIDTH; e++) xin[r][t][e] = int'($urandom % 65) - 32;
      end
      for (int ly = 0; ly < LAYERS; ly++)
        for (int g = 0; g < 4; g++)
          for (int k = 0; k < H; k++) begin
            for (int e = 0; e < KK * WIDTH; e++) wgt[ly][g][k][e] = byte'(int'($urandom % (2 * 1 + 1)) - 1);
            bia[ly][g][k] = int'($urandom % 4097) - 2048;
          end
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk); cfg_we = 1; cfg_addr = 0; cfg_wdata = NMAX;
    @(negedge clk); cfg_addr = 1; cfg_wdata = LAYERS;
    @(negedge clk); cfg_addr = 2; cfg_wdata = H;
    @(negedge clk); cfg_addr = 3; cfg_wdata = KX;
    @(negedge clk); cfg_addr = 4; cfg_wdata = KH;
    @(negedge clk); cfg_we = 0;

    forever begin
      int all_done, navail;
      all_done = 1;
      for (int r = 0; r < R; r++) if (done[r] < len[r]) all_done = 0;
      if (all_done) break;
      // wait up to T cycles for enough requests to fill the lanes
      navail = 0;
      for (int r = 0; r < R; r++) if (done[r] < len[r] && arrive[r] <= cyc) navail++;
      if (navail < LANES) begin
        longint t0 = cyc;
        while (cyc - t0 < 1) begin
          @(negedge clk);
          navail = 0;
          for (int r = 0; r < R; r++) if (done[r] < len[r] && arrive[r] <= cyc) navail++;
          if (navail >= LANES) break;
        end
        if (navail < LANES) n_timeout++;
      end
      if (navail == 0) continue;
      create_batch();
      @(negedge clk); batch_start = 1;
      @(negedge clk); batch_start = 0;
      // serve the batch
      begin
        int rep_r [$], rep_s [$];
        rep_r.delete(); rep_s.delete();
        while (!done_pend) begin
          @(negedge clk);
          if (rep_valid) begin
            rep_r.push_back(int'(rep_data.req_id));
            rep_s.push_back(int'(rep_data.steps_done));
          end
          for (int l = 0; l < LANES; l++) begin
            if (idle_pend[l]) begin
              int r;
              n_irq++;
              r = oldest_waiting();
              if (r >= 0 && !locked) begin
                append(r, l);
                n_join++;
              end else begin
                gated_known[l] = 1;
              end
              @(negedge clk); idle_ack[l] = 1;
              @(negedge clk); idle_ack = '0;
              break;
            end
          end
          // a request arriving while a lane sits gated
          if (ld_req && |gated_known) begin
            int r;
            r = oldest_waiting();
            if (r >= 0) begin
              int l = 0;
              while (!gated_known[l]) l++;
              if (locked) begin
                // the batch is locked: the accelerator must refuse the append
                req_valid = 1;
                req_desc = '{req_id: RID_W'(r), lane: LANE_W'(l), steps: TS_W'(1)};
                #1;
                check(!req_ready, "append refused after the first layer");
                n_refused++;
                @(negedge clk);
                req_valid = 0;
                gated_known[l] = 0;
              end else begin
                append(r, l);
                gated_known[l] = 0;
                n_late_join++;
              end
            end
          end
        end
        @(negedge clk); done_ack = 1;
        @(negedge clk); done_ack = 0;
        foreach (rep_r[i]) begin
          int r;
          r = rep_r[i];
          check(rep_s[i] <= NMAX, "no request runs more than N steps in a batch");
          if (done[r] + rep_s[i] < len[r]) n_split++;
          done[r] += rep_s[i];
          in_batch[r] = 0;
        end
        for (int r = 0; r < R; r++) check(!in_batch[r], "every batched request reported");
      end
    end

    // ------------- compare with a sequential evaluation of each request -------------
    for (int r = 0; r < R; r++) begin
      int h_prev [H], c_prev [H], inp [KK*WIDTH];
      for (int ly = 0; ly < LAYERS; ly++) begin
        foreach (h_prev[k]) begin h_prev[k] = 0; c_prev[k] = 0; end
        for (int t = 0; t < len[r]; t++) begin
          int hn [H], cn [H];
          check(wr_count[r][ly][t] == 1, $sformatf("req %0d layer %0d step %0d evaluated once (%0d)",
                                                    r, ly, t, wr_count[r][ly][t]));
          for (int e = 0; e < KK * WIDTH; e++) inp[e] = 0;
          for (int e = 0; e < KX * WIDTH; e++) inp[e] = (ly == 0) ? xin[r][t][e] : ((e < H) ? hm[r][ly-1][t][e] : 0);
          for (int e = 0; e < H; e++) inp[KX * WIDTH + e] = h_prev[e];
          for (int k = 0; k < H; k++) begin
            longint pre [4], gv [4], cc;
            for (int g = 0; g < 4; g++) begin
              pre[g] = bia[ly][g][k];
              for (int e = 0; e < KK * WIDTH; e++) pre[g] += longint'(wgt[ly][g][k][e]) * inp[e];
              gv[g] = (g == 2) ? r_q6(r_tanh(pre[g])) : r_q6(r_sig(pre[g]));
            end
            cc = r_sat16(((gv[1] * c_prev[k]) >>> 6) + gv[0] * gv[2]);
            cn[k] = int'(cc);
            hn[k] = int'(r_q6((gv[3] * r_tanh(cc)) >>> 6));
            check(hm[r][ly][t][k] == hn[k] && cm[r][ly][t][k] == cn[k],
                  $sformatf("req %0d layer %0d step %0d neuron %0d: h %0d/%0d c %0d/%0d", r, ly, t, k,
                            hm[r][ly][t][k], hn[k], cm[r][ly][t][k], cn[k]));
          end
          h_prev = hn; c_prev = cn;
        end
      end
    end

    // ------------- every mechanism must have happened -------------
    $display("batches=%0d steps=%0d weight_loads=%0d irq=%0d join=%0d late_join=%0d gated_lane_steps=%0d split=%0d refused=%0d multi_req_lanes=%0d timeouts=%0d",
             n_batches, n_steps, n_wloads, n_irq, n_join, n_late_join, n_gated, n_split, n_refused, n_multi, n_timeout);
    check(n_wloads == n_batches * LAYERS, "one weight load per layer per batch");
    check(n_gated > 0, "power-gated lane-steps");
    check(n_split > 0, "request split across batches by N");
    
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
