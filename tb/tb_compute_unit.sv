// tb_compute_unit: self-checking test of one compute unit.
// Loads random weights (small values so activations do not all saturate),
// biases and per-lane inputs, issues every neuron back to back and compares
// each lane's gate output with sigmoid(dot + bias) computed here with $exp
// (3 LSB tolerance for the piecewise-linear sigmoid and rounding). Checks that
// the result of a neuron comes 3 cycles after its last beat, that one neuron
// completes every K cycles, and that a power-gated lane keeps its old output.
// Runs with 4 lanes and a 16 KiB weight buffer to keep the test short.
module tb_compute_unit;
  import ebatch_pkg::*;
  localparam int LANES = 4, WIDTH = 64, WB_BYTES = 16384, IB_BYTES = 8192, NEURONS = 16;
  localparam int H = 12, K = 3;
  localparam int WB_AW = $clog2(WB_BYTES / WIDTH), IB_AW = 5, NW = 4, LW = 2;

  logic clk = 1'b0, rst_n = 1'b0;
  logic wb_we, bias_we, ib_we, iss_valid, iss_first, iss_last, gate_valid;
  logic [WB_AW-1:0] wb_waddr, iss_waddr;
  logic [WIDTH*8-1:0] wb_wdata, ib_wdata;
  logic [NW-1:0] bias_waddr, iss_neuron, gate_neuron;
  cell_t bias_wdata;
  logic [LW-1:0] ib_lane;
  logic [IB_AW-1:0] ib_waddr, iss_iaddr;
  logic [LANES-1:0] lane_en;
  data_t gate_y [LANES];
  int checks = 0, failures = 0;

  int wref [H][K*WIDTH];
  int xref [LANES][K*WIDTH];
  int bref [H];
  int cyc = 0, last_issue_cyc [H];
  int got_cnt = 0;
  int prev_y [LANES];
  logic issuing_done = 1'b0;

  compute_unit #(.LANES(LANES), .WIDTH(WIDTH), .WB_BYTES(WB_BYTES), .IB_BYTES(IB_BYTES),
                 .NEURONS(NEURONS), .FUNC(ACT_SIGMOID)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (20000) @(posedge clk);
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

  // output monitor
  always @(negedge clk) begin
    if (rst_n && gate_valid) begin
      int n;
      real r;
      longint d;
      n = int'(gate_neuron);
      check(cyc - last_issue_cyc[n] == 3, $sformatf("neuron %0d latency %0d", n, cyc - last_issue_cyc[n]));
      for (int l = 0; l < LANES; l++) begin
        if (lane_en[l]) begin
          d = bref[n];
          for (int e = 0; e < K * WIDTH; e++) d += longint'(wref[n][e] * xref[l][e]);
          r = 64.0 / (1.0 + $exp(-real'(d) / 4096.0));
          check((real'(gate_y[l]) - r) <= 3.0 && (r - real'(gate_y[l])) <= 3.0,
                $sformatf("lane %0d neuron %0d got %0d exp %f", l, n, gate_y[l], r));
        end else begin
          check(int'(gate_y[l]) == prev_y[l], $sformatf("gated lane %0d unchanged", l));
        end
        prev_y[l] = int'(gate_y[l]);
      end
      got_cnt++;
    end
  end

  task automatic run_pass();
    got_cnt = 0;
    for (int n = 0; n < H; n++) begin
      for (int j = 0; j < K; j++) begin
        @(negedge clk);
        iss_valid = 1'b1; iss_first = (j == 0); iss_last = (j == K - 1);
        iss_waddr = WB_AW'(n * K + j); iss_iaddr = IB_AW'(j); iss_neuron = NW'(n);
        if (j == K - 1) last_issue_cyc[n] = cyc;
      end
    end
    @(negedge clk);
    iss_valid = 1'b0;
    repeat (6) @(negedge clk);
    check(got_cnt == H, $sformatf("all %0d neurons produced (%0d)", H, got_cnt));
  endtask

  initial begin
    wb_we = 0; bias_we = 0; ib_we = 0; iss_valid = 0; iss_first = 0; iss_last = 0;
    wb_waddr = '0; wb_wdata = '0; bias_waddr = '0; bias_wdata = '0; ib_lane = '0; ib_waddr = '0;
    ib_wdata = '0; iss_waddr = '0; iss_iaddr = '0; iss_neuron = '0; lane_en = '1;
    foreach (prev_y[l]) prev_y[l] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < H; n++) begin
      for (int j = 0; j < K; j++) begin
        @(negedge clk);
        wb_we = 1'b1; wb_waddr = WB_AW'(n * K + j);
        for (int e = 0; e < WIDTH; e++) begin
          wref[n][j*WIDTH+e] = int'($urandom % 17) - 8;
          wb_wdata[e*8 +: 8] = 8'(wref[n][j*WIDTH+e]);
        end
      end
      @(negedge clk);
      wb_we = 1'b0; bias_we = 1'b1; bias_waddr = NW'(n);
      bref[n] = int'($urandom % 8192) - 4096;
      bias_wdata = cell_t'(bref[n]);
    end
    for (int l = 0; l < LANES; l++) begin
      for (int j = 0; j < K; j++) begin
        @(negedge clk);
        bias_we = 1'b0; ib_we = 1'b1; ib_lane = LW'(l); ib_waddr = IB_AW'(j);
        for (int e = 0; e < WIDTH; e++) begin
          xref[l][j*WIDTH+e] = int'($urandom % 17) - 8;
          ib_wdata[e*8 +: 8] = 8'(xref[l][j*WIDTH+e]);
        end
      end
    end
    @(negedge clk);
    ib_we = 1'b0; bias_we = 1'b0;
    run_pass();
    lane_en = 4'b1011;   // lane 2 power gated
    run_pass();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
