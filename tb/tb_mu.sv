// tb_mu: self-checking test of the multi-functional unit.
// Sweeps pre-activation values and biases and compares the unit's sigmoid and
// tanh outputs with the true functions (computed with $exp) to within the
// error of the piecewise-linear approximation plus rounding (3 LSB of Q1.6),
// checks exact known points, and checks the one-cycle latency.
module tb_mu;
  import ebatch_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid, out_valid;
  acc_t acc;
  cell_t bias;
  act_e func;
  data_t y;
  int checks = 0, failures = 0;

  mu dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
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

  function automatic real ref_act(input real v, input act_e f);
    if (f == ACT_TANH) return (1.0 - $exp(-2.0 * v)) / (1.0 + $exp(-2.0 * v));
    return 1.0 / (1.0 + $exp(-v));
  endfunction

  task automatic apply(input int a, input int b, input act_e f, output int got);
    @(negedge clk);
    acc = acc_t'(a); bias = cell_t'(b); func = f; in_valid = 1'b1;
    @(negedge clk);
    in_valid = 1'b0;
    check(out_valid == 1'b1, "out_valid one cycle after in_valid");
    got = int'(y);
  endtask

  initial begin
    int got;
    real v, r;
    in_valid = 1'b0; acc = '0; bias = '0; func = ACT_SIGMOID;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    // known points: sigmoid(0) = 0.5 -> 32, tanh(0) = 0, large inputs saturate
    apply(0, 0, ACT_SIGMOID, got);       check(got == 32, "sigmoid(0)=32");
    apply(0, 0, ACT_TANH, got);          check(got == 0, "tanh(0)=0");
    apply(100000, 0, ACT_SIGMOID, got);  check(got == 64, "sigmoid(+big)=64");
    apply(-100000, 0, ACT_SIGMOID, got); check(got == 0, "sigmoid(-big)=0");
    apply(-100000, 0, ACT_TANH, got);    check(got == -64, "tanh(-big)=-64");
    // bias is added: acc = -4096, bias = +4096 -> sigmoid(0)
    apply(-4096, 4096, ACT_SIGMOID, got); check(got == 32, "bias added");
    for (int i = 0; i < 2000; i++) begin
      int a, b;
      act_e f;
      a = int'($urandom % 65536) - 32768;     // acc in [-8, 8)
      b = int'($urandom % 8192) - 4096;       // bias in [-1, 1)
      f = act_e'($urandom % 2);
      apply(a, b, f, got);
      v = real'(a + b) / 4096.0;
      r = ref_act(v, f) * 64.0;
      check((real'(got) - r) <= 3.0 && (r - real'(got)) <= 3.0,
            $sformatf("%s(%f): got %0d exp %f", f.name(), v, got, r));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
