// tb_dpu: self-checking test of the dot-product unit.
// Feeds random neurons of 1 to 5 sub-vectors of 64 signed 8-bit elements and
// compares the accumulated result with a dot product computed here, checks
// that the result appears exactly one cycle after the last beat, and that a
// gated lane (en = 0) produces nothing.
module tb_dpu;
  import ebatch_pkg::*;
  localparam int W = 64;

  logic clk = 1'b0, rst_n = 1'b0;
  logic en, in_valid, first, last, acc_valid;
  data_t x [W], w [W];
  acc_t acc;
  int checks = 0, failures = 0;

  dpu #(.WIDTH(W)) dut (.*);

  always #5 clk = ~clk;

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

  initial begin
    longint expv;
    int k;
    en = 1'b1; in_valid = 1'b0; first = 1'b0; last = 1'b0;
    foreach (x[i]) begin x[i] = '0; w[i] = '0; end
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk);
    for (int n = 0; n < 200; n++) begin
      k = 1 + ($urandom % 5);
      expv = 0;
      for (int s = 0; s < k; s++) begin
        @(negedge clk);
        in_valid = 1'b1; first = (s == 0); last = (s == k - 1);
        for (int i = 0; i < W; i++) begin
          // mix extreme values in to exercise sign handling
          x[i] = (n % 7 == 0) ? data_t'(-128) : data_t'($urandom);
          w[i] = (n % 11 == 0) ? data_t'(-128) : data_t'($urandom);
          expv += longint'(x[i]) * longint'(w[i]);
        end
        @(posedge clk);
        #1;
        // the result is registered by the edge that takes the last beat
        if (s < k - 1) check(acc_valid == 1'b0, "acc_valid only after last beat");
      end
      check(acc_valid == 1'b1, $sformatf("acc_valid one cycle after last (n=%0d)", n));
      check(acc == acc_t'(expv), $sformatf("dot product n=%0d got %0d exp %0d", n, acc, expv));
      @(negedge clk);
      in_valid = 1'b0; first = 1'b0; last = 1'b0;
      @(posedge clk); #1;
      check(acc_valid == 1'b0, "acc_valid is a single pulse");
    end
    // gated lane
    @(negedge clk);
    en = 1'b0; in_valid = 1'b1; first = 1'b1; last = 1'b1;
    @(negedge clk);
    in_valid = 1'b0;
    check(acc_valid == 1'b0, "gated lane gives no result");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
