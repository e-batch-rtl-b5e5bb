// tb_cell_update: self-checking test of the LSTM element-wise stage.
// Loads a random cell state, feeds random gate values for every neuron, and
// compares c_t and h_t with a reference computed here in floating point
// (c within 1 LSB of Q.12 before saturation, h within 3 LSB of Q1.6 using
// the true tanh), checks that the store is updated in place (a second pass
// uses the new c), that a gated lane changes nothing, and the 2-cycle latency.
module tb_cell_update;
  import ebatch_pkg::*;
  localparam int N = 64;   // neurons in this test
  localparam int WORD_W = 512;
  localparam int CPW = WORD_W / 16;

  logic clk = 1'b0, rst_n = 1'b0;
  logic en, c_we, in_valid, out_valid;
  logic [$clog2(N/CPW)-1:0] c_waddr;
  logic [WORD_W-1:0] c_wdata;
  logic [$clog2(N)-1:0] neuron, out_neuron;
  data_t gi, gf, gg, go, out_h;
  cell_t out_c;
  int checks = 0, failures = 0;
  int cref [N];

  cell_update #(.NEURONS(N), .WORD_W(WORD_W)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
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

  task automatic pass_all(input logic lane_en, input int pass);
    int ei, ef, eg, eo;
    real c_new, h_ref;
    for (int n = 0; n < N; n++) begin
      @(negedge clk);
      en = lane_en;
      ei = int'($urandom % 65); ef = int'($urandom % 65);       // sigmoid outputs 0..1
      eg = int'($urandom % 129) - 64; eo = int'($urandom % 65); // tanh output -1..1
      gi = data_t'(ei); gf = data_t'(ef); gg = data_t'(eg); go = data_t'(eo);
      neuron = n[$clog2(N)-1:0]; in_valid = 1'b1;
      @(negedge clk);
      in_valid = 1'b0;
      check(out_valid == 1'b0, "no output after one cycle");
      @(negedge clk);
      if (!lane_en) begin
        check(out_valid == 1'b0, "gated lane produces nothing");
        continue;
      end
      check(out_valid == 1'b1 && int'(out_neuron) == n, "output two cycles after input");
      c_new = (real'(ef) / 64.0) * (real'(cref[n]) / 4096.0) + (real'(ei) / 64.0) * (real'(eg) / 64.0);
      if (c_new > 32767.0 / 4096.0) c_new = 32767.0 / 4096.0;
      if (c_new < -8.0) c_new = -8.0;
      check((real'(out_c) / 4096.0 - c_new) < 1.5 / 4096.0 && (c_new - real'(out_c) / 4096.0) < 1.5 / 4096.0,
            $sformatf("pass %0d c[%0d] got %0d exp %f", pass, n, out_c, c_new * 4096.0));
      h_ref = (real'(eo) / 64.0) * ((1.0 - $exp(-2.0 * c_new)) / (1.0 + $exp(-2.0 * c_new))) * 64.0;
      check((real'(out_h) - h_ref) <= 3.0 && (h_ref - real'(out_h)) <= 3.0,
            $sformatf("pass %0d h[%0d] got %0d exp %f", pass, n, out_h, h_ref));
      cref[n] = int'(out_c);  // next pass starts from the stored value
    end
  endtask

  initial begin
    en = 1'b1; c_we = 1'b0; in_valid = 1'b0; c_waddr = '0; c_wdata = '0; neuron = '0;
    gi = '0; gf = '0; gg = '0; go = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    // load a random cell state, |c| < 4
    for (int w = 0; w < N / CPW; w++) begin
      @(negedge clk);
      c_we = 1'b1; c_waddr = w[$clog2(N/CPW)-1:0];
      for (int e = 0; e < CPW; e++) begin
        cref[w * CPW + e] = int'($urandom % 32768) - 16384;
        c_wdata[e*16 +: 16] = 16'(cref[w * CPW + e]);
      end
    end
    @(negedge clk);
    c_we = 1'b0;
    pass_all(1'b1, 0);
    pass_all(1'b0, 1);   // gated: state must stay
    pass_all(1'b1, 2);   // uses c written in pass 0
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
