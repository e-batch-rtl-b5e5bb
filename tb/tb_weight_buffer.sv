// tb_weight_buffer: self-checking test of the weight_buffer memory at its default size.
// Writes a pseudo-random word to every address (value derived from the
// address by a hash kept here), reads every address back in random order and
// checks the data and the one-cycle read latency, including a read of an
// address in the same cycle as a write to another address.
module tb_weight_buffer;
  localparam int unsigned BYTES = 2097152;
  localparam int unsigned W     = 64;
  localparam int unsigned DW    = 8;
  localparam int unsigned DEPTH = (BYTES * 8) / (W * DW);
  localparam int unsigned AW    = $clog2(DEPTH);

  logic clk = 1'b0;
  logic we, re;
  logic [AW-1:0] waddr, raddr;
  logic [W*DW-1:0] wdata, rdata;
  int checks = 0, failures = 0;

  weight_buffer dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (4 * DEPTH + 10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [W*DW-1:0] pattern(input int unsigned a, input int unsigned seed);
    logic [W*DW-1:0] v;
    for (int i = 0; i < (W * DW) / 32; i++) v[i*32 +: 32] = (a * 32'h9E3779B1) ^ (i * 32'h85EBCA77) ^ seed;
    return v;
  endfunction

  initial begin
    int unsigned a, prev;
    we = 1'b0; re = 1'b0; waddr = '0; raddr = '0; wdata = '0;
    @(negedge clk);
    for (int unsigned i = 0; i < DEPTH; i++) begin
      we = 1'b1; waddr = AW'(i); wdata = pattern(i, 32'h1234);
      @(negedge clk);
    end
    we = 1'b0;
    for (int i = 0; i < 4000; i++) begin
      a = $urandom % DEPTH;
      re = 1'b1; raddr = AW'(a);
      // write a different address in the same cycle
      prev = (a + 1) % DEPTH;
      we = 1'b1; waddr = AW'(prev); wdata = pattern(prev, 32'h1234);
      @(posedge clk); #1;
      checks++;
      if (rdata !== pattern(a, 32'h1234)) begin
        failures++;
        $display("FAIL: read addr %0d", a);
      end
      @(negedge clk);
    end
    // rewrite one word and read it back: new data after one cycle
    we = 1'b1; re = 1'b0; waddr = AW'(5); wdata = pattern(5, 32'hBEEF);
    @(negedge clk);
    we = 1'b0; re = 1'b1; raddr = AW'(5);
    @(posedge clk); #1;
    checks++;
    if (rdata !== pattern(5, 32'hBEEF)) begin failures++; $display("FAIL: rewrite"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
