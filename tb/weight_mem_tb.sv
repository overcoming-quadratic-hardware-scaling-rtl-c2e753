// weight_mem_tb -- self-checking test of the weight memory.
//
// Fills a full-depth (506-word) memory with random 5-bit signed weights,
// then reads it back in order and at random, checking the data and the
// one-cycle read latency, that a read with `re` low keeps the old output,
// and that a write to one word does not disturb the others.
module weight_mem_tb;
  localparam int DEPTH = 506;
  localparam int AW = 9;
  logic clk = 1'b0;
  logic we = 1'b0, re = 1'b0;
  logic [AW-1:0] waddr = '0, raddr = '0;
  logic signed [4:0] wdata = '0, rdata;
  logic signed [4:0] model [DEPTH];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  weight_mem #(.DEPTH(DEPTH), .WIDTH(5)) dut (.*);

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input logic signed [4:0] exp, input string what);
    checks++;
    if (rdata !== exp) begin
      failures++;
      $display("FAIL %s: got %0d exp %0d", what, rdata, exp);
    end
  endtask

  initial begin
    @(posedge clk); #1;
    for (int a = 0; a < DEPTH; a++) begin
      model[a] = 5'($urandom);
      we = 1'b1; waddr = AW'(a); wdata = model[a];
      @(posedge clk); #1;
    end
    we = 1'b0;
    // sequential read, as the arithmetic circuit does
    for (int a = 0; a < DEPTH; a++) begin
      re = 1'b1; raddr = AW'(a);
      @(posedge clk); #1;
      check(model[a], "sequential");
    end
    // read enable low holds the last value
    re = 1'b0; raddr = 0;
    repeat (3) @(posedge clk);
    #1 check(model[DEPTH-1], "hold");
    // random overwrite and random read
    for (int k = 0; k < 2000; k++) begin
      int a, b;
      a = $urandom_range(0, DEPTH - 1);
      b = $urandom_range(0, DEPTH - 1);
      we = 1'b1; waddr = AW'(a); wdata = 5'($urandom); model[a] = wdata;
      re = 1'b1; raddr = AW'(b);
      @(posedge clk); #1;
      we = 1'b0;
      // old-data read when a == b on the same edge
      if (a != b) check(model[b], "random");
      re = 1'b1; raddr = AW'(a);
      @(posedge clk); #1;
      check(model[a], "after write");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
