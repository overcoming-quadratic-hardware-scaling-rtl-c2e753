// slow_clk_gen_tb -- self-checking test of the slow-clock generator.
//
// At the default division of 512 and at a small odd division it checks that
// ticks are exactly DIV logic-clock cycles apart, are one cycle wide, and
// coincide with the low-to-high transition of slow_clk; that slow_clk is high
// for DIV/2 cycles per period; that nothing ticks while run is low; and that
// the first tick comes in the first cycle run is high.
module slow_clk_gen_tb;
  logic clk = 1'b0, rst_n = 1'b0;
  logic run = 1'b0, load = 1'b0;
  logic slow_a, tick_a, slow_b, tick_b;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  slow_clk_gen dut_a (.clk(clk), .rst_n(rst_n), .run(run), .load(load),
                      .slow_clk(slow_a), .tick(tick_a));
  slow_clk_gen #(.DIV(7)) dut_b (.clk(clk), .rst_n(rst_n), .run(run), .load(load),
                                 .slow_clk(slow_b), .tick(tick_b));

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_eq(input int got, input int exp, input string what);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d exp %0d", what, got, exp);
    end
  endtask

  // cycle-by-cycle monitor
  int cyc = 0, last_a = -1, last_b = -1, high_a = 0, ticks_a = 0, ticks_b = 0;
  logic slow_a_q = 1'b0;
  always @(posedge clk) begin
    cyc++;
    if (run && rst_n) begin
      expect_eq(int'(tick_a), int'(slow_a && !slow_a_q), "tick at rising edge");
      if (tick_a) begin
        if (last_a >= 0) expect_eq(cyc - last_a, 512, "period DIV=512");
        if (last_a >= 0) expect_eq(high_a, 256, "high time DIV=512");
        last_a = cyc; high_a = 0; ticks_a++;
      end
      if (slow_a) high_a++;
      if (tick_b) begin
        if (last_b >= 0) expect_eq(cyc - last_b, 7, "period DIV=7");
        last_b = cyc; ticks_b++;
      end
    end else begin
      checks++;
      if (tick_a || tick_b || slow_a) begin
        failures++;
        $display("FAIL tick while stopped");
      end
      last_a = -1; last_b = -1;
    end
    slow_a_q <= slow_a;
  end

  initial begin
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    repeat (20) @(posedge clk);
    #1 run = 1'b1;
    #1 expect_eq(int'(tick_a && tick_b), 1, "first tick on run");
    repeat (512 * 6 + 3) @(posedge clk);
    #1 run = 1'b0;
    repeat (40) @(posedge clk);
    #1 run = 1'b1;
    repeat (512 * 3) @(posedge clk);
    #1 run = 1'b0;
    expect_eq(int'(ticks_a >= 9), 1, "number of ticks DIV=512");
    expect_eq(int'(ticks_b >= 600), 1, "number of ticks DIV=7");
    repeat (5) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
