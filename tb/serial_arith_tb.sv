// serial_arith_tb -- self-checking test of the serial weighted-sum circuit.
//
// Uses the default size (506 couplings, 5-bit weights). Loads a weight row,
// presents an oscillator vector, pulses `start` and checks that the stored
// sum equals sum_j (osc_j ? +W_j : -W_j), that it appears exactly N+1
// cycles after `start` (N serial steps plus the read register), that it is
// held until the next computation ends, and that `clear` empties it. The
// weight rows include the extreme cases all -16 and all +15.
module serial_arith_tb;
  localparam int N  = 506;
  localparam int WB = 5;
  localparam int AW = 9;
  localparam int SW = onn_pkg::sum_width(N, WB);

  logic clk = 1'b0, rst_n = 1'b0;
  logic clear = 1'b0, start = 1'b0;
  logic [N-1:0] osc_in = '0;
  logic w_we = 1'b0;
  logic [AW-1:0] w_addr = '0;
  logic signed [WB-1:0] w_data = '0;
  logic signed [SW-1:0] sum_o;
  logic sum_valid, busy;
  int checks = 0, failures = 0;
  logic signed [WB-1:0] w [N];

  always #5 clk = ~clk;

  serial_arith #(.N(N), .WEIGHT_BITS(WB)) dut (.*);

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic load_weights(input int mode);
    for (int j = 0; j < N; j++) begin
      case (mode)
        0: w[j] = WB'($urandom);
        1: w[j] = -16;
        default: w[j] = 15;
      endcase
      w_we = 1'b1; w_addr = AW'(j); w_data = w[j];
      @(posedge clk); #1;
    end
    w_we = 1'b0;
  endtask

  function automatic int expected();
    int s = 0;
    for (int j = 0; j < N; j++) s += osc_in[j] ? int'(w[j]) : -int'(w[j]);
    return s;
  endfunction

  task automatic run_one(input string what);
    int exp, lat;
    exp = expected();
    start = 1'b1; @(posedge clk); #1 start = 1'b0;
    lat = 0;  // edges after the start edge
    while (!sum_valid && lat < 3 * N) begin
      @(posedge clk); #1 lat++;
    end
    checks++;
    if (lat != N + 1) begin
      failures++;
      $display("FAIL %s latency %0d exp %0d", what, lat, N + 1);
    end
    checks++;
    if (int'(sum_o) != exp) begin
      failures++;
      $display("FAIL %s sum %0d exp %0d", what, sum_o, exp);
    end
    // held while idle
    repeat (5) @(posedge clk);
    #1 checks++;
    if (int'(sum_o) != exp || busy) begin
      failures++;
      $display("FAIL %s hold", what);
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    load_weights(0);
    for (int k = 0; k < 20; k++) begin
      for (int j = 0; j < N; j++) osc_in[j] = 1'($urandom);
      run_one("random");
    end
    osc_in = '1; run_one("all high");
    osc_in = '0; run_one("all low");
    load_weights(1);
    osc_in = '0; run_one("max positive");
    osc_in = '1; run_one("max negative");
    load_weights(2);
    osc_in = '1; run_one("all +15");
    // the stored sum survives until the next result, then clear empties it
    start = 1'b1; @(posedge clk); #1 start = 1'b0;
    osc_in = '0;
    repeat (N / 2) @(posedge clk);
    #1 checks++;
    if (int'(sum_o) != 15 * N) begin
      failures++;
      $display("FAIL stored sum changed during computation: %0d", sum_o);
    end
    clear = 1'b1; @(posedge clk); #1 clear = 1'b0;
    repeat (N) @(posedge clk);
    #1 checks++;
    if (sum_o != 0 || sum_valid || busy) begin
      failures++;
      $display("FAIL clear: sum %0d", sum_o);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
