// hybrid_onn_tb -- end-to-end test of the oscillatory network (reduced size).
//
// A 22-oscillator network (a 5x4 pixel pattern plus two oscillators with no
// coupling) with a division factor of 32 stores five random 5x4 patterns
// trained with the Diederich-Opper I rule and quantised to 5 bits. Each trial
// writes a (possibly corrupted) pattern as initial phases (0 or 180 degrees),
// loads, runs and compares, after every slow-clock tick, all phase registers
// and oscillator outputs with the tick-level reference model of onn_tb_pkg.
// It also checks the tick spacing (CLK_DIV logic cycles) and that a stored
// pattern presented uncorrupted is held. Retrieval accuracy and settling time
// in oscillation periods are printed per corruption level.
// Mechanisms counted, each must occur: serial computations (ticks), phase
// corrections, zero-sum references (reference follows the oscillator),
// pause/resume of the run enable, and reloading of initial conditions.
module hybrid_onn_tb;
  import onn_tb_pkg::*;

  localparam int N     = 22;
  localparam int NPIX  = 20;
  localparam int NPAT  = 5;
  localparam int DIV   = 32;
  localparam int PB    = 4;
  localparam int WB    = 5;
  localparam int AW    = onn_pkg::idx_width(N);
  localparam int MAX_TICKS = 60 * PERIOD;

  logic clk = 1'b0, rst_n = 1'b0;
  logic w_we = 1'b0, ph_we = 1'b0, load = 1'b0, run = 1'b0;
  logic [AW-1:0] w_row = '0, w_col = '0, ph_idx = '0;
  logic signed [WB-1:0] w_data = '0;
  logic [PB-1:0] ph_wdata = '0;
  logic slow_clk, tick;
  logic [N-1:0] osc_out;
  logic [PB-1:0] phase [N];
  logic [AW:0] update_count;

  int checks = 0, failures = 0;
  int n_ticks = 0, n_updates = 0, n_zero = 0, n_pause = 0, n_load = 0;

  always #5 clk = ~clk;

  hybrid_onn #(.N(N), .PHASE_BITS(PB), .WEIGHT_BITS(WB), .CLK_DIV(DIV)) dut (.*);

  initial begin : watchdog
    repeat (2_000_000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int xi[], w[], p[];
  bit refprev[];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  // Run one retrieval; returns residual pixel errors and settling periods.
  task automatic trial(input int mu, input int ncor, input bit pause_once,
                       output int errors, output int settle);
    int t = 0, last_move = 0, quiet = 0, since_tick = 0, last_tick_cyc = 0, cyc = 0;
    bit paused = 0;
    corrupt(p, xi, mu, NPIX, N, ncor);
    @(negedge clk);
    for (int i = 0; i < N; i++) begin
      ph_we = 1'b1; ph_idx = AW'(i); ph_wdata = PB'(p[i]);
      @(negedge clk);
    end
    ph_we = 1'b0;
    load = 1'b1; @(negedge clk); load = 1'b0;
    n_load++;
    model_init(refprev, p, N);
    for (int i = 0; i < N; i++) check(phase[i] == PB'(p[i]), "initial phase");
    run = 1'b1;
    #1;  // let the combinational tick settle before sampling it
    while (t < MAX_TICKS && quiet < 3 * PERIOD) begin
      // we are at a negedge; is the coming posedge a tick?
      if (tick) begin
        int moved;
        if (t > 0 && !paused) check(cyc - last_tick_cyc == DIV, "tick spacing");
        paused = 0;
        last_tick_cyc = cyc;
        moved = model_tick(p, refprev, w, N, t, n_zero);
        @(negedge clk); cyc++;
        n_ticks++;
        if (moved > 0) begin
          n_updates++;
          last_move = t;
          quiet = 0;
        end else quiet++;
        check(update_count == (AW + 1)'(moved), "update count");
        begin
          bit ok = 1;
          for (int i = 0; i < N; i++) begin
            if (phase[i] != PB'(p[i])) ok = 0;
            if (osc_out[i] != osc_at(t + 1, p[i])) ok = 0;
          end
          if (!ok) $display("  mismatch at tick %0d (trial pattern %0d)", t, mu);
          check(ok, "phases and outputs against model");
        end
        t++;
        since_tick = 0;
      end else begin
        @(negedge clk); cyc++;
        since_tick++;
        // pause after the serial sum is stored, resume a while later
        if (pause_once && t == 5 && since_tick == N + 4) begin
          run = 1'b0;
          repeat (13) @(negedge clk);
          run = 1'b1;
          #1;
          paused = 1;
          n_pause++;
        end
      end
    end
    run = 1'b0;
    @(negedge clk);
    errors = count_errors(p, xi, mu, NPIX);
    settle = (last_move + PERIOD) / PERIOD;
  endtask

  initial begin
    int levels[4] = '{0, 10, 25, 50};
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    gen_patterns(xi, NPAT, NPIX);
    train_do1(w, xi, NPAT, NPIX, N);
    // program the weight matrix
    @(negedge clk);
    for (int i = 0; i < N; i++)
      for (int j = 0; j < N; j++) begin
        w_we = 1'b1; w_row = AW'(i); w_col = AW'(j); w_data = WB'(w[i * N + j]);
        @(negedge clk);
      end
    w_we = 1'b0;
    foreach (levels[l]) begin
      int ok_runs, settle_sum, runs;
      ok_runs = 0; settle_sum = 0; runs = 0;
      for (int r = 0; r < 10; r++) begin
        int errors, settle, mu;
        mu = r % NPAT;
        trial(mu, (levels[l] * NPIX + 50) / 100, (l == 1 && r == 0), errors, settle);
        runs++;
        if (errors == 0) begin
          ok_runs++;
          settle_sum += settle;
        end
        if (levels[l] == 0) check(errors == 0, "stored pattern is held");
      end
      $display("corruption %0d%%: %0d/%0d retrieved, mean settle %0d periods",
               levels[l], ok_runs, runs, ok_runs ? settle_sum / ok_runs : 0);
    end
    $display("mechanisms: ticks=%0d phase_updates=%0d zero_sum_refs=%0d pauses=%0d loads=%0d",
             n_ticks, n_updates, n_zero, n_pause, n_load);
    check(n_ticks > 0, "serial computation never ran");
    check(n_updates > 0, "no phase correction happened");
    check(n_zero > 0, "no zero-sum reference happened");
    check(n_pause > 0, "run enable never paused");
    check(n_load > 1, "initial conditions never reloaded");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
