// onn_retrieval_bench -- pattern-retrieval run on one network size.
//
// Builds a network of ROWS*COLS oscillators (division factor DIV), stores
// NPAT random patterns trained with the Diederich-Opper I rule (5-bit
// weights), and for each corruption level in {0, 10, 25, 50} % runs RUNS
// retrievals: the corrupted pattern is written as initial phases (0 or 180
// degrees), the network runs until no phase moved for three periods (or
// MAX_PERIODS), and the phases read back are compared with the stored
// pattern, relative to pixel 0. Every tick is checked against the
// tick-level reference model of onn_tb_pkg; a pattern given uncorrupted must
// be held. Retrieval accuracy and the mean settling time in oscillation
// periods are printed per level. `done` rises when all runs are over.
module onn_retrieval_bench #(
  parameter int ROWS = 3,
  parameter int COLS = 3,
  parameter int NPAT = 2,
  parameter int DIV  = 16,
  parameter int RUNS = 100,
  parameter int MAX_PERIODS = 60
) (
  output logic done,
  output int   checks,
  output int   failures
);
  import onn_tb_pkg::*;

  localparam int N  = ROWS * COLS;
  localparam int PB = 4;
  localparam int WB = 5;
  localparam int AW = onn_pkg::idx_width(N);

  logic clk = 1'b0, rst_n = 1'b0;
  logic w_we = 1'b0, ph_we = 1'b0, load = 1'b0, run = 1'b0;
  logic [AW-1:0] w_row = '0, w_col = '0, ph_idx = '0;
  logic signed [WB-1:0] w_data = '0;
  logic [PB-1:0] ph_wdata = '0;
  logic slow_clk, tick;
  logic [N-1:0] osc_out;
  logic [PB-1:0] phase [N];
  logic [AW:0] update_count;
  int n_zero = 0;

  always #5 clk = ~clk;

  hybrid_onn #(.N(N), .PHASE_BITS(PB), .WEIGHT_BITS(WB), .CLK_DIV(DIV)) dut (.*);

  int xi[], w[], p[];
  bit refprev[];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %0dx%0d: %s", ROWS, COLS, what);
    end
  endtask

  task automatic trial(input int mu, input int ncor, output int errors, output int settle);
    int t = 0, last_move = 0, quiet = 0;
    corrupt(p, xi, mu, N, N, ncor);
    @(negedge clk);
    for (int i = 0; i < N; i++) begin
      ph_we = 1'b1; ph_idx = AW'(i); ph_wdata = PB'(p[i]);
      @(negedge clk);
    end
    ph_we = 1'b0;
    load = 1'b1; @(negedge clk); load = 1'b0;
    model_init(refprev, p, N);
    run = 1'b1;
    #1;
    while (t < MAX_PERIODS * PERIOD && quiet < 3 * PERIOD) begin
      if (tick) begin
        int moved;
        bit ok = 1;
        moved = model_tick(p, refprev, w, N, t, n_zero);
        @(negedge clk);
        if (moved > 0) begin
          last_move = t;
          quiet = 0;
        end else quiet++;
        for (int i = 0; i < N; i++)
          if (phase[i] != PB'(p[i]) || osc_out[i] != osc_at(t + 1, p[i])) ok = 0;
        check(ok && update_count == (AW + 1)'(moved), "network state against model");
        t++;
      end else begin
        @(negedge clk);
      end
    end
    run = 1'b0;
    @(negedge clk);
    errors = count_errors(p, xi, mu, N);
    settle = (last_move + PERIOD) / PERIOD;
  endtask

  initial begin
    int levels[4] = '{0, 10, 25, 50};
    done = 1'b0; checks = 0; failures = 0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    gen_patterns(xi, NPAT, N);
    train_do1(w, xi, NPAT, N, N);
    @(negedge clk);
    for (int i = 0; i < N; i++)
      for (int j = 0; j < N; j++) begin
        w_we = 1'b1; w_row = AW'(i); w_col = AW'(j); w_data = WB'(w[i * N + j]);
        @(negedge clk);
      end
    w_we = 1'b0;
    foreach (levels[l]) begin
      int ok_runs, settle_sum;
      ok_runs = 0; settle_sum = 0;
      for (int r = 0; r < RUNS; r++) begin
        int errors, settle;
        trial(r % NPAT, (levels[l] * N + 50) / 100, errors, settle);
        if (errors == 0) begin
          ok_runs++;
          settle_sum += settle;
        end
        if (levels[l] == 0) check(errors == 0, "stored pattern is held");
      end
      $display("%0dx%0d corruption %0d%%: %0d/%0d retrieved (%0d%%), mean settle %0d periods",
               ROWS, COLS, levels[l], ok_runs, RUNS, 100 * ok_runs / RUNS,
               ok_runs ? settle_sum / ok_runs : 0);
    end
    done = 1'b1;
  end
endmodule
