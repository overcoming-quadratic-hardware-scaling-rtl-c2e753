// phase_osc_tb -- self-checking test of the shift-register oscillator.
//
// Part 1 runs four 2-bit-phase oscillators, one per multiplexer setting, and
// compares their outputs with the register table of the 4-stage example
// (row t, column i = register i at time t). Part 2 runs a default 4-bit
// oscillator with random phase changes and loads, against the model
// out = ((t + phase) mod 16) < 8, where t counts ticks since the last load.
// It also checks the period of 16 ticks.
module phase_osc_tb;
  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic load = 1'b0;
  logic tick = 1'b0;
  int   checks = 0, failures = 0;

  always #5 clk = ~clk;

  // ---- part 1: 4-stage example ---------------------------------------
  logic [3:0] out2;
  for (genvar i = 0; i < 4; i++) begin : g_small
    phase_osc #(.PHASE_BITS(2)) u (
      .clk(clk), .rst_n(rst_n), .load(load), .tick(tick),
      .phase(2'(i)), .osc_out(out2[i]));
  end
  // rows of the table, register 0 in bit 0
  logic [3:0] table_row [5] = '{4'b0011, 4'b1001, 4'b1100, 4'b0110, 4'b0011};

  // ---- part 2: default oscillator -------------------------------------
  logic [3:0] ph;
  logic       out4;
  phase_osc dut (.clk(clk), .rst_n(rst_n), .load(load), .tick(tick),
                 .phase(ph), .osc_out(out4));

  int t;  // ticks since load
  function automatic logic model(int tt, logic [3:0] p);
    return ((tt + p) % 16) < 8;
  endfunction

  task automatic do_tick();
    tick = 1'b1; @(posedge clk); #1 tick = 1'b0;
    t++;
  endtask

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int rise_t, last_rise;
    ph = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    @(posedge clk); #1;
    t = 0;
    for (int r = 0; r < 5; r++) begin
      checks++;
      if (out2 !== table_row[r]) begin
        failures++;
        $display("FAIL table row %0d: got %b exp %b", r, out2, table_row[r]);
      end
      // idle cycles without tick must not move the oscillator
      repeat (2) @(posedge clk);
      #1 do_tick();
    end

    // part 2
    load = 1'b1; @(posedge clk); #1 load = 1'b0; t = 0;
    last_rise = -1;
    for (int k = 0; k < 2000; k++) begin
      if ($urandom_range(0, 9) == 0) ph = 4'($urandom);
      if ($urandom_range(0, 199) == 0) begin
        load = 1'b1; @(posedge clk); #1 load = 1'b0; t = 0;
      end
      #1;
      checks++;
      if (out4 !== model(t, ph)) begin
        failures++;
        $display("FAIL t=%0d phase=%0d out=%0d", t, ph, out4);
      end
      repeat ($urandom_range(0, 2)) @(posedge clk);
      #1 do_tick();
    end

    // period check with a fixed phase: rising edges 16 ticks apart
    ph = 4'd5; load = 1'b1; @(posedge clk); #1 load = 1'b0;
    rise_t = -1; last_rise = -1;
    for (int k = 0; k < 64; k++) begin
      logic prev;
      prev = out4;
      do_tick(); #1;
      if (out4 && !prev) begin
        if (last_rise >= 0) begin
          checks++;
          if (k - last_rise != 16) begin
            failures++;
            $display("FAIL period %0d", k - last_rise);
          end
        end
        last_rise = k;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
