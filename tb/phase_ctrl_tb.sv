// phase_ctrl_tb -- self-checking test of the phase controller.
//
// The testbench plays the oscillator: after a load with phase p the
// oscillator is at position (t + p) mod 16 on tick t, and its output is high
// for positions 0..7. The reference model needs no counter: on a rising edge
// of the reference (sum > 0 high, sum < 0 low, sum == 0 equal to the
// oscillator) the phase becomes p - position, which puts the oscillator at
// position 0 on that tick. Two scenarios: (1) a square-wave reference with a
// random target phase, after which the phase must equal the target within
// one period and stay there; (2) random sums with zeros, checked tick by tick
// including the `update` pulse.
module phase_ctrl_tb;
  localparam int PB = 4;
  localparam int SW = 15;
  logic clk = 1'b0, rst_n = 1'b0;
  logic load = 1'b0, tick = 1'b0, ph_we = 1'b0;
  logic [PB-1:0] ph_wdata = '0;
  logic signed [SW-1:0] sum = '0;
  logic osc_in;
  logic [PB-1:0] phase;
  logic ref_o, update;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  phase_ctrl #(.PHASE_BITS(PB), .SUM_W(SW)) dut (.*);

  // model state
  int t;
  logic [PB-1:0] pm;
  logic ref_prev;

  function automatic logic osc_at(int tt, logic [PB-1:0] p);
    return ((tt + int'(p)) % 16) < 8;
  endfunction

  assign osc_in = osc_at(t, pm);

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic start(input logic [PB-1:0] p0);
    ph_we = 1'b1; ph_wdata = p0; @(posedge clk); #1 ph_we = 1'b0;
    load = 1'b1; @(posedge clk); #1 load = 1'b0;
    pm = p0; t = 0;
    ref_prev = osc_at(-1 + 16, p0);
  endtask

  // one tick: model first, then the DUT edge, then compare
  task automatic do_tick();
    logic r, rise;
    logic [PB-1:0] pos, exp_phase;
    #1;
    pos = 4'(t + int'(pm));
    r = (sum > 0) ? 1'b1 : (sum < 0) ? 1'b0 : osc_at(t, pm);
    rise = r & ~ref_prev;
    exp_phase = rise ? pm - pos : pm;
    checks++;
    if (ref_o !== r) begin
      failures++;
      $display("FAIL ref t=%0d got %0d exp %0d", t, ref_o, r);
    end
    tick = 1'b1; @(posedge clk); #1 tick = 1'b0;
    checks++;
    if (phase !== exp_phase || update !== (rise && pos != 0)) begin
      failures++;
      $display("FAIL t=%0d pos=%0d sum=%0d phase %0d exp %0d update %0d",
               t, pos, sum, phase, exp_phase, update);
    end
    pm = exp_phase; ref_prev = r; t++;
    repeat ($urandom_range(0, 3)) @(posedge clk);
  endtask

  initial begin
    int target;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    // scenario 1: lock to a square-wave reference
    for (int trial = 0; trial < 40; trial++) begin
      target = $urandom_range(0, 15);
      start(4'($urandom));
      for (int k = 0; k < 48; k++) begin
        sum = osc_at(t, 4'(target)) ? SW'($urandom_range(1, 500))
                                    : -SW'($urandom_range(1, 500));
        do_tick();
        if (k >= 17) begin
          checks++;
          if (phase !== 4'(target)) begin
            failures++;
            $display("FAIL lock: phase %0d target %0d", phase, target);
          end
        end
      end
    end
    // scenario 2: random sums, including zero
    for (int trial = 0; trial < 20; trial++) begin
      start(4'($urandom));
      for (int k = 0; k < 200; k++) begin
        case ($urandom_range(0, 3))
          0: sum = '0;
          1: sum = SW'($urandom_range(1, 8000));
          2: sum = -SW'($urandom_range(1, 8000));
          default: ;  // keep
        endcase
        do_tick();
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
