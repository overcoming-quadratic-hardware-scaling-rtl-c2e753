// slow_clk_gen -- slow (phase-update) clock and its rising-edge detector.
//
// The hybrid network needs a phase-update clock that is at least N times
// slower than the logic clock, because the serial arithmetic circuit handles
// one coupling per logic-clock cycle, and it detects the low-to-high
// transition of that slow clock to start each serial computation. Here a
// counter divides the logic clock by DIV; the slow clock is high for the first
// DIV/2 counts and low for the rest, and `tick` is high during the first
// logic-clock cycle of each high phase (combinational, one cycle wide).
// The divider form, the 50 % duty cycle and the enable are this design's
// choices.
//
// `run` enables the network. While it is low the divider is held at zero and
// the slow clock is low, so the first tick comes in the first cycle in which
// `run` is high: as on the original hardware, the enable is not aligned to any oscillator
// edge. `load` restarts the divider as well.
module slow_clk_gen #(
  parameter int unsigned DIV = onn_pkg::CLK_DIV_DEFAULT,
  localparam int unsigned CW = onn_pkg::idx_width(DIV)
) (
  input  logic clk,
  input  logic rst_n,
  input  logic run,
  input  logic load,
  output logic slow_clk,
  output logic tick
);

  logic [CW-1:0] div_cnt;
  logic          slow_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)               div_cnt <= '0;
    else if (load || !run)    div_cnt <= '0;
    else if (div_cnt == CW'(DIV - 1)) div_cnt <= '0;
    else                      div_cnt <= div_cnt + 1'b1;
  end

  assign slow_clk = run && !load && (div_cnt < CW'(DIV / 2));

  // Rising-edge detector in the fast clock domain.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) slow_q <= 1'b0;
    else        slow_q <= slow_clk;
  end

  assign tick = slow_clk & ~slow_q;

endmodule
