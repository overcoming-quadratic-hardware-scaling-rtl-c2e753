// phase_osc -- phase-controlled digital square-wave oscillator.
//
// A circular shift register of 2^PHASE_BITS flip-flops is loaded with ones in
// its first half and zeros in its second half, and rotates one position to
// the left (reg[i] <= reg[i+1], reg[last] <= reg[0]) on every slow-clock tick.
// Register i therefore carries the same square wave as register 0 advanced by
// i ticks, and a multiplexer that picks register[phase] shifts the output by
// phase * 360/2^PHASE_BITS degrees. One oscillation period is 2^PHASE_BITS
// ticks. This structure, the initial pattern and the left rotation follow the
// paper's oscillator description and its shift-register table.
//
// Interface: `tick` is a one-fast-cycle enable marking the slow-clock rising
// edge (the slow clock is handled as a clock enable in the fast domain, this
// design's choice). `load` restores the initial pattern so that all
// oscillators of a network share one time base. `osc_out` is combinational
// from the registers and `phase`, so a phase change shows in the same cycle.
module phase_osc #(
  parameter int unsigned PHASE_BITS = onn_pkg::PHASE_BITS_DEFAULT
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  load,
  input  logic                  tick,
  input  logic [PHASE_BITS-1:0] phase,
  output logic                  osc_out
);

  localparam int unsigned NREG = 2 ** PHASE_BITS;

  // Initial pattern: registers 0 .. NREG/2-1 hold 1, the rest 0.
  localparam logic [NREG-1:0] INIT = {{(NREG/2){1'b0}}, {(NREG/2){1'b1}}};

  logic [NREG-1:0] sr;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     sr <= INIT;
    else if (load)  sr <= INIT;
    else if (tick)  sr <= {sr[0], sr[NREG-1:1]};
  end

  assign osc_out = sr[phase];

endmodule
