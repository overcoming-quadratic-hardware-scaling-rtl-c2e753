// phase_ctrl -- reference signal, phase-difference measurement and phase
// update of one oscillator.
//
// Follows the paper's description of the phase update: the sign of the
// weighted sum gives a reference signal (positive: high, negative: low,
// exactly zero: equal to the oscillator's present amplitude); an edge
// detector and a counter measure the phase difference between the reference
// and the oscillator; that difference is added to the oscillator's phase, so
// that the oscillator lines up with the reference. The paper gives only this
// function; the circuit below is this design's own.
//
// How it works (all on slow-clock ticks, i.e. on fast-clock edges with
// `tick` high):
//  * A counter restarts at each rising edge of the oscillator output and
//    otherwise counts up, so its value `pos` is the number of ticks since
//    the oscillator last rose, i.e. the oscillator's position in its period.
//  * On a rising edge of the reference the oscillator should be at position
//    0. The phase register is therefore moved by -pos (mod 2^PHASE_BITS),
//    which is adding the phase lead of the reference over the oscillator.
//    After such a step the counter and the oscillator-edge detector are
//    re-seeded as if the oscillator had just risen, so the jump of the
//    multiplexer output is not mistaken for a new oscillator edge.
//  * `sum` and `osc_in` are sampled on the tick edge: the stored sum was
//    computed from the oscillator outputs of the period that ends there, so
//    reference and oscillator belong to the same period.
//
// Interface: `ph_we`/`ph_wdata` write the phase register (initial condition,
// while the network is stopped). `load` re-seeds the counter and the edge
// detectors from the phase register, as the oscillator's shift register is
// restored at the same time. `phase` drives the oscillator's multiplexer and
// is also the read-out of the retrieved pattern. `update` pulses for one
// fast cycle when a reference edge moved the phase; `ref_o` is the
// reference signal (combinational).
module phase_ctrl #(
  parameter int unsigned PHASE_BITS = onn_pkg::PHASE_BITS_DEFAULT,
  parameter int unsigned SUM_W      = onn_pkg::sum_width(onn_pkg::N_OSC_DEFAULT,
                                                         onn_pkg::WEIGHT_BITS_DEFAULT)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    load,
  input  logic                    tick,
  input  logic                    ph_we,
  input  logic [PHASE_BITS-1:0]   ph_wdata,
  input  logic signed [SUM_W-1:0] sum,
  input  logic                    osc_in,
  output logic [PHASE_BITS-1:0]   phase,
  output logic                    ref_o,
  output logic                    update
);

  localparam int unsigned HALF = 2 ** (PHASE_BITS - 1);

  logic [PHASE_BITS-1:0] cnt_q;      // position in the period before this tick
  logic                  osc_q;      // oscillator output in the previous period
  logic                  ref_q;      // reference in the previous period
  logic                  osc_rise, ref_rise;
  logic [PHASE_BITS-1:0] pos;
  logic [PHASE_BITS-1:0] seed_pos;

  // Reference signal from the sign of the weighted sum.
  always_comb begin
    if (sum > 0)      ref_o = 1'b1;
    else if (sum < 0) ref_o = 1'b0;
    else              ref_o = osc_in;
  end

  // Edge detectors and the position counter.
  assign osc_rise = osc_in & ~osc_q;
  assign ref_rise = ref_o & ~ref_q;
  assign pos      = osc_rise ? '0 : cnt_q + 1'b1;

  // After a load the oscillator is at position `phase` in its first period;
  // the state is seeded as if one tick earlier it had been at phase-1.
  assign seed_pos = phase - 1'b1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phase  <= '0;
      cnt_q  <= '1;
      osc_q  <= 1'b0;
      ref_q  <= 1'b0;
      update <= 1'b0;
    end else begin
      update <= 1'b0;
      if (ph_we) begin
        phase <= ph_wdata;
      end else if (load) begin
        cnt_q <= seed_pos;
        osc_q <= (seed_pos < PHASE_BITS'(HALF));
        ref_q <= (seed_pos < PHASE_BITS'(HALF));
      end else if (tick) begin
        ref_q <= ref_o;
        if (ref_rise) begin
          phase  <= phase - pos;
          cnt_q  <= '0;
          osc_q  <= 1'b1;
          update <= (pos != '0);
        end else begin
          cnt_q <= pos;
          osc_q <= osc_in;
        end
      end
    end
  end

endmodule
