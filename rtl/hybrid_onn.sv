// hybrid_onn -- fully connected digital oscillatory neural network with
// serialized coupling ("hybrid" architecture).
//
// N square-wave oscillators are coupled all-to-all through an N x N signed
// weight matrix. Every oscillator keeps its own arithmetic circuit, so the N
// weighted sums are still formed in parallel, but each circuit forms its sum
// serially with one adder over N logic-clock cycles. The oscillators and their
// phase updates run on a slow clock (logic clock / CLK_DIV): the slow-clock
// rising edge advances every oscillator by one step, applies the previously
// stored sums to the phases, and starts the next serial computation, which
// finishes before the following edge. Adders therefore grow with N, not N^2;
// the price is an oscillation frequency of f_clk / (CLK_DIV * 2^PHASE_BITS).
//
// Per oscillator i: phase_osc (shift-register oscillator), serial_arith (with
// its weight_mem row W_i*), phase_ctrl (reference, edge detector, counter,
// phase register). One slow_clk_gen is shared.
//
// Host interface (plain ports in place of the AXI interface used on the
// FPGA board; layout is this design's choice):
//  * w_we/w_row/w_col/w_data write W[w_row][w_col], the coupling from
//    oscillator w_col into oscillator w_row.
//  * ph_we/ph_idx/ph_wdata write the initial phase of one oscillator.
//  * load (one cycle, with run low) restores all shift registers, clears the
//    stored sums and seeds the phase controllers: the network then starts
//    from the written phases.
//  * run enables the slow clock. phase[] is the phase register of every
//    oscillator, read out as the result; osc_out[] are the oscillator waves.
//  * tick marks each slow-clock rising edge; update_count counts phase
//    corrections made on the last tick (0 means no oscillator moved).
// Writes are only meant while run is low.
module hybrid_onn #(
  parameter int unsigned N           = onn_pkg::N_OSC_DEFAULT,
  parameter int unsigned PHASE_BITS  = onn_pkg::PHASE_BITS_DEFAULT,
  parameter int unsigned WEIGHT_BITS = onn_pkg::WEIGHT_BITS_DEFAULT,
  parameter int unsigned CLK_DIV     = onn_pkg::CLK_DIV_DEFAULT,
  localparam int unsigned AW = onn_pkg::idx_width(N),
  localparam int unsigned SW = onn_pkg::sum_width(N, WEIGHT_BITS)
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // weight matrix write port
  input  logic                          w_we,
  input  logic [AW-1:0]                 w_row,
  input  logic [AW-1:0]                 w_col,
  input  logic signed [WEIGHT_BITS-1:0] w_data,
  // initial phase write port
  input  logic                          ph_we,
  input  logic [AW-1:0]                 ph_idx,
  input  logic [PHASE_BITS-1:0]         ph_wdata,
  // control
  input  logic                          load,
  input  logic                          run,
  // status and results
  output logic                          slow_clk,
  output logic                          tick,
  output logic [N-1:0]                  osc_out,
  output logic [PHASE_BITS-1:0]         phase [N],
  output logic [AW:0]                   update_count
);

  // The serial sum must be stored before the next slow-clock rising edge.
  initial begin
    assert (CLK_DIV >= N + onn_pkg::MAC_LATENCY_EXTRA)
      else $fatal(1, "CLK_DIV=%0d too small for N=%0d", CLK_DIV, N);
  end

  logic                 upd [N];
  logic signed [SW-1:0] sum [N];

  slow_clk_gen #(.DIV(CLK_DIV)) u_clk (
    .clk      (clk),
    .rst_n    (rst_n),
    .run      (run),
    .load     (load),
    .slow_clk (slow_clk),
    .tick     (tick)
  );

  for (genvar i = 0; i < N; i++) begin : g_osc
    logic sum_valid_unused, busy_unused, ref_unused;

    phase_osc #(.PHASE_BITS(PHASE_BITS)) u_osc (
      .clk     (clk),
      .rst_n   (rst_n),
      .load    (load),
      .tick    (tick),
      .phase   (phase[i]),
      .osc_out (osc_out[i])
    );

    serial_arith #(.N(N), .WEIGHT_BITS(WEIGHT_BITS)) u_arith (
      .clk       (clk),
      .rst_n     (rst_n),
      .clear     (load),
      .start     (tick),
      .osc_in    (osc_out),
      .w_we      (w_we && (w_row == AW'(i))),
      .w_addr    (w_col),
      .w_data    (w_data),
      .sum_o     (sum[i]),
      .sum_valid (sum_valid_unused),
      .busy      (busy_unused)
    );

    phase_ctrl #(.PHASE_BITS(PHASE_BITS), .SUM_W(SW)) u_ctrl (
      .clk      (clk),
      .rst_n    (rst_n),
      .load     (load),
      .tick     (tick),
      .ph_we    (ph_we && (ph_idx == AW'(i))),
      .ph_wdata (ph_wdata),
      .sum      (sum[i]),
      .osc_in   (osc_out[i]),
      .phase    (phase[i]),
      .ref_o    (ref_unused),
      .update   (upd[i])
    );
  end

  // Number of oscillators whose phase moved on the last tick.
  always_comb begin
    update_count = '0;
    for (int i = 0; i < N; i++) update_count += (AW + 1)'(upd[i]);
  end

endmodule
