// serial_arith -- serial weighted-sum circuit of one oscillator.
//
// Computes sum_j W_ij * s_j, where s_j = +1 when oscillator j's output is 1
// and -1 when it is 0, with one adder reused N times instead of N-1 adders
// working in parallel. A counter walks j = 0 .. N-1; it addresses the
// weights memory and drives the time multiplexer that picks oscillator j's
// output. The "multiplier" passes +W_ij or -W_ij, since an oscillator
// amplitude only has two values. The adder feeds its output back into itself;
// when the counter has reached N the result is copied into the stored-sum
// register, which holds it until the next slow-clock rising edge, where the
// phase controller uses it. This is the structure of the paper's serial
// arithmetic circuit figure.
//
// Timing (fast clock): `start` is the one-cycle pulse of the slow-clock
// rising edge. On that edge the accumulator is cleared and the counter
// starts. Edges 1..N issue reads (weight and oscillator bit are registered
// together, a block-RAM style one-cycle read), edges 2..N+1 accumulate, and
// on edge N+1 the final sum is written to `sum_o` and `sum_valid` pulses.
// The slow-clock period must therefore be at least N+2 fast cycles, which the
// top checks. `osc_in` must not change during the computation; in the
// network the oscillators only move on the `start` edge itself.
// `clear` empties the stored sum (used when new initial phases are loaded),
// an own choice so that the first phase update sees a zero sum.
module serial_arith #(
  parameter int unsigned N           = onn_pkg::N_OSC_DEFAULT,
  parameter int unsigned WEIGHT_BITS = onn_pkg::WEIGHT_BITS_DEFAULT,
  localparam int unsigned AW = onn_pkg::idx_width(N),
  localparam int unsigned SW = onn_pkg::sum_width(N, WEIGHT_BITS)
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          clear,
  input  logic                          start,
  input  logic [N-1:0]                  osc_in,
  // weight write port
  input  logic                          w_we,
  input  logic [AW-1:0]                 w_addr,
  input  logic signed [WEIGHT_BITS-1:0] w_data,
  // stored final sum
  output logic signed [SW-1:0]          sum_o,
  output logic                          sum_valid,
  output logic                          busy
);

  logic [AW-1:0]                 cnt;
  logic                          rd_v, rd_last, rd_amp;
  logic signed [WEIGHT_BITS-1:0] rd_w;
  logic signed [SW-1:0]          acc, term, acc_next;

  // Counter: selects the weight address and the oscillator.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt  <= '0;
      busy <= 1'b0;
    end else if (clear) begin
      cnt  <= '0;
      busy <= 1'b0;
    end else if (start) begin
      cnt  <= '0;
      busy <= 1'b1;
    end else if (busy) begin
      if (cnt == AW'(N - 1)) begin
        busy <= 1'b0;
        cnt  <= '0;
      end else begin
        cnt <= cnt + 1'b1;
      end
    end
  end

  weight_mem #(.DEPTH(N), .WIDTH(WEIGHT_BITS)) u_wmem (
    .clk   (clk),
    .we    (w_we),
    .waddr (w_addr),
    .wdata (w_data),
    .re    (busy),
    .raddr (cnt),
    .rdata (rd_w)
  );

  // Time multiplexer: the selected oscillator's amplitude, registered in
  // step with the weight read.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_v    <= 1'b0;
      rd_last <= 1'b0;
      rd_amp  <= 1'b0;
    end else begin
      rd_v    <= busy && !start && !clear;
      rd_last <= busy && !start && !clear && (cnt == AW'(N - 1));
      rd_amp  <= osc_in[cnt];
    end
  end

  // Multiply by the amplitude (+1 / -1) and accumulate.
  assign term     = rd_amp ? SW'(rd_w) : -SW'(rd_w);
  assign acc_next = acc + term;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc       <= '0;
      sum_o     <= '0;
      sum_valid <= 1'b0;
    end else begin
      sum_valid <= 1'b0;
      if (clear) begin
        acc   <= '0;
        sum_o <= '0;
      end else if (start) begin
        acc <= '0;
      end else if (rd_v) begin
        acc <= acc_next;
        if (rd_last) begin
          sum_o     <= acc_next;
          sum_valid <= 1'b1;
        end
      end
    end
  end

endmodule
