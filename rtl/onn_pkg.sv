// onn_pkg -- shared constants of the hybrid oscillatory neural network.
//
// The defaults are the main configuration evaluated for the hybrid
// architecture: 506 fully connected oscillators, 4 phase bits (16-stage
// oscillators, 22.5 degree phase step) and 5-bit signed coupling weights.
// The slow-clock division factor of 512 is this design's own choice: it is
// the smallest power of two that leaves room for 506 serial accumulation
// steps plus the two-cycle read/accumulate pipeline, and with a 50 MHz logic
// clock it gives 50 MHz / 512 / 16 = 6.1 kHz oscillation, the figure reported
// for the 506-oscillator build.
package onn_pkg;

  localparam int unsigned N_OSC_DEFAULT       = 506;
  localparam int unsigned PHASE_BITS_DEFAULT  = 4;
  localparam int unsigned WEIGHT_BITS_DEFAULT = 5;
  localparam int unsigned CLK_DIV_DEFAULT     = 512;

  // Fast-clock cycles from the slow-clock rising edge until the stored sum
  // is valid: N read cycles plus one accumulate cycle plus the start cycle.
  localparam int unsigned MAC_LATENCY_EXTRA = 2;

  // Width of the signed weighted sum: |sum| <= N * 2^(WEIGHT_BITS-1).
  function automatic int unsigned sum_width(int unsigned n, int unsigned wbits);
    return wbits + $clog2(n) + 1;
  endfunction

  // Address width that can index n items (at least 1 bit).
  function automatic int unsigned idx_width(int unsigned n);
    return (n > 1) ? $clog2(n) : 1;
  endfunction

endpackage
