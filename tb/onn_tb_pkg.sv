// onn_tb_pkg -- testbench helpers for the oscillatory network benches.
//
// Pattern generation and corruption, the Diederich-Opper I learning rule
// with 5-bit quantisation, and a tick-level reference model of the network.
//
// Learning rule (integer form): starting from W = 0, every stored pattern xi
// and every oscillator i with local field h_i = sum_j W_ij xi_j and
// xi_i * h_i <= MARGIN gets W_ij += xi_i * xi_j for all j != i; sweeps repeat
// until every pattern bit is stable with margin or a sweep limit is hit.
// The matrix is then scaled so that its largest magnitude maps to 15 and
// rounded to the signed 5-bit range [-16, 15].
//
// Reference model: after a load with phases p_i, oscillator i is at position
// (t + p_i) mod 16 on tick t and outputs 1 for positions 0..7. On tick t the
// weighted sum S_i = sum_j W_ij * (+1/-1 by the output of j) of that same
// period is used (on tick 0 no sum exists yet, S = 0). The reference is
// S > 0: 1, S < 0: 0, S = 0: the oscillator's own output. On a rising
// reference edge the phase becomes p_i - position, i.e. the oscillator is put
// at position 0 on that tick. No counters or edge registers are modelled.
package onn_tb_pkg;

  localparam int PERIOD = 16;

  // Random +1/-1 patterns; no two of them equal or inverse to each other
  // (an oscillator network cannot tell a pattern from its inverse).
  function automatic void gen_patterns(ref int xi[], input int npat, input int npix);
    xi = new[npat * npix];
    for (int mu = 0; mu < npat; mu++) begin
      bit clash;
      do begin
        for (int i = 0; i < npix; i++) xi[mu * npix + i] = ($urandom_range(0, 1) == 1) ? 1 : -1;
        clash = 0;
        for (int nu = 0; nu < mu; nu++) begin
          int ov = 0;
          for (int i = 0; i < npix; i++) ov += xi[mu * npix + i] * xi[nu * npix + i];
          if (ov == npix || ov == -npix) clash = 1;
        end
      end while (clash);
    end
  endfunction

  // xi is npat x npix, w is n x n (n >= npix); oscillators >= npix get no coupling.
  function automatic void train_do1(ref int w[], input int xi[], input int npat,
                                    input int npix, input int n);
    int wi[];
    int maxabs;
    wi = new[npix * npix];
    foreach (wi[k]) wi[k] = 0;
    for (int sweep = 0; sweep < 100; sweep++) begin
      bit changed = 0;
      for (int mu = 0; mu < npat; mu++) begin
        for (int i = 0; i < npix; i++) begin
          int h = 0;
          for (int j = 0; j < npix; j++) h += wi[i * npix + j] * xi[mu * npix + j];
          if (xi[mu * npix + i] * h <= npix) begin
            for (int j = 0; j < npix; j++)
              if (j != i) wi[i * npix + j] += xi[mu * npix + i] * xi[mu * npix + j];
            changed = 1;
          end
        end
      end
      if (!changed) break;
    end
    maxabs = 1;
    foreach (wi[k]) if ((wi[k] < 0 ? -wi[k] : wi[k]) > maxabs) maxabs = (wi[k] < 0 ? -wi[k] : wi[k]);
    w = new[n * n];
    foreach (w[k]) w[k] = 0;
    for (int i = 0; i < npix; i++)
      for (int j = 0; j < npix; j++) begin
        int num, q;
        num = wi[i * npix + j] * 15;
        // round half away from zero
        q = (num >= 0) ? (2 * num + maxabs) / (2 * maxabs) : -((-2 * num + maxabs) / (2 * maxabs));
        if (q > 15) q = 15;
        if (q < -16) q = -16;
        w[i * n + j] = q;
      end
  endfunction

  // Initial phases for pattern mu with ncor distinct pixels flipped:
  // +1 -> phase 0, -1 -> phase 8. Unused oscillators get random phases.
  function automatic void corrupt(ref int p[], input int xi[], input int mu,
                                  input int npix, input int n, input int ncor);
    int flip[];
    flip = new[npix];
    foreach (flip[k]) flip[k] = 0;
    for (int c = 0; c < ncor; c++) begin
      int k;
      do k = $urandom_range(0, npix - 1); while (flip[k] != 0);
      flip[k] = 1;
    end
    p = new[n];
    for (int i = 0; i < n; i++) begin
      if (i < npix) begin
        int s = xi[mu * npix + i] * (flip[i] ? -1 : 1);
        p[i] = (s > 0) ? 0 : PERIOD / 2;
      end else begin
        p[i] = $urandom_range(0, PERIOD - 1);
      end
    end
  endfunction

  function automatic bit osc_at(int t, int p);
    return ((t + p) % PERIOD) < PERIOD / 2;
  endfunction

  // Reference state that must be seeded before tick 0.
  function automatic void model_init(ref bit refprev[], input int p[], input int n);
    refprev = new[n];
    for (int i = 0; i < n; i++) refprev[i] = osc_at(PERIOD - 1, p[i]);
  endfunction

  // One tick t of the reference model. Returns the number of phases that
  // changed; zero_refs counts oscillators whose sum was exactly zero.
  function automatic int model_tick(ref int p[], ref bit refprev[], input int w[],
                                    input int n, input int t, ref int zero_refs);
    bit out[];
    int np[];
    int moved = 0;
    out = new[n];
    np = new[n];
    for (int j = 0; j < n; j++) out[j] = osc_at(t, p[j]);
    for (int i = 0; i < n; i++) begin
      int s = 0, pos;
      bit r;
      if (t > 0)
        for (int j = 0; j < n; j++) s += out[j] ? w[i * n + j] : -w[i * n + j];
      pos = (t + p[i]) % PERIOD;
      r = (s > 0) ? 1'b1 : (s < 0) ? 1'b0 : out[i];
      if (s == 0 && t > 0) zero_refs++;
      np[i] = p[i];
      if (r && !refprev[i] && pos != 0) begin
        np[i] = (p[i] - pos + PERIOD) % PERIOD;
        moved++;
      end
      refprev[i] = r;
    end
    p = np;
    return moved;
  endfunction

  // Pattern read-out relative to pixel 0: pixel i equals pixel 0 when its
  // phase is within a quarter period of pixel 0's phase.
  function automatic int count_errors(input int p[], input int xi[], input int mu,
                                      input int npix);
    int err = 0;
    for (int i = 0; i < npix; i++) begin
      int d = (p[i] - p[0] + PERIOD) % PERIOD;
      bit same = (d < PERIOD / 4) || (d >= PERIOD - PERIOD / 4);
      bit exp_same = (xi[mu * npix + i] == xi[mu * npix]);
      if (same != exp_same) err++;
    end
    return err;
  endfunction

endpackage
