// spiker_ref_pkg: integer reference model of a Spiker layer, used by the
// testbenches to predict membrane potentials, spikes and counts. It is
// written directly from the model equations, independent of the RTL:
//   per step: for each active input i in order, v[j] += w[i][j] (saturating
//   to 16 bits); for each neuron k that fired in the previous step, every
//   other neuron j gets v[j] += w_inh; then each neuron fires (v > thr:
//   v = v_reset, spike) or leaks (v -= floor(v / 2^10)).
// It also holds bit-level LFSR models written from the tap tables.
package spiker_ref_pkg;

  function automatic int sat16(input int x);
    if (x > 32767) return 32767;
    if (x < -32768) return -32768;
    return x;
  endfunction

  function automatic int floor_shift(input int x, input int sh);
    int d = 1 << sh;
    int q = x / d;
    if ((x % d) != 0 && x < 0) q = q - 1;
    return q;
  endfunction

  // Fibonacci LFSR step, taps written as the usual 1-based tap positions.
  function automatic int lfsr_next(input int s, input int width);
    int fb;
    case (width)
      8:  fb = ((s >> 7) ^ (s >> 5) ^ (s >> 4) ^ (s >> 3)) & 1;
      15: fb = ((s >> 14) ^ (s >> 13)) & 1;
      default: fb = 0;
    endcase
    return ((s << 1) | fb) & ((1 << width) - 1);
  endfunction

  class layer_model;
    int n_in, n_n;
    int w[][];        // w[i][j]: input i -> neuron j (Q2.3 code)
    int thr[];
    int v[];
    bit s[];
    int count[];
    int w_inh = -120, v_reset = 40, decay = 10;
    int exc_steps = 0, inh_steps = 0, skipped = 0, fires = 0, cycles = 0;

    function new(int n_in_, int n_n_);
      n_in = n_in_; n_n = n_n_;
      w = new[n_in];
      foreach (w[i]) w[i] = new[n_n];
      thr = new[n_n]; v = new[n_n]; s = new[n_n]; count = new[n_n];
      foreach (thr[j]) begin thr[j] = 104; v[j] = 0; s[j] = 0; count[j] = 0; end
    endfunction

    function void reset_v();
      foreach (v[j]) begin v[j] = 0; s[j] = 0; end
    endfunction

    function void clear_counts();
      foreach (count[j]) count[j] = 0;
    endfunction

    // one time step; returns the cycles the hardware should take:
    // 1 for a silent step, else 2 + n_in (if any input spike) + n_n (if any
    // neuron fired in the previous step)
    function int step(bit in_sp[]);
      bit any_e = 0, any_i = 0;
      bit ns[];
      int c = 2;
      ns = new[n_n];
      foreach (in_sp[i]) if (in_sp[i]) any_e = 1;
      foreach (s[k]) if (s[k]) any_i = 1;
      for (int i = 0; i < n_in; i++)
        if (in_sp[i]) for (int j = 0; j < n_n; j++) v[j] = sat16(v[j] + w[i][j]);
      for (int k = 0; k < n_n; k++)
        if (s[k]) for (int j = 0; j < n_n; j++) if (j != k) v[j] = sat16(v[j] + w_inh);
      for (int j = 0; j < n_n; j++) begin
        if (v[j] > thr[j]) begin v[j] = v_reset; ns[j] = 1; fires++; count[j]++; end
        else begin v[j] = v[j] - floor_shift(v[j], decay); ns[j] = 0; end
      end
      s = ns;
      if (any_e) begin exc_steps++; c += n_in; end
      if (any_i) begin inh_steps++; c += n_n; end
      if (!any_e && !any_i) begin skipped++; c = 1; end
      cycles += c;
      return c;
    endfunction
  endclass

endpackage
