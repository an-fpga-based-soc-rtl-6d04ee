// snn_ref_pkg: reference model of the two-layer temporal-coding network,
// written independently of the RTL for the testbenches.
//
// It simulates time step by time step rather than event by event: at step
// t (0..254) every input whose spike time equals t adds its current to all
// neurons; if any input spiked at t, every neuron that has not fired and
// whose potential exceeds the threshold fires with time t. Inputs with time
// 255 never spike. The current of weight w is +alpha/-alpha for a binary
// weight (w = 1/0) and the signed value of w in a multi-bit mode.
package snn_ref_pkg;

  function automatic longint wcur(int mode, int alpha, int raw);
    int w = 1 << mode;
    if (mode == 0) return raw ? alpha : -alpha;
    return (raw >= (1 << (w - 1))) ? raw - (1 << w) : raw;
  endfunction

  // w[i*n_post + j] holds the raw weight field of input i -> neuron j
  function automatic void layer(input int n_pre, input int n_post, input int mode,
                                input int alpha, input longint thr, ref int tin[],
                                ref int w[], ref int tout[], ref longint v[]);
    bit fired[];
    fired = new[n_post];
    tout = new[n_post];
    v = new[n_post];
    foreach (tout[j]) begin tout[j] = 255; v[j] = 0; fired[j] = 0; end
    for (int t = 0; t < 255; t++) begin
      bit any = 0;
      for (int i = 0; i < n_pre; i++)
        if (tin[i] == t) begin
          any = 1;
          for (int j = 0; j < n_post; j++) v[j] += wcur(mode, alpha, w[i * n_post + j]);
        end
      if (any)
        for (int j = 0; j < n_post; j++)
          if (!fired[j] && v[j] > thr) begin fired[j] = 1; tout[j] = t; end
    end
  endfunction

  // earliest spike, else largest potential; lowest index on ties
  function automatic int decode(ref int t[], ref longint v[], output bit by_spike);
    int bt = 255, bi = 0, bvi = 0;
    longint bv = 0;
    foreach (t[k]) begin
      if (t[k] < bt) begin bt = t[k]; bi = k; end
      if (k == 0 || v[k] > bv) begin bv = v[k]; bvi = k; end
    end
    by_spike = bt != 255;
    return by_spike ? bi : bvi;
  endfunction

  // pack raw weight fields (2^mode bits each) into 16-bit words, row-major
  function automatic void pack(input int mode, ref int w[], ref int words[]);
    int per = 16 >> mode;
    int bits = 1 << mode;
    words = new[(w.size() + per - 1) / per];
    foreach (words[a]) words[a] = 0;
    foreach (w[k]) words[k / per] |= (w[k] & ((1 << bits) - 1)) << ((k % per) * bits);
  endfunction

endpackage
