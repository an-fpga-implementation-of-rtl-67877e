// csnn_ref_pkg: event-level reference model of the spiking network, used by
// the testbenches to predict the spikes of the hardware.
//
// It is written from the network's equations alone, not from the RTL: for an
// input spike on channel i, for filter f = 0..3 and tap n = 0..4 in that
// order, conv neuron (f, i-4+n) (if 0 <= i-4+n < 1020) adds weight (f, n);
// if it reaches V_thr it fires and V_thr is subtracted, and if it falls below
// V_min it is set to V_min. A conv spike increments pool counter
// (f, position/16), which fires at 16 and restarts from 0. A pool spike from
// a full window q < 63 updates the 8 output neurons in class order with
// weight (f, q, o). The weights start as the default stand-in set and may
// be overwritten through cw and fw:
//   conv (f, n)    = 24 + 8f - 6|n-2|
//   fc   (f, q, o) = 40 if q/8 == o else -4
package csnn_ref_pkg;

  function automatic int ref_conv_w(int f, int n);
    int d = n - 2;
    if (d < 0) d = -d;
    return 24 + 8 * f - 6 * d;
  endfunction

  function automatic int ref_fc_w(int f, int q, int o);
    return (q / 8 == o) ? 40 : -4;
  endfunction

  // One integrate-and-fire update; returns 1 when the neuron fires.
  function automatic bit ref_if(ref int v, input int w, input int thr, input int vmin);
    v = v + w;
    if (v >= thr) begin
      v = v - thr;
      return 1'b1;
    end
    if (v < vmin) v = vmin;
    return 1'b0;
  endfunction

  class csnn_ref;
    int conv_thr, conv_min, fc_thr, fc_min;
    int cw     [4][5];       // weights, default set unless overwritten
    int fw     [4][63][8];
    int conv_v [4][1020];
    int pool_c [4][64];
    int fc_v   [8];
    // what the last call produced, in order
    int conv_spk[$];   // {f, pos} as f*1024 + pos
    int pool_spk[$];   // {f, q} as f*64 + q
    int out_spk[$];    // class
    // totals
    int n_conv, n_pool, n_out, n_discard, n_edge_slots, n_floor;

    function new(int ct = 64, int cm = -64, int ft = 64, int fm = -64);
      conv_thr = ct; conv_min = cm; fc_thr = ft; fc_min = fm;
      foreach (cw[f, n]) cw[f][n] = ref_conv_w(f, n);
      foreach (fw[f, q, o]) fw[f][q][o] = ref_fc_w(f, q, o);
      reset();
    endfunction

    function void reset();
      foreach (conv_v[f, p]) conv_v[f][p] = 0;
      foreach (pool_c[f, q]) pool_c[f][q] = 0;
      foreach (fc_v[o]) fc_v[o] = 0;
      n_conv = 0; n_pool = 0; n_out = 0; n_discard = 0; n_edge_slots = 0; n_floor = 0;
    endfunction

    function void pool_spike(int f, int q);
      pool_spk.push_back(f * 64 + q);
      n_pool++;
      if (q >= 63) begin
        n_discard++;
        return;
      end
      for (int o = 0; o < 8; o++) begin
        if (ref_if(fc_v[o], fw[f][q][o], fc_thr, fc_min)) begin
          out_spk.push_back(o);
          n_out++;
        end
      end
    endfunction

    function void conv_spike(int f, int p);
      conv_spk.push_back(f * 1024 + p);
      n_conv++;
      pool_c[f][p / 16]++;
      if (pool_c[f][p / 16] == 16) begin
        pool_c[f][p / 16] = 0;
        pool_spike(f, p / 16);
      end
    endfunction

    function void event_in(int ch);
      conv_spk.delete(); pool_spk.delete(); out_spk.delete();
      for (int f = 0; f < 4; f++)
        for (int n = 0; n < 5; n++) begin
          int p = ch - 4 + n;
          if (p < 0 || p >= 1020) begin
            n_edge_slots++;
            continue;
          end
          if (conv_v[f][p] + cw[f][n] < conv_min) n_floor++;
          if (ref_if(conv_v[f][p], cw[f][n], conv_thr, conv_min))
            conv_spike(f, p);
        end
    endfunction
  endclass

  // A channel drawn from a peaked "isotope" spectrum of class c: a triangular
  // peak centred on channel 128c+64 (half width 48) with 1 event in 8 drawn
  // uniformly from the whole range as background.
  function automatic int isotope_channel(int c);
    int ch;
    if ($urandom_range(7) == 0) return $urandom_range(1023);
    ch = 128 * c + 64 + int'($urandom_range(48)) - int'($urandom_range(48));
    if (ch < 0) ch = 0;
    if (ch > 1023) ch = 1023;
    return ch;
  endfunction

endpackage
