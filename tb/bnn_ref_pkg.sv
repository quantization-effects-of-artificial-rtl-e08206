// bnn_ref_pkg: behavioural reference of the BNN for the testbenches.
//
// Recomputes the network with plain integer arithmetic and loops, from the
// published operation tables and the threshold rule, without using any of
// the RTL modules. Only the operation codes are shared with the RTL, since
// they are the network's data (bnn_weights_pkg::weight_op). It also
// provides SiPM-like test frames: 12-bit samples on a 0x7ff baseline
// carrying one double-exponential pulse ("good") or two overlapping ones
// ("ugly").
package bnn_ref_pkg;

  // Event counters of the last evaluations, for mechanism coverage.
  int unsigned cnt_incr_sat;     // integer Incr saturated at MAX_INT
  int unsigned cnt_bin[4];       // neuron outputs per value, all layers
  int unsigned cnt_op[4];        // synapse operations evaluated

  // Published 4x4 table: row = operation, column = input value.
  function automatic int ref_syn2(input int v, input int op);
    int tbl[4][4];
    tbl = '{'{0, 0, 0, 0}, '{0, 1, 2, 3}, '{1, 2, 3, 3}, '{3, 2, 1, 0}};
    return tbl[op][v];
  endfunction

  // Integer synapse: 0, v, min(2v, max), max - v.
  function automatic int ref_synint(input int v, input int op, input int w);
    int maxv;
    maxv = (1 << w) - 1;
    case (op)
      0: return 0;
      1: return v;
      2: begin
        if (2 * v > maxv) begin
          cnt_incr_sat++;
          return maxv;
        end
        return 2 * v;
      end
      default: return maxv - v;
    endcase
  endfunction

  // Activation: number of thresholds floor((2i-1)*smax/6) the sum exceeds.
  function automatic int ref_act(input longint sum, input longint smax);
    int a;
    a = 0;
    for (int i = 1; i <= 3; i++) begin
      if (sum > ((2 * i - 1) * smax) / 6) a++;
    end
    return a;
  endfunction

  // One fully connected layer.
  function automatic void ref_layer(input int x[], input int w,
                                    input int m, input int unsigned seed,
                                    input int unsigned layer,
                                    output int y[]);
    y = new[m];
    for (int j = 0; j < m; j++) begin
      longint sum;
      int k;
      sum = 0;
      k = 0;
      for (int i = 0; i < x.size(); i++) begin
        int op;
        op = int'(bnn_weights_pkg::weight_op(seed, layer, j, i));
        cnt_op[op]++;
        if (op != 0) k++;
        if (w == 2) sum += ref_syn2(x[i], op);
        else        sum += ref_synint(x[i], op, w);
      end
      y[j] = ref_act(sum, longint'(k) * ((1 << w) - 1));
      cnt_bin[y[j]]++;
    end
  endfunction

  // Whole network: samples -> output neuron values.
  function automatic void ref_network(input int samples[], input int sample_w,
                                      input int in_w, input int h1,
                                      input int h2, input int n_out,
                                      input int unsigned seed,
                                      output int out[]);
    int x0[], a1[], a2[];
    x0 = new[samples.size()];
    foreach (samples[i]) x0[i] = samples[i] >> (sample_w - in_w);
    ref_layer(x0, in_w, h1, seed, 0, a1);
    ref_layer(a1, 2, h2, seed, 1, a2);
    ref_layer(a2, 2, n_out, seed, 2, out);
  endfunction

  // Test frame of n 12-bit samples: baseline 0x7ff plus npulse
  // double-exponential pulses, clipped to 12 bits.
  function automatic void make_frame(input int n, input int npulse,
                                     output int s[]);
    real v[];
    v = new[n];
    foreach (v[i]) v[i] = 2047.0;
    for (int p = 0; p < npulse; p++) begin
      real amp, t0, tr, td;
      amp = 300.0 + real'($urandom_range(1700));
      t0  = real'($urandom_range(p == 0 ? 4 : 40));
      if (p > 0) t0 = t0 + 6.0;
      tr  = 1.0 + real'($urandom_range(30)) / 10.0;
      td  = 8.0 + real'($urandom_range(120)) / 10.0;
      for (int i = 0; i < n; i++) begin
        real t;
        t = real'(i) - t0;
        if (t > 0.0) v[i] += amp * ($exp(-t / td) - $exp(-t / tr));
      end
    end
    s = new[n];
    foreach (s[i]) begin
      int q;
      q = int'(v[i]);
      s[i] = (q > 4095) ? 4095 : (q < 0 ? 0 : q);
    end
  endfunction

  // Uniformly random frame (out-of-distribution input).
  function automatic void random_frame(input int n, input int w,
                                       output int s[]);
    s = new[n];
    foreach (s[i]) s[i] = int'($urandom_range((1 << w) - 1));
  endfunction

endpackage
