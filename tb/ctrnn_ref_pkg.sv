// ctrnn_ref_pkg: reference model used by the testbenches. It recomputes the
// sigmoid with real arithmetic and one forward-Euler step of a whole network
// with plain integer arithmetic, independently of the RTL datapath, so that
// the bit-exact states can be compared.
//   sigma_j = round(65535 * s((k - 128 + 0.5)/16)),  k = clamp(floor(16 x) + 128)
//   y_i    += floor(h_i * (floor(sum_j w_ij sigma_j / 256) + I_i - y_i) / 65536)
// with x = y_j + theta_j in Q16.16, w and theta in Q8.8, h in Q0.16.
package ctrnn_ref_pkg;

  function automatic int ref_sigmoid(longint x_q16);
    longint k;
    real mid;
    k = (x_q16 >>> 12) + 128;
    if (k < 0)   k = 0;
    if (k > 255) k = 255;
    mid = (real'(k) - 128.0 + 0.5) / 16.0;
    return int'($floor(65535.0 / (1.0 + $exp(-mid)) + 0.5));
  endfunction

  function automatic longint sat32(longint v);
    if (v > 64'sd2147483647)  return 64'sd2147483647;
    if (v < -64'sd2147483648) return -64'sd2147483648;
    return v;
  endfunction

  // y_i updated from sum_j w_ij * sig_j, the sigma values given.
  function automatic longint neuron_step(longint y, longint i_in, int h,
                                         longint acc);
    longint drive, dy;
    drive = (acc >>> 8) + i_in - y;
    dy    = (drive * longint'(h)) >>> 16;
    return sat32(y + dy);
  endfunction

  // One Euler step of an n-neuron network; w is row-major: w[i*n + j].
  function automatic void net_step(int n, ref longint y[], input int theta[],
                                   input int h[], input longint i_in[],
                                   input int w[]);
    int     sig [];
    longint ynew [];
    longint acc;
    sig  = new[n];
    ynew = new[n];
    for (int j = 0; j < n; j++)
      sig[j] = ref_sigmoid(y[j] + longint'(theta[j]) * 256);
    for (int i = 0; i < n; i++) begin
      acc = 0;
      for (int j = 0; j < n; j++) acc += longint'(w[i*n + j]) * longint'(sig[j]);
      ynew[i] = neuron_step(y[i], i_in[i], h[i], acc);
    end
    for (int i = 0; i < n; i++) y[i] = ynew[i];
  endfunction

endpackage
