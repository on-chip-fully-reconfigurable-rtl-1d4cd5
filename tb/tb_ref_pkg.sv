// tb_ref_pkg: reference model of the neural network used by the testbenches.
// It evaluates a topology (word 0 = layers, word l+1 = neurons of layer l) with
// plain 64-bit integer arithmetic: each neuron starts from its bias, adds
// floor(act*w / 256) for each input with the sum clamped to the signed 32-bit
// range, and the result is max(sum, 0). Coefficients are read in the order
// bias, weights, neuron after neuron; input-layer neuron j has one weight on
// input j. It also gives the clock count of the controller's schedule.
`timescale 1ns/1fs
package tb_ref_pkg;

  function automatic longint clamp32(longint v);
    if (v > 64'sd2147483647)  return 64'sd2147483647;
    if (v < -64'sd2147483648) return -64'sd2147483648;
    return v;
  endfunction

  function automatic longint floor_div256(longint v);
    longint q;
    q = v / 256;
    if (v < 0 && (v % 256) != 0) q = q - 1;
    return q;
  endfunction

  // Evaluates the network; returns 0 if the topology breaks a limit.
  function automatic bit ref_net(input int topo[78], input int coef[1024],
                                 input longint in_act[10], output longint out[128]);
    int L, base, prev_base, prev_n, ci, n, f;
    longint acc;
    for (int i = 0; i < 128; i++) out[i] = 0;
    L = topo[0];
    if (L < 1 || L > 77) return 0;
    base = 0; prev_base = 0; prev_n = 0; ci = 0;
    for (int l = 0; l < L; l++) begin
      n = topo[l+1];
      f = (l == 0) ? 1 : prev_n;
      if (n == 0 || (l == 0 && n > 10) || base + n > 128 || ci + n*(f+1) > 1024) return 0;
      for (int j = 0; j < n; j++) begin
        acc = coef[ci]; ci++;
        for (int k = 0; k < f; k++) begin
          longint a;
          a = (l == 0) ? in_act[j] : out[prev_base + k];
          acc = clamp32(acc + floor_div256(a * coef[ci])); ci++;
        end
        out[base + j] = (acc < 0) ? 0 : acc;
      end
      prev_base = base; base += n; prev_n = n;
    end
    return 1;
  endfunction

  // Clocks from start to done of the controller's schedule.
  function automatic int ref_cycles(input int topo[78]);
    int c, f, prev_n, n, g;
    c = 3; prev_n = 0;
    for (int l = 0; l < topo[0]; l++) begin
      n = topo[l+1];
      f = (l == 0) ? 1 : prev_n;
      c += 2;
      for (int j = 0; j < n; j += 4) begin
        g = (n - j > 4) ? 4 : n - j;
        c += 2 + g * (f + 2);
      end
      prev_n = n;
    end
    return c;
  endfunction

  // Total neurons of a topology.
  function automatic int n_neurons(input int topo[78]);
    int s;
    s = 0;
    for (int l = 0; l < topo[0]; l++) s += topo[l+1];
    return s;
  endfunction

  // Total coefficients of a topology.
  function automatic int n_coefs(input int topo[78]);
    int s, f;
    s = 0;
    for (int l = 0; l < topo[0]; l++) begin
      f = (l == 0) ? 1 : topo[l];
      s += topo[l+1] * (f + 1);
    end
    return s;
  endfunction

endpackage
