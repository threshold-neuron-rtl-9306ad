// tn_ref_pkg: reference model of the Threshold Neuron for the testbenches.
//
// Works on plain integers, independently of the RTL's widths:
//   T(x, w) = x - w if x > w else 0;  Y = (+/-) sum T + b, clipped to out_w bits.
package tn_ref_pkg;

  function automatic int ref_neuron(input int x[], input int w[], input int b,
                                    input bit neg, input int out_w);
    int s = 0;
    int r, hi, lo;
    foreach (x[i]) if (x[i] > w[i]) s += x[i] - w[i];
    r  = (neg ? -s : s) + b;
    hi = (1 << (out_w - 1)) - 1;
    lo = -(1 << (out_w - 1));
    return (r > hi) ? hi : (r < lo) ? lo : r;
  endfunction

  function automatic bit ref_sat(input int x[], input int w[], input int b,
                                 input bit neg, input int out_w);
    int s = 0;
    int r;
    foreach (x[i]) if (x[i] > w[i]) s += x[i] - w[i];
    r = (neg ? -s : s) + b;
    return (r > (1 << (out_w - 1)) - 1) || (r < -(1 << (out_w - 1)));
  endfunction

  // Random signed 8-bit value.
  function automatic int rnd8();
    return int'($urandom_range(255)) - 128;
  endfunction

endpackage
