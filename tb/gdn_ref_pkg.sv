// gdn_ref_pkg: real-number reference of one GDN / iGDN output, used by the engine and system
// testbenches. It works from the same integer inputs the hardware sees (int8 activations with
// in_fp fraction bits, beta and gamma as Q16.16 words) but computes in double precision:
//   norm = beta_i + sum_j gamma_ij * x_j^2
//   y_i  = x_i / sqrt(norm)   (GDN)   or   x_i * sqrt(norm)   (iGDN)
// and rounds y_i to int8 with out_fp fraction bits, saturating. It also reports whether the
// result saturated.
package gdn_ref_pkg;
  function automatic int ref_out(input bit igdn, input int in_fp, input int out_fp, input int c,
                                 input int i, input int act[], input int unsigned gamma[],
                                 input int unsigned beta[], output bit sat);
    real x[], norm, y, q;
    x = new[c];
    for (int j = 0; j < c; j++) x[j] = real'(act[j]) / real'(1 << in_fp);
    norm = real'(beta[i]) / 65536.0;
    for (int j = 0; j < c; j++) norm += (real'(gamma[i * c + j]) / 65536.0) * x[j] * x[j];
    y = igdn ? x[i] * $sqrt(norm) : x[i] / $sqrt(norm);
    q = $floor(y * real'(1 << out_fp) + 0.5);
    sat = 0;
    if (q > 127.0)  begin q = 127.0;  sat = 1; end
    if (q < -128.0) begin q = -128.0; sat = 1; end
    return int'(q);
  endfunction
endpackage
