// deconv_ref_pkg -- reference model for the testbenches.
//
// Computes a deconvolution layer the standard way, by traversing the input
// space and scattering each product to o = i*S + k - P (the overlapping-sum
// formulation the accelerator avoids), in the accelerator's Q16.16 fixed point.
// Because products are rounded one by one and additions wrap, the order of the
// additions does not matter and the result must match the hardware bit for bit.
package deconv_ref_pkg;
  import deconv_pkg::*;

  // x: [ic][ih][iw], w: [oc][ic][k][k], b: [oc]; returns y: [oc][oh][ow]
  function automatic void deconv_ref(input data_t x[], input data_t w[], input data_t b[],
                                     input int ic_n, input int oc_n, input int ih_n, input int iw_n,
                                     input int oh_n, input int ow_n, input int k, input int s,
                                     input int p, output data_t y[]);
    y = new[oc_n * oh_n * ow_n];
    for (int oc = 0; oc < oc_n; oc++)
      for (int i = 0; i < oh_n * ow_n; i++) y[oc * oh_n * ow_n + i] = b[oc];
    for (int oc = 0; oc < oc_n; oc++)
      for (int ic = 0; ic < ic_n; ic++)
        for (int ih = 0; ih < ih_n; ih++)
          for (int iw = 0; iw < iw_n; iw++)
            for (int kh = 0; kh < k; kh++)
              for (int kw = 0; kw < k; kw++) begin
                int oh, ow;
                oh = ih * s + kh - p;
                ow = iw * s + kw - p;
                if (oh >= 0 && oh < oh_n && ow >= 0 && ow < ow_n)
                  y[(oc * oh_n + oh) * ow_n + ow] += fx_mul(w[((oc * ic_n + ic) * k + kh) * k + kw],
                                                            x[(ic * ih_n + ih) * iw_n + iw]);
              end
  endfunction

  // A random Q16.16 value in about [-2, 2); with probability zero_pct/100 it is 0.
  function automatic data_t rand_fx(int zero_pct);
    if (int'($urandom % 100) < zero_pct) return '0;
    return data_t'($signed(32'($urandom % 32'h40000)) - 32'sh20000);
  endfunction
endpackage
