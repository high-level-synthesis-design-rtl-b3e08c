// bf_model_pkg: reference model of the beamformer chain for the testbenches.
//
// Works on flattened integer arrays and is written straight from the
// definitions, independent of the RTL structure:
//   interpolated row i: raw[i/2] for even i; the floor mean of raw[(i-1)/2]
//                       and raw[(i+1)/2] for odd i; the last row repeats the
//                       last raw row
//   compensated row m:  interpolated row m + n_remove[c] of channel c, zero
//                       past the frame end
//   pixel (z, x):       sum over enabled profile entries j of compensated row
//                       idx(z, j), channel x + j - F/2 (zero outside the array)
package bf_model_pkg;
  // raw[i*w + c] -> comp[m*w + c]
  function automatic void compensate(input int w, input int d_raw, input int nrem[],
                                     input int raw[], ref int comp[]);
    int d;
    int interp[];
    d = 2 * d_raw;
    interp = new[d * w];
    comp   = new[d * w];
    for (int i = 0; i < d; i++)
      for (int c = 0; c < w; c++) begin
        int k;
        k = i / 2;
        if (i % 2 == 0 || k == d_raw - 1) interp[i*w + c] = raw[k*w + c];
        else interp[i*w + c] = (raw[k*w + c] + raw[(k+1)*w + c]) >>> 1;
      end
    for (int m = 0; m < d; m++)
      for (int c = 0; c < w; c++)
        comp[m*w + c] = (m + nrem[c] < d) ? interp[(m + nrem[c])*w + c] : 0;
  endfunction

  // idx[z*f + j], en[z*f + j] -> out[z*w + x]
  function automatic void das(input int w, input int f, input int d, input int comp[],
                              input int idx[], input bit en[], ref int out[]);
    out = new[d * w];
    for (int z = 0; z < d; z++)
      for (int x = 0; x < w; x++) begin
        int acc;
        acc = 0;
        for (int j = 0; j < f; j++) begin
          int ch;
          ch = x + j - f/2;
          if (en[z*f + j] && ch >= 0 && ch < w) acc += comp[idx[z*f + j]*w + ch];
        end
        out[z*w + x] = acc;
      end
  endfunction
endpackage
