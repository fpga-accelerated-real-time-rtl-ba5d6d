// mlp_ref_pkg: reference arithmetic for the testbenches.
//
// A plain-integer model of one dense layer, written independently of the
// RTL: y[o] = sat16(relu(floor((sum_i w[o*n_in+i]*x[i] + b[o]*2^10) / 2^10))),
// with 64-bit sums. The whole network is three calls of it.
package mlp_ref_pkg;

  function automatic void dense_ref(input int x[], input int w[], input int b[],
                                    input int n_out, input bit relu, output int y[]);
    int n_in;
    n_in = x.size();
    y = new[n_out];
    for (int o = 0; o < n_out; o++) begin
      longint acc;
      acc = longint'(b[o]) * 1024;
      for (int i = 0; i < n_in; i++) acc += longint'(w[o*n_in+i]) * longint'(x[i]);
      acc = acc >>> 10;
      if (relu && acc < 0) acc = 0;
      if (acc > 32767) acc = 32767;
      if (acc < -32768) acc = -32768;
      y[o] = int'(acc);
    end
  endfunction

endpackage
