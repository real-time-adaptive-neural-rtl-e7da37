// tb_ref_pkg: reference models used by the system testbenches, written
// independently of the RTL: nearest centroid by squared Euclidean distance
// (first minimum wins) and the forward pass of a model in Q8.8 fixed point
// (bias << 8 plus exact products, >>> 8, saturate to 16 bits, ReLU on
// hidden layers, argmax with the first maximum winning).
package tb_ref_pkg;
  typedef int  ivec_t [];
  typedef int  imat_t [][];

  function automatic int nearest(input int x [], input imat_t c, output longint best_d);
    int best;
    best = 0; best_d = -1;
    foreach (c[i]) begin
      longint d;
      d = 0;
      foreach (x[j]) d += (longint'(x[j]) - c[i][j]) * (longint'(x[j]) - c[i][j]);
      if (best_d < 0 || d < best_d) begin best_d = d; best = i; end
    end
    return best;
  endfunction

  function automatic longint sat16(longint v);
    if (v > 32767) return 32767;
    if (v < -32768) return -32768;
    return v;
  endfunction

  // w[l][j][i], i = n_in is the bias; sizes[0] = inputs, sizes[L] = classes.
  function automatic int forward(input int x [], input int sizes [], input int w [][][]);
    longint act [], nxt [];
    int best;
    act = new[x.size()];
    foreach (x[i]) act[i] = x[i];
    for (int l = 0; l < sizes.size() - 1; l++) begin
      nxt = new[sizes[l+1]];
      for (int j = 0; j < sizes[l+1]; j++) begin
        longint acc;
        acc = longint'(w[l][j][sizes[l]]) * 256;
        for (int i = 0; i < sizes[l]; i++) acc += act[i] * w[l][j][i];
        nxt[j] = sat16(acc >>> 8);
        if (l < sizes.size() - 2 && acc <= 0) nxt[j] = 0;
      end
      act = nxt;
    end
    best = 0;
    foreach (act[j]) if (act[j] > act[best]) best = j;
    return best;
  endfunction
endpackage
