// attn_ref_pkg: reference model of the gain-cell attention head for the
// testbenches.
//
// It keeps its own copy of the window (keys, values, valid columns, write
// indices) and computes the expected head output from the arithmetic the
// hardware is meant to implement, without any cycle timing:
//   w(l)   = 2*l - 7                       signed weight of a stored level
//   S_j    = sum_r q[r] * w(K_j[r])        charge of window column j
//   phi_j  = S_j <= 0 ? 0 : min(15, ceil(S_j / RELU_DSTEP))   (masked if unwritten)
//   c_r    = sum_{j in sub-tile} phi_j * w(V_j[r])
//   val_r  = sign(c_r) * min(15, ceil(|c_r| / SIGNED_DSTEP))  (sign + for c = 0)
//   A[r]   = sum over sub-tiles of val_r
// It also counts how often each saturating or masking case occurred.
package attn_ref_pkg;

  class attn_ref;
    int d, m, cols, relu_dstep, signed_dstep;
    int kmem[][];
    int vmem[][];
    bit valid[];
    int kptr, vptr;
    // event counters
    int n_relu_zero, n_relu_lin, n_relu_sat, n_masked;
    int n_out_neg, n_out_pos, n_out_sat, n_wraps;

    function new(int d_, int m_, int cols_, int rd, int sd);
      d = d_; m = m_; cols = cols_; relu_dstep = rd; signed_dstep = sd;
      kmem = new[m]; vmem = new[m]; valid = new[m];
      foreach (kmem[j]) begin kmem[j] = new[d]; vmem[j] = new[d]; end
      clear();
    endfunction

    function void clear();
      foreach (valid[j]) valid[j] = 0;
      kptr = 0; vptr = 0;
    endfunction

    static function int w(int lvl);
      return 2 * lvl - 7;
    endfunction

    static function int ceil_div(int a, int b);
      return (a + b - 1) / b;
    endfunction

    function void load_k(int k[]);
      foreach (k[r]) kmem[kptr][r] = k[r];
      valid[kptr] = 1;
      kptr = (kptr + 1) % m;
      if (kptr == 0) n_wraps++;
    endfunction

    // one inference step: write V_i, compute A_i, write K_{i+1}
    function void step(int q[], int v[], int knext[], output int a[]);
      int phi[];
      foreach (v[r]) vmem[vptr][r] = v[r];
      vptr = (vptr + 1) % m;
      phi = new[m];
      for (int j = 0; j < m; j++) begin
        int s;
        s = 0;
        for (int r = 0; r < d; r++) s += q[r] * w(kmem[j][r]);
        if (!valid[j])               begin phi[j] = 0; n_masked++; end
        else if (s <= 0)             begin phi[j] = 0; n_relu_zero++; end
        else if (ceil_div(s, relu_dstep) >= 15) begin phi[j] = 15; n_relu_sat++; end
        else                         begin phi[j] = ceil_div(s, relu_dstep); n_relu_lin++; end
      end
      a = new[d];
      for (int r = 0; r < d; r++) begin
        a[r] = 0;
        for (int g = 0; g < m / cols; g++) begin
          int c, width;
          c = 0;
          for (int j = g * cols; j < (g + 1) * cols; j++) c += phi[j] * w(vmem[j][r]);
          width = ceil_div(c < 0 ? -c : c, signed_dstep);
          if (width >= 15) begin width = 15; n_out_sat++; end
          if (c < 0) begin a[r] -= width; if (width > 0) n_out_neg++; end
          else       begin a[r] += width; if (width > 0) n_out_pos++; end
        end
      end
      load_k(knext);
    endfunction
  endclass

endpackage
