// tb_mlp_ref_pkg: double-precision reference model of one MLP classifier for the testbenches.
//
// mlp_ref holds a 24-32-64-N (or smaller) network with random Float32-representable weights,
// computes ReLU hidden layers, a linear output layer and a Softmax in double precision, and
// can list its parameters as write words for the design's parameter port.
package tb_mlp_ref_pkg;
  import ids_pkg::*;
  import tb_fp_pkg::*;

  class mlp_ref;
    int    n_in, n_h1, n_h2, n_out;
    real   w1 [][], w2 [][], w3 [][];
    real   b1 [], b2 [], b3 [];
    int    relu_zeros = 0;

    function new(int n_in, int n_h1, int n_h2, int n_out);
      this.n_in = n_in; this.n_h1 = n_h1; this.n_h2 = n_h2; this.n_out = n_out;
      init(w1, b1, n_h1, n_in);
      init(w2, b2, n_h2, n_h1);
      init(w3, b3, n_out, n_h2);
    endfunction

    // weights uniform in +-1.5/sqrt(fan-in), biases in +-0.2, all exactly representable
    static function void init(ref real w [][], ref real b [], input int rows, input int cols);
      real lim;
      lim = 1.5 / $sqrt(real'(cols));
      w = new[rows];
      b = new[rows];
      for (int r = 0; r < rows; r++) begin
        w[r] = new[cols];
        for (int c = 0; c < cols; c++) w[r][c] = fp2r(r2fp(rand_real(-lim, lim)));
        b[r] = fp2r(r2fp(rand_real(-0.2, 0.2)));
      end
    endfunction

    function void layer(input real w [][], input real b [], input real x [], output real y [],
                        input bit relu);
      y = new[b.size()];
      for (int r = 0; r < b.size(); r++) begin
        y[r] = b[r];
        for (int c = 0; c < x.size(); c++) y[r] += w[r][c] * x[c];
        if (relu && y[r] < 0) begin y[r] = 0.0; relu_zeros++; end
      end
    endfunction

    function void forward(input real x [], output real p []);
      real h1 [], h2 [], z [];
      real mx, s;
      layer(w1, b1, x, h1, 1'b1);
      layer(w2, b2, h1, h2, 1'b1);
      layer(w3, b3, h2, z, 1'b0);
      mx = z[0];
      foreach (z[i]) if (z[i] > mx) mx = z[i];
      s = 0.0;
      foreach (z[i]) s += $exp(z[i] - mx);
      p = new[z.size()];
      foreach (z[i]) p[i] = $exp(z[i] - mx) / s;
    endfunction

    // all parameters as write words, layer by layer, weights then biases
    function void words(input model_e m, ref wload_t q [$]);
      wload_t wl;
      for (int l = 0; l < 3; l++) begin
        int rows, cols;
        rows = (l == 0) ? n_h1 : (l == 1) ? n_h2 : n_out;
        cols = (l == 0) ? n_in : (l == 1) ? n_h1 : n_h2;
        for (int r = 0; r < rows; r++) begin
          for (int c = 0; c <= cols; c++) begin
            wl.model   = m;
            wl.layer   = 2'(l);
            wl.is_bias = (c == cols);
            wl.row     = 6'(r);
            wl.col     = 6'(c % cols);
            if (l == 0) wl.data = r2fp((c == cols) ? b1[r] : w1[r][c]);
            else if (l == 1) wl.data = r2fp((c == cols) ? b2[r] : w2[r][c]);
            else wl.data = r2fp((c == cols) ? b3[r] : w3[r][c]);
            q.push_back(wl);
          end
        end
      end
    endfunction
  endclass

endpackage
