// nn_ref_pkg: a software reference of the whole classifier for the
// testbenches. It runs the network the textbook way, with multiplications
// and integer arithmetic of unlimited width:
//   in[i]  = pixel[i] >= threshold
//   hi[j]  = sum_i w0(i,j) * in[i]       ho[j] = (hi[j] >= 0)
//   fi[k]  = sum_j w1(j,k) * ho[j]       class = highest k with maximal fi[k]
// using the weights of nn_pkg::weight().
package nn_ref_pkg;

  typedef struct {
    int in_bin[];
    int hi[];
    int ho[];
    int fi[];
    int cls;
    int tie;
  } result_t;

  function automatic result_t run(input int pixel[], input int n_hid, input int n_out,
                                  input int threshold, input int unsigned seed, input int wmax);
    result_t r;
    int n_in = pixel.size();
    int mx, cnt;
    r.in_bin = new[n_in];
    r.hi = new[n_hid];
    r.ho = new[n_hid];
    r.fi = new[n_out];
    for (int i = 0; i < n_in; i++) r.in_bin[i] = (pixel[i] >= threshold) ? 1 : 0;
    for (int j = 0; j < n_hid; j++) begin
      int s = 0;
      for (int i = 0; i < n_in; i++) s += nn_pkg::weight(seed, 0, i, j, wmax) * r.in_bin[i];
      r.hi[j] = s;
      r.ho[j] = (s >= 0) ? 1 : 0;
    end
    for (int k = 0; k < n_out; k++) begin
      int s = 0;
      for (int j = 0; j < n_hid; j++) s += nn_pkg::weight(seed, 1, j, k, wmax) * r.ho[j];
      r.fi[k] = s;
    end
    mx = r.fi[0];
    for (int k = 1; k < n_out; k++) if (r.fi[k] > mx) mx = r.fi[k];
    cnt = 0;
    for (int k = 0; k < n_out; k++) if (r.fi[k] == mx) begin r.cls = k; cnt++; end
    r.tie = (cnt > 1) ? 1 : 0;
    return r;
  endfunction

endpackage
