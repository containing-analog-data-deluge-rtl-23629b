// tb_ref_pkg -- reference models used by the testbenches, written
// independently of the RTL.
//
// walsh_ref(k, r, c): entry of the sequency-ordered 2^k x 2^k Walsh matrix
// (+1/-1). It builds the Hadamard matrix by the block recursion
// H_k = [[H, H], [H, -H]] and picks the Hadamard row that has exactly r sign
// changes, which is how the Walsh ordering is defined.
// soft_thr(x, t): sign(x)(|x| - t), 0 inside [-t, t].
// mav_code(d, cols): the ideal ADC code of a multiply-average with d
// products equal to 1 out of cols, clamped to the largest code.
package tb_ref_pkg;

  function automatic int walsh_ref(input int k, input int r, input int c);
    int n, sz, h [][];
    n = 1 << k;
    h = new[n];
    foreach (h[i]) h[i] = new[n];
    h[0][0] = 1;
    sz = 1;
    while (sz < n) begin
      for (int i = 0; i < sz; i++)
        for (int j = 0; j < sz; j++) begin
          h[i][j+sz]    =  h[i][j];
          h[i+sz][j]    =  h[i][j];
          h[i+sz][j+sz] = -h[i][j];
        end
      sz = sz * 2;
    end
    for (int i = 0; i < n; i++) begin
      int changes;
      changes = 0;
      for (int j = 1; j < n; j++) if (h[i][j] != h[i][j-1]) changes++;
      if (changes == r) return h[i][c];
    end
    return 0;
  endfunction

  function automatic int soft_thr(input int x, input int t);
    if (x > t)  return x - t;
    if (x < -t) return x + t;
    return 0;
  endfunction

  function automatic int mav_code(input int d, input int cols);
    int v;
    v = cols - d;
    return (v > cols - 1) ? cols - 1 : v;
  endfunction

endpackage
