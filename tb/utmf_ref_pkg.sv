// utmf_ref_pkg: behavioural reference models used by the testbenches.
//
// Written independently of the RTL, in plain procedural code:
//   true_sort    - insertion sort of nine pixels
//   snake_net    - the five-stage snake shear network (snake row sort,
//                  column sort, twice, then the two semi-diagonal sorts and,
//                  with fix=1, the middle-row sort), read out in snake order
//   utmf_filter  - the filter decision for one window, given its rank-ordered
//                  pixels (as the network delivers them) and its centre pixel
package utmf_ref_pkg;

  typedef int unsigned win_t [9];

  function automatic win_t true_sort(input win_t w);
    win_t r = w;
    for (int i = 1; i < 9; i++)
      for (int j = i; j > 0 && r[j-1] > r[j]; j--) begin
        int unsigned t = r[j]; r[j] = r[j-1]; r[j-1] = t;
      end
    return r;
  endfunction

  // sort three matrix cells (given by flat indices) ascending, in place
  function automatic void sort3(ref int unsigned a[9], input int i0, int i1, int i2);
    int unsigned v[3];
    v[0] = a[i0]; v[1] = a[i1]; v[2] = a[i2];
    for (int p = 0; p < 2; p++)
      for (int q = 0; q < 2 - p; q++)
        if (v[q] > v[q+1]) begin int unsigned t = v[q]; v[q] = v[q+1]; v[q+1] = t; end
    a[i0] = v[0]; a[i1] = v[1]; a[i2] = v[2];
  endfunction

  // fix=1 adds the final middle-row sort (snake_sorter FINAL_ROW_SORT)
  function automatic win_t snake_net(input win_t w, input bit fix = 1'b1);
    int unsigned a[9];
    win_t r;
    for (int i = 0; i < 9; i++) a[i] = w[i];
    for (int phase = 0; phase < 2; phase++) begin
      sort3(a, 0, 1, 2);
      sort3(a, 5, 4, 3);          // middle row descending
      sort3(a, 6, 7, 8);
      for (int c = 0; c < 3; c++) sort3(a, c, c + 3, c + 6);
    end
    sort3(a, 1, 2, 5);            // upper semi-diagonal
    sort3(a, 3, 6, 7);            // lower semi-diagonal
    if (fix) sort3(a, 5, 4, 3);   // middle row, snake order
    r = '{a[0], a[1], a[2], a[5], a[4], a[3], a[6], a[7], a[8]};
    return r;
  endfunction

  // kind codes match utmf_pkg::out_kind_t
  function automatic int unsigned utmf_filter(input win_t s, input int unsigned centre,
                                              input int unsigned t, input int unsigned t1,
                                              output int kind);
    int nz = 0, nl = 0, m, ut, dp, dm;
    foreach (s[i]) begin
      if (s[i] == 0)   nz++;
      if (s[i] == 255) nl++;
    end
    if (nz == 9) begin kind = 3; return 0;   end
    if (nl == 9) begin kind = 4; return 255; end
    if (nz + nl == 9) begin kind = 5; return (nl * 255) / 9; end
    m = 9 - nz - nl;
    if (m % 2 == 1) ut = s[nz + m / 2];
    else            ut = (s[nz + m / 2 - 1] + s[nz + m / 2]) / 2;
    dp = int'(centre) - ut; if (dp < 0) dp = -dp;
    dm = int'(s[4]) - ut;   if (dm < 0) dm = -dm;
    if (dp <= int'(t))  begin kind = 0; return centre; end
    if (dm <= int'(t1)) begin kind = 1; return s[4];   end
    kind = 2;
    return ut;
  endfunction

endpackage
