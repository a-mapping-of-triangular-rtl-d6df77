// tbi_ref_pkg: reference functions for the interleaver testbenches,
// written independently of the RTL with plain integer arithmetic.
package tbi_ref_pkg;

  // Bank, column and row of index-space position (r, c) under the optimized
  // mapping (bank rotation, rectangular pages, bank-dependent offset).
  function automatic void ref_map(input int dim, input int nb, input int ph, input int pw,
                                  input int r, input int c,
                                  output int bank, output int col, output int row);
    int l, rl, cl, p;
    l    = dim / nb;
    bank = (r + c) % nb;
    p    = r % nb;
    rl   = (r / nb + bank) % l;
    cl   = (c / nb + bank) % l;
    col  = (rl % ph) * pw + (cl % pw);
    row  = ((rl / ph) * nb + p) * (l / pw) + (cl / pw);
  endfunction

  // Rank of (r, c) in the row-wise walk of a triangle of side n.
  function automatic int row_rank(input int n, input int r, input int c);
    int q = 0;
    for (int i = 0; i < r; i++) q += n - i;
    return q + c;
  endfunction

  // k-th position of the row-wise (col_wise = 0) or column-wise walk.
  function automatic void tri_pos(input int n, input bit col_wise, input int k,
                                  output int r, output int c);
    int a = 0;
    while (k >= n - a) begin k -= n - a; a++; end
    if (col_wise) begin c = a; r = k; end
    else          begin r = a; c = k; end
  endfunction

endpackage
