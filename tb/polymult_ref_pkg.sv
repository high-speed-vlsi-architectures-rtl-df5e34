// polymult_ref_pkg -- reference model for the testbenches.
//
// Schoolbook negacyclic product, computed directly from the definition
//   p[i] = sum_j (-1)^floor((i+j)/n) a[i] b[j]  placed at x^((i+j) mod n),
// reduced modulo q = 2^13, independent of the hardware's decomposition.
// Coefficients are passed as plain integers (negative allowed).
package polymult_ref_pkg;

  localparam int QBITS = 13;
  localparam int QMASK = (1 << QBITS) - 1;

  // p = a * b mod (x^n + 1, 2^13); a, b, p have n entries
  function automatic void negacyclic(input int n, input int a[], input int b[], ref int p[]);
    int acc[];
    acc = new[n];
    for (int i = 0; i < n; i++) acc[i] = 0;
    for (int i = 0; i < n; i++)
      for (int j = 0; j < n; j++) begin
        if (i + j < n) acc[i + j]     += a[i] * b[j];
        else           acc[i + j - n] -= a[i] * b[j];
      end
    p = new[n];
    for (int i = 0; i < n; i++) p[i] = acc[i] & QMASK;
  endfunction

  // random secret-like coefficient in [-lim, lim]
  function automatic int rand_small(int lim);
    return int'($urandom_range(2 * lim)) - lim;
  endfunction

endpackage
