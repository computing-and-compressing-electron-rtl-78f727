// eri_pkg: quartet-class constants shared by all stages of the ERI kernel.
//
// A kernel is built for one quartet class [ab|cd], given by the angular
// momenta La, Lb, Lc, Ld of its four shells. Everything else (shell sizes,
// Rys order, buffer shapes, loop trip counts) follows from them at
// elaboration time through the functions below, mirroring the compile-time
// constants of the templated kernel.
//
//   ng(L)        = (L+1)(L+2)/2   Cartesian GTOs in a shell of momentum L
//   nrys(...)    = floor((La+Lb+Lc+Ld)/2) + 1, the Rys quadrature order;
//                  this gives 1..7 for L <= 3, and reproduces every n_RR
//                  of the published trip-count table.
//   pow2ceil(n)  = smallest power of two >= n (bank padding)
//   gto_comp(L, n, xi) = exponent of axis xi in the n-th GTO of a shell of
//                  momentum L, in the usual order (xx, xy, xz, yy, yz, zz
//                  for L = 2): ax descending, then ay descending.
//
// Input word layout (this design's choice; only the 2 x 512 bit size is
// given): word G holds fp32 fields R_A.xyz, R_B.xyz, R_C.xyz, R_D.xyz,
// alpha, beta, gamma, delta at fields 0..15 (field f at bits 32f+31:32f).
// Word R holds the Rys roots t_mu (as t^2, in [0,1)) at fields 0..7 and the
// weights w_mu at fields 8..15. The host folds the Gaussian prefactor and
// the normalisation of the four GTOs into w_mu.
package eri_pkg;

  localparam int WORD_BITS = 512;       // interleaved DDR4 interface width
  localparam int MAX_RYS   = 8;         // fields per Rys array in word R

  function automatic int ng(input int l);
    return (l + 1) * (l + 2) / 2;
  endfunction

  function automatic int nrys(input int la, input int lb, input int lc, input int ld);
    return (la + lb + lc + ld) / 2 + 1;
  endfunction

  function automatic int pow2ceil(input int n);
    int p;
    p = 1;
    while (p < n) p = p * 2;
    return p;
  endfunction

  function automatic int cdiv(input int a, input int b);
    return (a + b - 1) / b;
  endfunction

  function automatic int max2(input int a, input int b);
    return a > b ? a : b;
  endfunction

  function automatic int clog2(input int n);
    int r;
    r = 0;
    while ((1 << r) < n) r++;
    return r < 1 ? 1 : r;
  endfunction

  // Axis exponent xi (0 = x, 1 = y, 2 = z) of GTO number n in shell l.
  function automatic int gto_comp(input int l, input int n, input int xi);
    int idx;
    idx = 0;
    for (int ax = l; ax >= 0; ax--) begin
      for (int ay = l - ax; ay >= 0; ay--) begin
        if (idx == n) begin
          case (xi)
            0:       return ax;
            1:       return ay;
            default: return l - ax - ay;
          endcase
        end
        idx++;
      end
    end
    return 0;
  endfunction

endpackage
