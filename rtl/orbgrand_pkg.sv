// orbgrand_pkg: constants and helper functions shared by the ORBGRAND decoder.
//
// Default sizes are the ones of the original implementation: code length n = 128,
// code rates 0.75..1 (so at most n-k = 32 parity checks), 5-bit sign-magnitude LLRs,
// maximum logistic weight LW_max = 64 and at most P_max = 6 flipped bits per pattern.
// lam3_max() is the bound of Eq. (1) for the third part of a 3-part partition
// (lambda_3 < (LW_max - 2) / 3); the first and second shift registers hold
// 2*(lambda_3^max + 1) syndromes and the third holds lambda_3^max syndromes.
package orbgrand_pkg;

  parameter int unsigned N_DEF     = 128;  // code length n
  parameter int unsigned Q_DEF     = 5;    // LLR bits: 1 sign + 4 magnitude
  parameter int unsigned SW_DEF    = 32;   // syndrome width = largest n-k (rate >= 0.75)
  parameter int unsigned K_DEF     = 128;  // width of the message output (largest k)
  parameter int unsigned LWMAX_DEF = 64;   // maximum logistic weight
  parameter int unsigned PMAX_DEF  = 6;    // maximum Hamming weight of a test pattern

  // Largest lambda_3 of a distinct 3-part partition of lwmax, from Eq. (1) with i = P = 3.
  function automatic int unsigned lam3_max(input int unsigned lwmax);
    return (lwmax >= 6) ? (lwmax - 3) / 3 : 1;
  endfunction

  // Number of syndromes held in shift registers 1 and 2.
  function automatic int unsigned sr12_len(input int unsigned lwmax);
    return 2 * (lam3_max(lwmax) + 1);
  endfunction

  // Width of a counter that holds values 0..v.
  function automatic int unsigned cw(input int unsigned v);
    return (v < 2) ? 1 : $clog2(v + 1);
  endfunction

endpackage
