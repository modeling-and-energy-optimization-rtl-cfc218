// ldpc_pkg: constants and helpers shared by the layered offset min-sum decoder.
//
// Messages are W-bit two's-complement integers (W = 6) saturated to the symmetric
// range [-(2^(W-1)-1), +(2^(W-1)-1)], so every message also fits in sign & magnitude
// form with a (W-1)-bit magnitude. Belief totals Lambda = mu + lambda are one bit wider
// (W+1 bits), which holds every such sum exactly: no belief total is ever clipped, so
// Lambda - lambda always keeps the sign of the true extrinsic message. The default code is a (3,30) regular ensemble
// (DV = 3 layers, DC = 30 inputs per check node), one of the ensembles of the paper's
// results; the offset C = 1 is the value used with that ensemble.
//
// The parity-check matrix is a quasi-cyclic array code built from Z x Z circulant
// permutation matrices: in layer l, row r is connected to variable node
// k*Z + ((r + shift(l,k)) mod Z) of every block column k, with shift(l,k) = (l*k) mod Z.
// The paper does not give a matrix; this construction is this design's choice.
package ldpc_pkg;

  parameter int MSG_W   = 6;   // message width (paper: 6 bits)
  parameter int BEL_W   = MSG_W + 1;  // belief total width
  parameter int CODE_DV = 3;   // variable node degree = number of layers L
  parameter int CODE_DC = 30;  // check node degree
  parameter int CODE_Z  = 31;  // circulant size (prime >= DC keeps the array code 4-cycle free)
  parameter int OMS_C   = 1;   // offset C of the offset min-sum algorithm
  parameter int PROC_LAT = 3;  // input, pipeline and output register

  // Circulant shift of block column k in layer l.
  function automatic int unsigned qc_shift(int unsigned l, int unsigned k, int unsigned z);
    return (l * k) % z;
  endfunction

endpackage
