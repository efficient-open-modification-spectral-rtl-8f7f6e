// oms_pkg: types and helper functions shared by the open-modification-search
// accelerator. It holds the command opcodes of the top level and the mapping
// from a stored cell level index to the signed hypervector element it stands for.
//
// Level index <-> element: an n-bit cell holds 2^n levels. With Wmax = 2^(n-1)
// the legal elements are {-Wmax..-1, 1..Wmax} (no zero), as in the multi-bit ID
// hypervector set {-4,-3,-2,-1,1,2,3,4} for n = 3, and {-1,+1} for n = 1.
// Level L stands for W = L - Wmax when L < Wmax and W = L - Wmax + 1 otherwise.
// This ordering of levels is this design's choice.
package oms_pkg;

  // Commands accepted by the top level.
  typedef enum logic [1:0] {
    OP_ENC_QUERY = 2'd0,  // encode a spectrum and keep it in the MLC query store
    OP_ENC_REF   = 2'd1,  // encode a spectrum and program it into a search column
    OP_SEARCH    = 2'd2   // search a stored query against the reference columns
  } op_e;

  // Signed element value held by a cell at level index lvl (bits wide cells).
  function automatic int signed level_to_weight(int unsigned lvl, int unsigned bits);
    int signed wmax;
    wmax = 1 <<< (bits - 1);
    if (int'(lvl) < wmax) return int'(lvl) - wmax;
    else                  return int'(lvl) - wmax + 1;
  endfunction

endpackage
