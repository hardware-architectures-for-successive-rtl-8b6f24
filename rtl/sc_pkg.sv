// sc_pkg -- types and elaboration-time helpers shared by the line successive
// cancellation (SC) decoder.
//
// Tree numbering: stage l (0 = next to the decision unit, m-1 = next to the
// channel registers) has 2^l nodes N_{l,j}. Every node owns one LLR register
// R_{l,j} and one partial-sum flip-flop; both are stored flat at index
// node_idx(l,j) = 2^l - 1 + j, so R_{0,0} is entry 0 and the n/2 stage-(m-1)
// registers are the last entries.
//
// PE sharing in the line array: the n/2 PEs all work when stage m-1 is active
// (PE q computes node N_{m-1,q}). Each of the n/2-1 nodes of stages 0..m-2 is
// given to exactly one PE, so that no PE serves more than two registers and a
// 2-input multiplexer suffices at each PE input and output. The rule used here
// is pe_of(l,j) = (2j+1)*2^(m-2-l) - 1; PE n/2-1 is the one PE that only ever
// works for stage m-1. (For n = 8 this hands R_{1,0}, R_{1,1} and R_{0,0} to
// the PEs that also compute R_{2,0}, R_{2,2} and R_{2,1}; the published n = 8
// drawing pairs R_{0,0} with R_{2,3} instead, an equivalent choice.)
package sc_pkg;

  // b_l: function applied by the active stage.
  typedef enum logic {
    OP_F = 1'b0,   // f: min-sum check-node rule
    OP_G = 1'b1    // g: add/subtract controlled by the partial sum
  } sc_op_e;

  // Flat index of node N_{l,j}.
  function automatic int node_idx(input int l, input int j);
    return (1 << l) - 1 + j;
  endfunction

  // PE that computes internal node N_{l,j} (l <= m-2) in the line array.
  function automatic int pe_of(input int m, input int l, input int j);
    return (2 * j + 1) * (1 << (m - 2 - l)) - 1;
  endfunction

  // Number of trailing zero bits of v (v > 0).
  function automatic int ctz(input int v);
    int k;
    k = 0;
    while (k < 31 && ((v >> k) & 1) == 0) k++;
    return k;
  endfunction

  // Stage of the internal node served by PE q, or -1 if PE q only serves
  // stage m-1 (inverse of pe_of).
  function automatic int pe_int_stage(input int m, input int q);
    return m - 2 - ctz(q + 1);
  endfunction

  // Index j of the internal node served by PE q (valid when pe_int_stage >= 0).
  function automatic int pe_int_node(input int q);
    return ((q + 1) >> ctz(q + 1)) >> 1;
  endfunction

  // Reverse the low `bits` bits of v.
  function automatic int bitrev(input int v, input int bits);
    int r;
    r = 0;
    for (int k = 0; k < bits; k++) r = (r << 1) | ((v >> k) & 1);
    return r;
  endfunction

endpackage
