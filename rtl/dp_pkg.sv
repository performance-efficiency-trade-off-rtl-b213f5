// dp_pkg: types and width formulas shared by the exact multiply-accumulate
// (EMAC) units of the Deep Positron neuron datapath.
//
// Every EMAC accumulates exact products in a wide fixed-point register (a
// Kulisch accumulator, called the quire for posits).  Its width follows
//     w_a = ceil(log2(k)) + 2*ceil(log2(max/min)) + 2
// where k is the number of products summed and max/min are the largest and
// smallest magnitudes of the number format.  The functions below evaluate
// ceil(log2(max/min)) in closed form for each format:
//   fixed  (n bits, Q fraction bits): max/min = 2^(n-1)-1          -> n-1
//   float  (we, wf)                : max/min = 2^(expmax+wf)(1-2^-(wf+1))
//                                    with expmax = 2^we-2          -> expmax+wf
//   posit  (n, es)                 : max/min = useed^(2(n-2))      -> 2^es*2(n-2)
// The accumulator's least significant bit weighs min^2, so every product of
// two representable numbers is an integer number of LSBs.
package dp_pkg;

  // Numerical format of a neuron.
  typedef enum logic [1:0] {
    FMT_FIXED = 2'd0,
    FMT_FLOAT = 2'd1,
    FMT_POSIT = 2'd2
  } fmt_e;

  // Control that travels down the EMAC pipeline with each operand pair.
  typedef struct packed {
    logic valid;  // operand pair is present
    logic first;  // first product of a dot product: preload the bias
    logic last;   // last product of a dot product: result is ready next
  } emac_ctl_t;

  function automatic int fixed_ratio_log2(int n);
    return n - 1;
  endfunction

  function automatic int float_ratio_log2(int we, int wf);
    return ((1 << we) - 2) + wf;
  endfunction

  function automatic int posit_ratio_log2(int n, int es);
    return (1 << es) * 2 * (n - 2);
  endfunction

  // Accumulator width of Eq. (2) for k products.
  function automatic int kulisch_width(int k, int ratio_log2);
    return $clog2(k) + 2 * ratio_log2 + 2;
  endfunction

endpackage
