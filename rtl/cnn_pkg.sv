// cnn_pkg: word widths and small elaboration-time helpers shared by the
// convolution accelerator.
//
// Feature-map values and weights are 16-bit two's-complement fixed-point words,
// the quantisation the accelerator is specified with. Products are kept at full
// 32-bit width, and every sum (addition-tree nodes, channel sums, accumulators)
// is carried at ACC_W = 48 bits, so nothing overflows for any layer size this
// design can hold. The binary point and any rescaling of results are left to
// the consumer of the output stream: this is a choice of this design, the
// specification does not state them.
package cnn_pkg;

  localparam int unsigned DATA_W = 16;           // feature / weight word
  localparam int unsigned PROD_W = 2 * DATA_W;   // one product, also the bias word
  localparam int unsigned ACC_W  = 48;           // every sum and accumulator

  // Number of operands left on layer `lvl` of the odd-pass-through addition
  // tree that starts with `eta` operands: each layer keeps ceil(n/2).
  function automatic int unsigned tree_width(int unsigned eta, int unsigned lvl);
    int unsigned n;
    n = eta;
    for (int unsigned i = 0; i < lvl; i++) n = (n + 1) / 2;
    return n;
  endfunction

  // Number of adder layers of that tree: ceil(log2(eta)), 0 for one operand.
  function automatic int unsigned tree_stages(int unsigned eta);
    return (eta > 1) ? $clog2(eta) : 0;
  endfunction

endpackage
