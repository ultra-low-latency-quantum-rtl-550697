// ttn_pkg: types and helpers shared by the Tree Tensor Network (TTN) inference RTL.
//
// Numbers are signed fixed point, DATA_W bits with FRAC fractional bits (Q2.14 by
// default: 16 bits covering the [-2,2) range the trained networks are normalised to).
// The tree shape is given as an array CHI = [D, chi_1, ..., chi_{L-1}, O] of bond
// dimensions, CHI[0] being the feature-map dimension and CHI[L] the output length.
// The functions here derive from it the node count, weight count and latency of each
// layer, so that RTL and testbenches agree on the layout of the weight memory.
package ttn_pkg;

  // Which node contraction the tree is built from.
  typedef enum logic [0:0] {
    IMPL_FP = 1'b0,   // Full Parallel: one multiplier per product, adder trees
    IMPL_PP = 1'b1    // Partial Parallel: D^2+1 multipliers, serial accumulation
  } impl_e;


  // Bond dimensions of a tree, CHI[0..L]; entries above L are ignored (write 0).
  localparam int unsigned MAX_LAYERS = 8;
  typedef int unsigned chi_t [MAX_LAYERS+1];

  // Number of adder-tree levels for n inputs (ceil(log2 n), 0 for n == 1).
  function automatic int unsigned clog2i(input int unsigned n);
    int unsigned r;
    r = 0;
    while ((1 << r) < n) r++;
    return r;
  endfunction

  // Weights held by one node of layer l (1-based): chi_l * chi_{l-1}^2.
  function automatic int unsigned node_weights(input int unsigned d_in, input int unsigned d_out);
    return d_out * d_in * d_in;
  endfunction

  // Latency in clock cycles of one Full Parallel node: dt * (2 + ceil(log2 d_in^2)).
  function automatic int unsigned fp_node_latency(input int unsigned d_in, input int unsigned dt);
    return dt * (2 + clog2i(d_in * d_in));
  endfunction

  // Latency in clock cycles of one Partial Parallel node: dt * (d_in^2 + d_out + 1).
  function automatic int unsigned pp_node_latency(input int unsigned d_in, input int unsigned d_out,
                                                  input int unsigned dt);
    return dt * (d_in * d_in + d_out + 1);
  endfunction

endpackage
