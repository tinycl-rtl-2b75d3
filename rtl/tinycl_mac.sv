// tinycl_mac: reconfigurable multiply-and-accumulate block.
//
// Eight 16x16 signed multipliers work in parallel on the lanes of data1 and
// data2; their 32-bit full-precision products go to eight 32-bit adders that
// the mode input arranges in one of two ways:
//   multi_adder = 0  multi-operand mode: seven adders form a 3-level tree
//                    (4 + 2 + 1) and mop_out is the sum of the 8 products.
//                    Used by forward and gradient-propagation convolutions and
//                    the dense forward pass, where 8 input channels are summed.
//   multi_adder = 1  multi-adder mode: every adder adds one product to one
//                    lane of psum_in, giving 8 independent partial sums on
//                    psum_out. Used by the kernel gradient and by the dense
//                    gradient propagation and weight update.
// The 8 multipliers, 8 adders, the tree shape and both modes follow the
// architecture. The eighth adder is idle in multi-operand mode, as drawn.
// Purely combinational; the adders wrap at 32 bits like the 32-bit adders
// they stand for. Rounding back to 16 bits is done downstream.
module tinycl_mac
  import tinycl_pkg::*;
(
  input  logic        multi_adder,
  input  data_t       data1    [LANES],
  input  data_t       data2    [LANES],
  input  prod_t       psum_in  [LANES],
  output prod_t       mop_out,
  output prod_t       psum_out [LANES]
);

  prod_t prod [LANES];
  prod_t l1 [4];
  prod_t l2 [2];

  always_comb begin
    for (int i = 0; i < LANES; i++) begin
      prod[i] = prod_t'(data1[i]) * prod_t'(data2[i]);
    end
    // multi-operand mode: adder tree
    for (int i = 0; i < 4; i++) l1[i] = prod[2*i] + prod[2*i+1];
    for (int i = 0; i < 2; i++) l2[i] = l1[2*i] + l1[2*i+1];
    mop_out = multi_adder ? '0 : (l2[0] + l2[1]);
    // multi-adder mode: one adder per lane
    for (int i = 0; i < LANES; i++) begin
      psum_out[i] = multi_adder ? (prod[i] + psum_in[i]) : '0;
    end
  end

endmodule
