// cs_pkg: widths and types shared by the Complementary Sparsity datapath.
//
// Activations are 8-bit unsigned values (outputs of a k-WTA stage after
// ReLU) and weights are 8-bit two's-complement values, following the 8-bit
// quantisation of the sparse networks this datapath runs. A sub-product of
// one activation and one weight therefore needs 17 signed bits. Kernel IDs
// and slot widths depend on the layer and are module parameters instead.
package cs_pkg;

  localparam int unsigned ACT_W  = 8;   // activation value width
  localparam int unsigned WT_W   = 8;   // weight value width
  localparam int unsigned PROD_W = ACT_W + WT_W + 1;  // unsigned x signed product
  localparam int unsigned ACC_W  = 24;  // accumulator / adder-tree output width

  typedef logic [ACT_W-1:0]         act_t;
  typedef logic signed [WT_W-1:0]   wt_t;
  typedef logic signed [PROD_W-1:0] prod_t;
  typedef logic signed [ACC_W-1:0]  acc_t;

  // Product of an unsigned activation and a signed weight.
  function automatic prod_t mul_aw(act_t a, wt_t w);
    return prod_t'($signed({1'b0, a})) * prod_t'(w);
  endfunction

  // Requantisation between layers: ReLU, arithmetic shift right by `shift`,
  // saturate to the 8-bit activation range.
  function automatic act_t requant(acc_t x, int unsigned shift);
    acc_t y;
    if (x[ACC_W-1]) return '0;
    y = x >>> shift;
    return (y > acc_t'(2**ACT_W - 1)) ? act_t'(2**ACT_W - 1) : act_t'(y);
  endfunction

endpackage
