// atree_router: multiplexor network plus one adder tree per output kernel.
//
// Sub-product j carries a Kernel ID and a slot (from kid_arbiter). The
// multiplexor network places it on input slot[j] of adder tree kid[j]; each
// of the F adder trees then sums its SLOTS inputs into one result, so a
// 1x1 convolution's sub-products become F per-kernel partial sums in one
// combinational pass. Unused tree inputs are zero. Two valid sub-products
// must not share a (kid, slot) pair; the arbiter guarantees this and an
// assertion checks it in simulation. A Kernel ID >= F or a slot >= SLOTS
// is dropped.
//
// The routing by Kernel ID and slot follows the paper's parallel routing
// figure; the balanced binary tree shape is this design's choice.
module atree_router
  import cs_pkg::*;
#(
  parameter int unsigned M      = 32,
  parameter int unsigned F      = 64,
  parameter int unsigned SLOTS  = 4,
  parameter int unsigned KID_W  = 6,
  parameter int unsigned IN_W   = PROD_W,
  parameter int unsigned OUT_W  = ACC_W,
  localparam int unsigned SLOT_W = (SLOTS <= 2) ? 1 : $clog2(SLOTS)
) (
  input  logic [M-1:0]                    valid,
  input  logic signed [M-1:0][IN_W-1:0]   prod,
  input  logic [M-1:0][KID_W-1:0]         kid,
  input  logic [M-1:0][SLOT_W-1:0]        slot,
  output logic signed [F-1:0][OUT_W-1:0]  sum
);

  // Multiplexor network: tree inputs indexed by (kernel, slot). occ marks
  // inputs already taken, to check that no two sub-products collide.
  logic signed [IN_W-1:0] tin [F][SLOTS];
  logic                   occ [F][SLOTS];

  always_comb begin
    for (int f = 0; f < F; f++)
      for (int s = 0; s < SLOTS; s++) begin
        tin[f][s] = '0;
        occ[f][s] = 1'b0;
      end
    for (int j = 0; j < M; j++)
      if (valid[j] && int'(kid[j]) < F && int'(slot[j]) < SLOTS) begin
        assert (!occ[kid[j]][slot[j]])
          else $warning("atree_router: sub-product %0d collides on kernel %0d slot %0d", j, kid[j], slot[j]);
        tin[kid[j]][slot[j]] = prod[j];
        occ[kid[j]][slot[j]] = 1'b1;
      end
  end

  // Adder trees: pairwise reduction, log2(SLOTS) levels.
  for (genvar f = 0; f < F; f++) begin : g_tree
    always_comb begin
      logic signed [OUT_W-1:0] lvl [SLOTS];
      int unsigned n;
      for (int s = 0; s < SLOTS; s++) lvl[s] = OUT_W'(tin[f][s]);
      n = SLOTS;
      while (n > 1) begin
        for (int s = 0; s < (SLOTS + 1) / 2; s++)
          if (s < n / 2) lvl[s] = lvl[2*s] + lvl[2*s+1];
          else if (s == n / 2 && (n % 2) == 1) lvl[s] = lvl[n-1];
        n = (n + 1) / 2;
      end
      sum[f] = lvl[0];
    end
  end

endmodule
