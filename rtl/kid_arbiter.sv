// kid_arbiter: prefix-sum slot assignment for parallel sub-product routing.
//
// When the sub-products of several activations are summed in the same cycle,
// two of them may belong to the same output kernel. Each kernel has an adder
// tree with 2^SLOT_W inputs, and every sub-product needs its own input. This
// module gives sub-product j the slot
//     slot[j] = #{ i < j : valid[i] && kid[i] == kid[j] }
// i.e. a running count (prefix sum) per Kernel ID, so that the k-th
// occurrence of a Kernel ID lands on slot k. The paper describes the module
// as a prefix sum over the Kernel IDs; here the prefix sum is written as a
// compare-and-count per position, which is M*(M-1)/2 comparators.
// slot[0] is always 0 and slot[1] at most 1, so three output bits are
// constant after synthesis; that is inherent to the prefix count.
//
// Purely combinational. overflow is raised when some kernel receives more
// than 2^SLOT_W valid sub-products in one cycle; this flag and its name are
// this design's own, the paper does not say how such a case is handled.
module kid_arbiter #(
  parameter int unsigned M      = 32,
  parameter int unsigned KID_W  = 6,
  parameter int unsigned SLOT_W = 2
) (
  input  logic [M-1:0]              valid,
  input  logic [M-1:0][KID_W-1:0]   kid,
  output logic [M-1:0][SLOT_W-1:0]  slot,
  output logic                      overflow
);

  localparam int unsigned CNT_W = $clog2(M + 1);

  always_comb begin
    overflow = 1'b0;
    for (int j = 0; j < M; j++) begin
      logic [CNT_W-1:0] cnt;
      cnt = '0;
      for (int i = 0; i < j; i++) begin
        if (valid[i] && kid[i] == kid[j]) cnt = cnt + 1'b1;
      end
      slot[j] = cnt[SLOT_W-1:0];
      if (valid[j] && (cnt >> SLOT_W) != 0) overflow = 1'b1;
    end
  end

endmodule
