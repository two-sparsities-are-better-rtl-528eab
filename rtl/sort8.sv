// sort8: combinational 8-input sorting network, largest first.
//
// Each element is a 14-bit (8-bit value, 6-bit channel index) pair. The
// network is Batcher's odd-even merge sort for 8 inputs: 19
// compare-exchange units in 6 layers, the comparator count and depth the
// paper gives for its 8-element sorter. A compare-exchange puts the larger
// value on the lower output position; on equal values the lower channel
// index counts as larger, so the order is fully determined. The tie rule
// and the choice of Batcher's network are this design's.
module sort8
  import cs_pkg::*;
#(
  parameter int unsigned IDX_W = 6
) (
  input  act_t [7:0]             in_val,
  input  logic [7:0][IDX_W-1:0]  in_idx,
  output act_t [7:0]             out_val,
  output logic [7:0][IDX_W-1:0]  out_idx
);

  // Comparator list, layer by layer: (lo, hi) pairs.
  localparam int unsigned NCMP = 19;
  localparam int unsigned CA [NCMP] = '{0,2,4,6, 0,1,4,5, 1,5, 0,1,2,3, 2,3, 1,3,5};
  localparam int unsigned CB [NCMP] = '{1,3,5,7, 2,3,6,7, 2,6, 4,5,6,7, 4,5, 2,4,6};

  typedef struct packed {
    act_t             val;
    logic [IDX_W-1:0] idx;
  } ent_t;

  // True when x must be ordered before y.
  function automatic logic goes_first(ent_t x, ent_t y);
    return (x.val > y.val) || (x.val == y.val && x.idx < y.idx);
  endfunction

  ent_t e [8];
  ent_t ea, eb;
  logic swap;

  always_comb begin
    for (int i = 0; i < 8; i++) e[i] = '{val: in_val[i], idx: in_idx[i]};
    ea   = '0;
    eb   = '0;
    swap = 1'b0;
    for (int c = 0; c < NCMP; c++) begin
      ea   = e[CA[c]];
      eb   = e[CB[c]];
      swap = goes_first(eb, ea);
      e[CA[c]] = swap ? eb : ea;
      e[CB[c]] = swap ? ea : eb;
    end
    for (int i = 0; i < 8; i++) begin
      out_val[i] = e[i].val;
      out_idx[i] = e[i].idx;
    end
  end

endmodule
