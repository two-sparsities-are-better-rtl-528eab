// max8_tree: three-level comparator tree finding the largest of 8 FIFO heads.
//
// Inputs are the 8 top-of-FIFO (value, index) entries and their valid bits.
// Level 1 compares pairs, level 2 pairs of winners, level 3 the final two;
// a winner carries its 3-bit FIFO number, which is the pop index. An
// invalid input always loses; on equal values the lower channel index wins.
// max_valid is low when no input is valid. Combinational. The three-level
// tree and the 3-bit pop index are the paper's; the tie rule is this
// design's.
module max8_tree
  import cs_pkg::*;
#(
  parameter int unsigned IDX_W = 6
) (
  input  logic [7:0]             valid,
  input  act_t [7:0]             val,
  input  logic [7:0][IDX_W-1:0]  idx,
  output logic                   max_valid,
  output act_t                   max_val,
  output logic [IDX_W-1:0]       max_idx,
  output logic [2:0]             max_sel
);

  typedef struct packed {
    logic             v;
    act_t             val;
    logic [IDX_W-1:0] idx;
    logic [2:0]       sel;
  } cand_t;

  function automatic cand_t pick(cand_t a, cand_t b);
    if (!b.v) return a;
    if (!a.v) return b;
    if (b.val > a.val || (b.val == a.val && b.idx < a.idx)) return b;
    return a;
  endfunction

  cand_t l0 [8];
  cand_t l1 [4];
  cand_t l2 [2];
  cand_t l3;

  always_comb begin
    for (int i = 0; i < 8; i++) l0[i] = '{v: valid[i], val: val[i], idx: idx[i], sel: 3'(i)};
    for (int i = 0; i < 4; i++) l1[i] = pick(l0[2*i], l0[2*i+1]);
    for (int i = 0; i < 2; i++) l2[i] = pick(l1[2*i], l1[2*i+1]);
    l3 = pick(l2[0], l2[1]);
  end

  assign max_valid = l3.v;
  assign max_val   = l3.val;
  assign max_idx   = l3.idx;
  assign max_sel   = l3.sel;

endmodule
