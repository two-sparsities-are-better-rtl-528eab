// sd_conv: sparse-dense convolution block (network stem), one output
// location per cycle.
//
// The input is a dense patch of KW*KW spatial positions with CB channels
// each (a 7x7x3 RGB patch by default). The F sparse kernels are combined
// offline into SETS dense kernels whose non-zeros do not collide
// (Complementary Sparsity in the spatial dimensions). A CB-element channel
// block is either fully non-zero or fully zero, so each (set, position)
// entry holds CB weights that share one Kernel ID. Every cycle all
// SETS*KW*KW entries are used: the CB products of an entry are added
// (Multiply), the block sum is routed by Kernel ID (Route) to input `slot`
// of that kernel's adder tree, and the F adder trees give the F outputs
// (Sum). Because the input is dense, every entry is used in every cycle and
// the slots are fixed: they are computed offline and stored with the
// Kernel ID, so no run-time arbiter is needed.
//
// Entry layout (wr_data): {vld, slot[SLOT_W], kid[KID_W], w[CB-1] .. w[0]}
// with w[c] at bits [c*8 +: 8]; entry e = set*KW*KW + position, position =
// row*KW + col; patch element (position, c) is patch[position*CB + c].
// Timing: out_sum/out_valid register the result one cycle after in_valid.
//
// From the paper: the combine/multiply/route/sum structure, spatial
// complementary sets, the 3-element input block and the 7x7x3 stem with
// NZ=5 non-zero blocks per kernel. This design's own choices: SETS=8, the
// stored slot, NZ adder inputs per kernel, and the load port.
module sd_conv
  import cs_pkg::*;
#(
  parameter int unsigned KW   = 7,
  parameter int unsigned CB   = 3,
  parameter int unsigned F    = 64,
  parameter int unsigned NZ   = 5,
  parameter int unsigned SETS = 8,
  localparam int unsigned POS    = KW * KW,
  localparam int unsigned NENT   = SETS * POS,
  localparam int unsigned EA_W   = (NENT <= 2) ? 1 : $clog2(NENT),
  localparam int unsigned KID_W  = (F <= 2) ? 1 : $clog2(F),
  localparam int unsigned SLOT_W = (NZ <= 2) ? 1 : $clog2(NZ),
  localparam int unsigned ENT_W  = 1 + SLOT_W + KID_W + CB * WT_W,
  localparam int unsigned BS_W   = PROD_W + $clog2(CB + 1)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  in_valid,
  input  act_t [POS*CB-1:0]     patch,
  input  logic                  wr_en,
  input  logic [EA_W-1:0]       wr_addr,
  input  logic [ENT_W-1:0]      wr_data,
  output logic                  out_valid,
  output acc_t [F-1:0]          out_sum
);

  // Combined dense weight entries, held in registers so all are read at once.
  logic [ENT_W-1:0] ent [NENT];

  always_ff @(posedge clk) begin
    if (wr_en) ent[wr_addr] <= wr_data;
  end

  // Multiply: one block sum per entry.
  logic [NENT-1:0]                  b_valid;
  logic signed [NENT-1:0][BS_W-1:0] b_sum;
  logic [NENT-1:0][KID_W-1:0]       b_kid;
  logic [NENT-1:0][SLOT_W-1:0]      b_slot;

  always_comb begin
    for (int e = 0; e < NENT; e++) begin
      int unsigned pos;
      logic signed [BS_W-1:0] acc;
      pos = e % POS;
      acc = '0;
      for (int c = 0; c < CB; c++)
        acc = acc + BS_W'(mul_aw(patch[pos*CB + c], wt_t'(ent[e][c*WT_W +: WT_W])));
      b_sum[e]   = acc;
      b_kid[e]   = ent[e][CB*WT_W +: KID_W];
      b_slot[e]  = ent[e][CB*WT_W + KID_W +: SLOT_W];
      b_valid[e] = ent[e][ENT_W-1];
    end
  end

  // Route and Sum.
  acc_t [F-1:0] tree_sum;

  atree_router #(.M(NENT), .F(F), .SLOTS(NZ), .KID_W(KID_W), .IN_W(BS_W), .OUT_W(ACC_W)) u_route (
    .valid(b_valid), .prod(b_sum), .kid(b_kid), .slot(b_slot), .sum(tree_sum)
  );

  always_ff @(posedge clk) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;
    if (in_valid) out_sum <= tree_sum;
  end

endmodule
