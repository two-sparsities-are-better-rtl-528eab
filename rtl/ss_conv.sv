// ss_conv: sparse-sparse convolution block (1x1 or WxW), C inputs to F outputs.
//
// Input is one kernel tap per cycle: the K winners of a k-WTA stage, each a
// pair (8-bit value, channel index). For every winner the block reads the
// row tap*C + channel of the augmented weight tensor (wt_mem), which holds
// the N weights that the N complementary kernel sets place at that input
// position, each tagged with its output Kernel ID. The K*N weights are
// multiplied by their activations (the Hadamard step), kid_arbiter assigns
// every sub-product an adder-tree slot by prefix sum over the Kernel IDs,
// and atree_router sums the sub-products of each output kernel. A WxW
// kernel is handled as W*W successive 1x1 steps whose per-kernel sums are
// accumulated in flip-flops; in_first clears the accumulators and in_last
// closes the output location.
//
// Timing: one tap per cycle, fully pipelined. Stage 1 is the synchronous
// weight read; stage 2 multiplies, routes, sums and accumulates. out_valid
// is high for one cycle, two cycles after the in_valid that carried in_last,
// with out_sum holding the F results. A 1x1 [64:64] location therefore
// costs one cycle of throughput and a 3x3 nine, as in the paper.
//
// From the paper: the K-ported tensor of N (weight, Kernel ID) pairs per
// row, the multiply/route/sum structure with a prefix-sum arbiter, the
// defaults C=F=64, K=8, N=4 and the nine serially accumulated 1x1 steps of
// the 3x3 block. This design's own choices: the two-stage pipeline, the
// row address tap*C + channel, SLOTS = N adder inputs per kernel, 24-bit
// accumulators, and the sticky slot_overflow flag. Padding and stride are
// left to whoever supplies the taps.
module ss_conv
  import cs_pkg::*;
#(
  parameter int unsigned C     = 64,
  parameter int unsigned F     = 64,
  parameter int unsigned K     = 8,
  parameter int unsigned N     = 4,
  parameter int unsigned TAPS  = 9,
  parameter int unsigned SLOTS = N,
  localparam int unsigned CI_W   = $clog2(C),
  localparam int unsigned KID_W  = $clog2(F),
  localparam int unsigned TAP_W  = (TAPS <= 2) ? 1 : $clog2(TAPS),
  localparam int unsigned DEPTH  = C * TAPS,
  localparam int unsigned AW     = (DEPTH <= 2) ? 1 : $clog2(DEPTH),
  localparam int unsigned E_W    = WT_W + KID_W,
  localparam int unsigned ROW_W  = N * E_W,
  localparam int unsigned SLOT_W = (SLOTS <= 2) ? 1 : $clog2(SLOTS)
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // one tap of sparse activations
  input  logic                      in_valid,
  input  logic                      in_first,
  input  logic                      in_last,
  input  logic [TAP_W-1:0]          in_tap,
  input  act_t [K-1:0]              act_val,
  input  logic [K-1:0][CI_W-1:0]    act_idx,
  // weight tensor load
  input  logic                      wr_en,
  input  logic [AW-1:0]             wr_addr,
  input  logic [ROW_W-1:0]          wr_data,
  // results
  output logic                      out_valid,
  output acc_t [F-1:0]              out_sum,
  output logic                      slot_overflow
);

  // ---- stage 1: weight fetch --------------------------------------------
  logic [K-1:0][AW-1:0]    rd_addr;
  logic [K-1:0][ROW_W-1:0] rd_data;

  always_comb
    for (int p = 0; p < K; p++)
      rd_addr[p] = AW'(in_tap) * AW'(C) + AW'(act_idx[p]);

  wt_mem #(.K(K), .N(N), .DEPTH(DEPTH), .WT_W(WT_W), .KID_W(KID_W)) u_wmem (
    .clk, .wr_en, .wr_addr, .wr_data, .rd_addr, .rd_data
  );

  logic            s1_valid, s1_first, s1_last;
  act_t [K-1:0]    s1_val;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      s1_valid <= 1'b0;
      s1_first <= 1'b0;
      s1_last  <= 1'b0;
    end else begin
      s1_valid <= in_valid;
      s1_first <= in_first;
      s1_last  <= in_last;
    end
    s1_val <= act_val;
  end

  // ---- stage 2: multiply, arbitrate, route, sum, accumulate -------------
  localparam int unsigned M = K * N;
  logic [M-1:0]               p_valid;
  prod_t [M-1:0]              p_prod;
  logic [M-1:0][KID_W-1:0]    p_kid;
  logic [M-1:0][SLOT_W-1:0]   p_slot;
  logic                       p_ovf;
  acc_t [F-1:0]               tree_sum;

  always_comb begin
    for (int p = 0; p < K; p++)
      for (int j = 0; j < N; j++) begin
        wt_t w;
        w = wt_t'(rd_data[p][j*E_W +: WT_W]);
        p_kid[p*N+j]   = rd_data[p][j*E_W+WT_W +: KID_W];
        p_prod[p*N+j]  = mul_aw(s1_val[p], w);
        p_valid[p*N+j] = s1_valid;
      end
  end

  kid_arbiter #(.M(M), .KID_W(KID_W), .SLOT_W(SLOT_W)) u_arb (
    .valid(p_valid), .kid(p_kid), .slot(p_slot), .overflow(p_ovf)
  );

  atree_router #(.M(M), .F(F), .SLOTS(SLOTS), .KID_W(KID_W), .IN_W(PROD_W), .OUT_W(ACC_W)) u_route (
    .valid(p_valid), .prod(p_prod), .kid(p_kid), .slot(p_slot), .sum(tree_sum)
  );

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid     <= 1'b0;
      slot_overflow <= 1'b0;
      out_sum       <= '0;
    end else begin
      out_valid <= s1_valid && s1_last;
      if (s1_valid) begin
        for (int f = 0; f < F; f++)
          out_sum[f] <= (s1_first ? acc_t'(0) : out_sum[f]) + tree_sum[f];
        if (p_ovf) slot_overflow <= 1'b1;
      end
    end
  end

endmodule
