// ss_serial_accum: serially processed sparse-sparse layer with
// accumulator routing (used here for the fully connected layer).
//
// One non-zero activation (8-bit value, input index) enters per cycle. Its
// index addresses a row of the augmented weight tensor (wt_mem with a single
// read port) holding N (weight, Kernel ID) pairs; the N weights are
// multiplied by the activation and each product is steered by a
// multiplexor network, by its Kernel ID, to one of OUT accumulators. The N
// Kernel IDs of a row come from N different complementary sets and are
// therefore distinct, so the N updates never collide; an assertion checks
// this. Activations with value 0 can be skipped by the sender.
//
// Timing: start (one cycle, with no activation in flight) clears the
// accumulators. An activation presented with in_valid in cycle t is read
// from memory in t and added in t+1, so acc reflects it from cycle t+2;
// busy is high while an activation is in flight. One activation per cycle.
//
// From the paper: serial processing of activations with products routed by
// Kernel ID through a multiplexor network to accumulators, and the 1600 ->
// 1500 size of the speech network's hidden linear layer. This design's
// choices: N=75 (95% weight sparsity of 1500 outputs), 24-bit accumulators,
// the two-cycle pipeline and the clear-on-start control.
module ss_serial_accum
  import cs_pkg::*;
#(
  parameter int unsigned IN  = 1600,
  parameter int unsigned OUT = 1500,
  parameter int unsigned N   = 75,
  localparam int unsigned IDX_W = (IN  <= 2) ? 1 : $clog2(IN),
  localparam int unsigned KID_W = (OUT <= 2) ? 1 : $clog2(OUT),
  localparam int unsigned E_W   = WT_W + KID_W,
  localparam int unsigned ROW_W = N * E_W
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  logic               in_valid,
  input  act_t               act_val,
  input  logic [IDX_W-1:0]   act_idx,
  input  logic               wr_en,
  input  logic [IDX_W-1:0]   wr_addr,
  input  logic [ROW_W-1:0]   wr_data,
  output acc_t [OUT-1:0]     acc,
  output logic               busy
);

  logic [0:0][ROW_W-1:0] rd_data;

  wt_mem #(.K(1), .N(N), .DEPTH(IN), .WT_W(WT_W), .KID_W(KID_W)) u_wmem (
    .clk, .wr_en, .wr_addr, .wr_data, .rd_addr(act_idx), .rd_data
  );

  logic s1_valid;
  act_t s1_val;

  always_ff @(posedge clk) begin
    if (!rst_n) s1_valid <= 1'b0;
    else        s1_valid <= in_valid;
    s1_val <= act_val;
  end

  assign busy = s1_valid;

  // Multiplexor network to the accumulators.
  always_ff @(posedge clk) begin
    if (start) begin
      for (int o = 0; o < OUT; o++) acc[o] <= '0;
    end else if (s1_valid) begin
      for (int j = 0; j < N; j++) begin
        logic [KID_W-1:0] k;
        k = rd_data[0][j*E_W + WT_W +: KID_W];
        if (int'(k) < OUT)
          acc[k] <= acc[k] + acc_t'(mul_aw(s1_val, wt_t'(rd_data[0][j*E_W +: WT_W])));
      end
    end
  end

  // The N Kernel IDs of a row must be distinct.
  always_ff @(posedge clk) begin
    if (rst_n && s1_valid)
      for (int a = 0; a < N; a++)
        for (int b = a + 1; b < N; b++)
          assert (rd_data[0][a*E_W + WT_W +: KID_W] != rd_data[0][b*E_W + WT_W +: KID_W])
            else $error("ss_serial_accum: entries %0d and %0d share a Kernel ID", a, b);
  end

endmodule
