// wt_mem: K-ported memory holding the augmented weight tensor.
//
// Each row belongs to one input position (channel, or tap*C + channel for a
// WxW kernel), so the memory has C*W^2 rows. A row holds the N weights that
// the overlaid (complementary) kernels place at that position, each weight
// tagged with the Kernel ID of the output channel it belongs to, so one row
// is N*(WT_W+KID_W) bits wide. Entry j of a row sits at bits
// [j*(WT_W+KID_W) +: WT_W+KID_W] as {kid, weight}.
//
// Every non-zero activation processed in parallel needs a row of its own,
// so there are K read ports. Reads are synchronous: the row addressed in
// cycle t appears on rd_data in cycle t+1. A single write port loads the
// tensor before inference; a write and a read of the same row in one cycle
// returns the old row.
//
// The port count, row count and row width follow the paper's weight-tensor
// figure; the one-cycle read and the write port are choices of this design.
// The memory is one array with K read ports; a mapping to dual-ported RAM
// macros would replicate it.
module wt_mem #(
  parameter int unsigned K     = 8,
  parameter int unsigned N     = 4,
  parameter int unsigned DEPTH = 576,
  parameter int unsigned WT_W  = 8,
  parameter int unsigned KID_W = 6,
  localparam int unsigned AW    = (DEPTH <= 2) ? 1 : $clog2(DEPTH),
  localparam int unsigned ROW_W = N * (WT_W + KID_W)
) (
  input  logic                      clk,
  input  logic                      wr_en,
  input  logic [AW-1:0]             wr_addr,
  input  logic [ROW_W-1:0]          wr_data,
  input  logic [K-1:0][AW-1:0]      rd_addr,
  output logic [K-1:0][ROW_W-1:0]   rd_data
);

  logic [ROW_W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
  end

  always_ff @(posedge clk) begin
    for (int p = 0; p < K; p++) rd_data[p] <= mem[rd_addr[p]];
  end

endmodule
