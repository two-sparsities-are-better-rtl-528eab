// maxpool: channel-wise max over a pooling window of activation vectors.
//
// What: the MaxPool layers of the GSC network (2x2, stride 2) between its
// convolutions. The window's C-channel vectors arrive one per cycle:
// in_first marks the first vector of a window, in_last the last (for 2x2
// pooling, four vectors). A register per channel keeps the running maximum;
// the first vector loads it, later ones keep the larger value. out_valid
// rises, with out_vec, in the cycle after the in_last vector is taken.
// Activations are unsigned 8-bit, so the max of post-ReLU values is plain
// unsigned compare.
// Paper vs own choices: the paper only names MaxPool in its network table;
// the vector-per-cycle streaming interface, the first/last framing and the
// one-cycle latency are this design's. It is not wired into cs_top, whose
// chain has no pooling layer.
module maxpool
  import cs_pkg::*;
#(
  parameter int unsigned C = 64
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  logic             in_first,
  input  logic             in_last,
  input  act_t [C-1:0]     in_vec,
  output logic             out_valid,
  output act_t [C-1:0]     out_vec
);

  act_t [C-1:0] run_max;
  act_t [C-1:0] nxt_max;

  always_comb begin
    for (int c = 0; c < C; c++)
      nxt_max[c] = (in_first || in_vec[c] > run_max[c]) ? in_vec[c] : run_max[c];
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      run_max   <= '0;
      out_vec   <= '0;
    end else begin
      out_valid <= in_valid && in_last;
      if (in_valid) run_max <= nxt_max;
      if (in_valid && in_last) out_vec <= nxt_max;
    end
  end

endmodule
