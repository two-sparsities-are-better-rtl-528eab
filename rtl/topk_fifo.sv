// topk_fifo: 8-deep FIFO of (value, index) entries for the local k-WTA.
//
// load writes all DEPTH entries at once (a sorted burst, largest at entry
// 0) and makes entry 0 the head; pop advances the head by one. A load
// replaces whatever was left. head_valid is low once every entry has been
// popped. Entries are ENTRY_W = 8 + 6 = 14 bits, {value, index}, as in the
// paper's k-WTA figure. Load and pop in the same cycle: the load wins.
// Depth and entry width follow the paper; the replace-on-load rule is this
// design's.
module topk_fifo #(
  parameter int unsigned DEPTH   = 8,
  parameter int unsigned ENTRY_W = 14,
  localparam int unsigned PW = $clog2(DEPTH + 1)
) (
  input  logic                           clk,
  input  logic                           rst_n,
  input  logic                           load,
  input  logic [DEPTH-1:0][ENTRY_W-1:0]  load_data,
  input  logic                           pop,
  output logic [ENTRY_W-1:0]             head,
  output logic                           head_valid
);

  logic [DEPTH-1:0][ENTRY_W-1:0] data;
  logic [PW-1:0]                 rd;     // number of entries popped

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      rd <= PW'(DEPTH);
    end else if (load) begin
      data <= load_data;
      rd   <= '0;
    end else if (pop && head_valid) begin
      rd <= rd + 1'b1;
    end
  end

  assign head_valid = (rd < PW'(DEPTH));
  assign head       = head_valid ? data[rd[PW-2:0]] : '0;

endmodule
