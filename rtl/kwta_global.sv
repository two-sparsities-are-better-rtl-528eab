// kwta_global: histogram-based global k-winners-take-all.
//
// Keeps the K largest of NELEM 8-bit activations (zeroing the rest) without
// sorting. The activation vector sits in AMem as BLOCKS = NELEM/P blocks of
// P values. The search has three phases:
//   HIST   BLOCKS cycles: block b is read and each of its P values
//          increments its own bin in one of P histogram memories (256 bins
//          of HIST_W bits each, one memory per lane so the P increments of a
//          cycle never collide);
//   FIND   from bin 255 down, one bin per cycle, the P counts of the bin
//          are added to a running total; the first bin at which the total
//          reaches K is the threshold (0 if it never does);
//   APPLY  BLOCKS cycles: block b is read again and sent out with every
//          value below the threshold replaced by 0, with its block address
//          (element index = out_addr*P + lane). The histogram bins are
//          cleared in the same pass.
// Values equal to the threshold pass, so ties can let more than K through.
// After reset the block spends 256 cycles clearing the histograms (busy).
//
// Interface: load AMem with wr_en/wr_addr/wr_data while idle, then pulse
// start. k_sel selects K for this run (0 means the parameter K). out_valid
// marks the BLOCKS output cycles; done pulses after the last one, with
// thresh holding the threshold.
//
// From the paper: AMem of 300 five-element blocks, five 256 x 12b histogram
// memories, the top-down cumulative search to K = 225 and the >= compare.
// This design's own choices: the per-phase cycle timing, the reset clear,
// clearing during APPLY, threshold 0 when the count never reaches K, and
// the run-time k_sel.
module kwta_global
  import cs_pkg::*;
#(
  parameter int unsigned NELEM  = 1500,
  parameter int unsigned P      = 5,
  parameter int unsigned K      = 225,
  parameter int unsigned HIST_W = 12,
  localparam int unsigned BLOCKS = NELEM / P,
  localparam int unsigned BA_W   = (BLOCKS <= 2) ? 1 : $clog2(BLOCKS),
  localparam int unsigned K_W    = $clog2(NELEM + 1),
  localparam int unsigned BINS   = 1 << ACT_W,
  localparam int unsigned SUM_W  = K_W + 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              wr_en,
  input  logic [BA_W-1:0]   wr_addr,
  input  act_t [P-1:0]      wr_data,
  input  logic              start,
  input  logic [K_W-1:0]    k_sel,
  output logic              out_valid,
  output logic [BA_W-1:0]   out_addr,
  output act_t [P-1:0]      out_val,
  output act_t              thresh,
  output logic              done,
  output logic              busy
);

  typedef enum logic [2:0] {S_CLEAR, S_IDLE, S_HIST, S_FIND, S_APPLY} state_t;
  state_t state;

  act_t [P-1:0]      amem [BLOCKS];
  logic [HIST_W-1:0] hist [P][BINS];

  logic [BA_W-1:0]   cnt;      // block counter
  logic [ACT_W:0]    bin;      // bin counter, 9 bits so the clear can reach 256
  logic [SUM_W-1:0]  accum;
  logic [K_W-1:0]    k_run;

  always_ff @(posedge clk) begin
    if (wr_en && state == S_IDLE) amem[wr_addr] <= wr_data;
  end

  // Sum of the P histogram counts of the current bin.
  logic [SUM_W-1:0] bin_total;
  always_comb begin
    bin_total = '0;
    for (int l = 0; l < P; l++) bin_total = bin_total + SUM_W'(hist[l][bin[ACT_W-1:0]]);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state     <= S_CLEAR;
      cnt       <= '0;
      bin       <= '0;
      accum     <= '0;
      thresh    <= '0;
      k_run     <= K_W'(K);
      out_valid <= 1'b0;
      out_addr  <= '0;
      out_val   <= '0;
      done      <= 1'b0;
    end else begin
      out_valid <= 1'b0;
      done      <= 1'b0;
      unique case (state)
        S_CLEAR: begin
          for (int l = 0; l < P; l++) hist[l][bin[ACT_W-1:0]] <= '0;
          bin <= bin + 1'b1;
          if (bin == 9'(BINS - 1)) state <= S_IDLE;
        end
        S_IDLE: begin
          if (start) begin
            k_run <= (k_sel != '0) ? k_sel : K_W'(K);
            cnt   <= '0;
            state <= S_HIST;
          end
        end
        S_HIST: begin
          for (int l = 0; l < P; l++) hist[l][amem[cnt][l]] <= hist[l][amem[cnt][l]] + 1'b1;
          cnt <= cnt + 1'b1;
          if (cnt == BA_W'(BLOCKS - 1)) begin
            bin   <= 9'(BINS - 1);
            accum <= '0;
            state <= S_FIND;
          end
        end
        S_FIND: begin
          accum <= accum + bin_total;
          if (accum + bin_total >= SUM_W'(k_run) || bin == '0) begin
            thresh <= (accum + bin_total >= SUM_W'(k_run)) ? bin[ACT_W-1:0] : '0;
            cnt    <= '0;
            bin    <= '0;
            state  <= S_APPLY;
          end else begin
            bin <= bin - 1'b1;
          end
        end
        S_APPLY: begin
          out_valid <= 1'b1;
          out_addr  <= cnt;
          for (int l = 0; l < P; l++) out_val[l] <= (amem[cnt][l] >= thresh) ? amem[cnt][l] : '0;
          if (!bin[ACT_W]) begin
            for (int l = 0; l < P; l++) hist[l][bin[ACT_W-1:0]] <= '0;
            bin <= bin + 1'b1;
          end
          cnt <= cnt + 1'b1;
          if (cnt == BA_W'(BLOCKS - 1)) begin
            state <= (bin[ACT_W] || bin == 9'(BINS - 1)) ? S_IDLE : S_CLEAR;
            done  <= 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);

endmodule
