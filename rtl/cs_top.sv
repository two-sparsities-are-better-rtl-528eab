// cs_top: a small sparse network built from the Complementary Sparsity blocks.
//
// The chain, for one frame of LOCS output locations:
//   1. sd_conv      sparse-dense 7x7x3 stem on a dense input patch -> 64
//                   channel sums, requantised to 8 bits;
//   2. kwta_local   (serial bursts) keeps the K=8 largest of the 64;
//   3. ss_conv      sparse-sparse 3x3 [64:64]: steps 1-2 are repeated for the
//                   9 taps of one conv location, each tap's 8 winners
//                   go through the K-ported weight memory, multiply,
//                   prefix-sum arbitration and adder-tree routing, and the
//                   9 partial results are accumulated;
//   4. maxpool      2x2 max pooling: steps 1-3 are repeated for the 4 conv
//                   locations of one pooled location and the requantised
//                   results are reduced channel by channel;
//   5. kwta_local   (parallel load) keeps the 8 largest of the 64 pooled
//                   values;
//   6. ss_serial_accum  fully connected 1600 -> 1500 layer: the non-zero
//                   winners of every location are fed one per cycle with
//                   flattened index location*64 + channel (zero winners
//                   are skipped), each product routed by Kernel ID to its
//                   accumulator;
//   7. kwta_global  after the last location the 1500 requantised
//                   accumulators are written to AMem, 5 per cycle, and the
//                   histogram search keeps the 225 largest.
// A frame therefore needs LOCS*4*9 dense patches, ordered by pooled
// location, then conv location in the window, then tap, on patch_valid/patch (a
// patch is taken in a cycle where patch_ready is high). The global winners
// leave on out_valid/out_addr/out_val, 5 per cycle, and done pulses at the
// end. start begins a frame (it clears the linear accumulators); the
// weights of the three weight memories are loaded beforehand through their
// load ports.
//
// Control is one sequential state machine: each step waits for the one
// before, layers do not overlap. What is the paper's and what is not: the
// blocks and their sizes follow the paper (see each block); the
// composition of a 7x7 stem, a 3x3 layer, 2x2 pooling and the 1600 -> 1500
// linear layer with global k-WTA into one chain, the requantisation (ReLU, shift,
// saturate; shift amounts are parameters), the flattened index and the
// sequential control are this design's.
module cs_top
  import cs_pkg::*;
#(
  parameter int unsigned LOCS       = 25,
  parameter int unsigned SHIFT_STEM = 7,
  parameter int unsigned SHIFT_CONV = 8,
  parameter int unsigned SHIFT_LIN  = 6,
  // block sizes
  localparam int unsigned C      = 64,
  localparam int unsigned KWIN   = 8,     // local k-WTA winners
  localparam int unsigned NCONV  = 4,     // complementary sets in the 3x3 layer
  localparam int unsigned TAPS   = 9,
  localparam int unsigned POOL   = 4,     // conv locations per pooled location
  localparam int unsigned KW     = 7,
  localparam int unsigned CB     = 3,
  localparam int unsigned NZ     = 5,
  localparam int unsigned SETS   = 8,
  localparam int unsigned LIN_IN = 1600,
  localparam int unsigned LIN_OUT= 1500,
  localparam int unsigned NLIN   = 75,
  localparam int unsigned GP     = 5,     // global k-WTA lanes
  localparam int unsigned GK     = 225,
  // derived widths
  localparam int unsigned PATCH  = KW * KW * CB,
  localparam int unsigned SD_EA_W  = $clog2(SETS * KW * KW),
  localparam int unsigned SD_ENT_W = 1 + $clog2(NZ) + $clog2(C) + CB * WT_W,
  localparam int unsigned CV_AW    = $clog2(C * TAPS),
  localparam int unsigned CV_ROW_W = NCONV * (WT_W + $clog2(C)),
  localparam int unsigned LI_AW    = $clog2(LIN_IN),
  localparam int unsigned LI_ROW_W = NLIN * (WT_W + $clog2(LIN_OUT)),
  localparam int unsigned BLOCKS   = LIN_OUT / GP,
  localparam int unsigned BA_W     = $clog2(BLOCKS),
  localparam int unsigned GK_W     = $clog2(LIN_OUT + 1)
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   start,
  output logic                   busy,
  // dense input patches
  input  logic                   patch_valid,
  input  act_t [PATCH-1:0]       patch,
  output logic                   patch_ready,
  // weight load ports
  input  logic                   sd_wr_en,
  input  logic [SD_EA_W-1:0]     sd_wr_addr,
  input  logic [SD_ENT_W-1:0]    sd_wr_data,
  input  logic                   cv_wr_en,
  input  logic [CV_AW-1:0]       cv_wr_addr,
  input  logic [CV_ROW_W-1:0]    cv_wr_data,
  input  logic                   li_wr_en,
  input  logic [LI_AW-1:0]       li_wr_addr,
  input  logic [LI_ROW_W-1:0]    li_wr_data,
  input  logic [GK_W-1:0]        k_sel,
  // global k-WTA winners
  output logic                   out_valid,
  output logic [BA_W-1:0]        out_addr,
  output act_t [GP-1:0]          out_val,
  output act_t                   thresh,
  output logic                   done,
  output logic                   slot_overflow
);

  typedef enum logic [3:0] {
    T_IDLE, T_PATCH, T_STEM, T_BURST, T_KW1, T_CONV, T_KW2, T_LIN,
    T_DRAIN, T_FILL, T_GLOBAL
  } tstate_t;
  tstate_t state;

  localparam int unsigned LOC_W = $clog2(LOCS + 1);

  logic [LOC_W-1:0]  loc;
  logic [3:0]        tap;
  logic [1:0]        sub;      // conv location within the pooling window
  logic [2:0]        burst;
  logic [3:0]        widx;     // linear feed position among the K winners
  logic [BA_W-1:0]   fblk;     // AMem fill block

  // ---- stem ---------------------------------------------------------------
  logic          sd_out_valid;
  acc_t [C-1:0]  sd_sum;
  act_t [C-1:0]  stem_vec;

  sd_conv #(.KW(KW), .CB(CB), .F(C), .NZ(NZ), .SETS(SETS)) u_stem (
    .clk, .rst_n, .in_valid(patch_valid && patch_ready), .patch,
    .wr_en(sd_wr_en), .wr_addr(sd_wr_addr), .wr_data(sd_wr_data),
    .out_valid(sd_out_valid), .out_sum(sd_sum)
  );

  // ---- local k-WTA 1 (serial bursts) -------------------------------------
  act_t [7:0]               k1_burst_val;
  logic                     k1_in_ready, k1_out_valid;
  act_t [KWIN-1:0]          k1_val;
  logic [KWIN-1:0][5:0]     k1_idx;

  always_comb
    for (int e = 0; e < 8; e++) k1_burst_val[e] = stem_vec[burst*8 + e];

  kwta_local #(.K(KWIN), .PARALLEL_LOAD(1'b0)) u_kwta1 (
    .clk, .rst_n,
    .in_valid(state == T_BURST), .in_burst(burst), .in_val(k1_burst_val),
    .in_vec_valid(1'b0), .in_vec('0), .in_ready(k1_in_ready),
    .out_valid(k1_out_valid), .out_val(k1_val), .out_idx(k1_idx)
  );

  // ---- sparse-sparse 3x3 conv ---------------------------------------------
  logic          cv_out_valid;
  acc_t [C-1:0]  cv_sum;
  act_t [C-1:0]  cv_vec;

  ss_conv #(.C(C), .F(C), .K(KWIN), .N(NCONV), .TAPS(TAPS)) u_conv (
    .clk, .rst_n,
    .in_valid(k1_out_valid), .in_first(tap == 4'd0), .in_last(tap == 4'(TAPS - 1)),
    .in_tap(tap), .act_val(k1_val), .act_idx(k1_idx),
    .wr_en(cv_wr_en), .wr_addr(cv_wr_addr), .wr_data(cv_wr_data),
    .out_valid(cv_out_valid), .out_sum(cv_sum), .slot_overflow
  );

  always_comb
    for (int c = 0; c < C; c++) cv_vec[c] = requant(cv_sum[c], SHIFT_CONV);

  // ---- 2x2 max pooling -------------------------------------------------------
  logic          mp_out_valid;
  act_t [C-1:0]  mp_vec;

  maxpool #(.C(C)) u_pool (
    .clk, .rst_n,
    .in_valid(cv_out_valid), .in_first(sub == 2'd0), .in_last(sub == 2'(POOL - 1)),
    .in_vec(cv_vec), .out_valid(mp_out_valid), .out_vec(mp_vec)
  );

  // ---- local k-WTA 2 (parallel load) -------------------------------------
  logic                  k2_in_ready, k2_out_valid;
  act_t [KWIN-1:0]       k2_val, w_val;
  logic [KWIN-1:0][5:0]  k2_idx, w_idx;

  kwta_local #(.K(KWIN), .PARALLEL_LOAD(1'b1)) u_kwta2 (
    .clk, .rst_n,
    .in_valid(1'b0), .in_burst(3'd0), .in_val('0),
    .in_vec_valid(mp_out_valid), .in_vec(mp_vec), .in_ready(k2_in_ready),
    .out_valid(k2_out_valid), .out_val(k2_val), .out_idx(k2_idx)
  );

  // ---- linear layer ----------------------------------------------------------
  logic                lin_valid, lin_busy;
  logic [LI_AW-1:0]    lin_idx;
  acc_t [LIN_OUT-1:0]  lin_acc;

  always_comb begin
    lin_valid = (state == T_LIN) && (w_val[widx[2:0]] != '0);
    lin_idx   = LI_AW'(loc) * LI_AW'(C) + LI_AW'(w_idx[widx[2:0]]);
  end

  ss_serial_accum #(.IN(LIN_IN), .OUT(LIN_OUT), .N(NLIN)) u_lin (
    .clk, .rst_n, .start(start && state == T_IDLE),
    .in_valid(lin_valid), .act_val(w_val[widx[2:0]]), .act_idx(lin_idx),
    .wr_en(li_wr_en), .wr_addr(li_wr_addr), .wr_data(li_wr_data),
    .acc(lin_acc), .busy(lin_busy)
  );

  // ---- global k-WTA ---------------------------------------------------------
  act_t [GP-1:0] g_wr_data;
  logic          g_done, g_busy;
  logic          g_started;

  always_comb
    for (int l = 0; l < GP; l++) g_wr_data[l] = requant(lin_acc[fblk*GP + l], SHIFT_LIN);

  kwta_global #(.NELEM(LIN_OUT), .P(GP), .K(GK)) u_gkwta (
    .clk, .rst_n,
    .wr_en(state == T_FILL), .wr_addr(fblk), .wr_data(g_wr_data),
    .start(state == T_GLOBAL && !g_started), .k_sel,
    .out_valid, .out_addr, .out_val, .thresh, .done(g_done), .busy(g_busy)
  );

  // ---- sequencer -----------------------------------------------------------
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state     <= T_IDLE;
      loc       <= '0;
      tap       <= '0;
      sub       <= '0;
      burst     <= '0;
      widx      <= '0;
      fblk      <= '0;
      g_started <= 1'b0;
      done      <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        T_IDLE: if (start) begin
          loc   <= '0;
          tap   <= '0;
          sub   <= '0;
          state <= T_PATCH;
        end
        T_PATCH: if (patch_valid) state <= T_STEM;
        T_STEM: if (sd_out_valid) begin
          for (int c = 0; c < C; c++) stem_vec[c] <= requant(sd_sum[c], SHIFT_STEM);
          burst <= '0;
          state <= T_BURST;
        end
        T_BURST: begin
          burst <= burst + 1'b1;
          if (burst == 3'd7) state <= T_KW1;
        end
        T_KW1: if (k1_out_valid) begin
          // this tap's winners enter ss_conv in this cycle
          if (tap == 4'(TAPS - 1)) begin
            tap   <= '0;
            state <= T_CONV;
          end else begin
            tap   <= tap + 1'b1;
            state <= T_PATCH;
          end
        end
        T_CONV: if (cv_out_valid && sub != 2'(POOL - 1)) begin
          // next conv location of the pooling window
          sub   <= sub + 1'b1;
          state <= T_PATCH;
        end else if (k2_out_valid) begin
          sub   <= '0;
          w_val <= k2_val;
          w_idx <= k2_idx;
          widx  <= '0;
          state <= T_LIN;
        end
        T_LIN: begin
          widx <= widx + 1'b1;
          if (widx == 4'(KWIN - 1)) begin
            if (loc == LOC_W'(LOCS - 1)) begin
              state <= T_DRAIN;
            end else begin
              loc   <= loc + 1'b1;
              state <= T_PATCH;
            end
          end
        end
        T_DRAIN: if (!lin_busy && !lin_valid && !g_busy) begin
          fblk  <= '0;
          state <= T_FILL;
        end
        T_FILL: begin
          fblk <= fblk + 1'b1;
          if (fblk == BA_W'(BLOCKS - 1)) begin
            g_started <= 1'b0;
            state     <= T_GLOBAL;
          end
        end
        T_GLOBAL: begin
          g_started <= 1'b1;
          if (g_done) begin
            done  <= 1'b1;
            state <= T_IDLE;
          end
        end
        default: state <= T_IDLE;
      endcase
    end
  end

  assign patch_ready = (state == T_PATCH);
  assign busy        = (state != T_IDLE);

endmodule
