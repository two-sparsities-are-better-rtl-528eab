// kwta_local: local k-winners-take-all over one 64-channel vector.
//
// Finds the K largest of the 64 channel values of one spatial location and
// reports them with their channel indices, largest first. The vector is
// split into 8 sub-vectors of 8. Each sub-vector is sorted by a sort8
// network (19 comparators, depth 6) and loaded as a whole into one of 8
// FIFOs, its largest element at the head. Then, K times, a three-level
// comparator tree (max8_tree) picks the largest of the 8 FIFO heads, the
// winner is written to the output vector and that FIFO is popped, exposing
// its next largest element. Only the top K have to come out, so the rest of
// each sub-vector is never ordered against the others.
//
// Two loading structures, chosen by PARALLEL_LOAD:
//   0  serial bursts: the convolution delivers the vector as 8 bursts of 8
//      (in_valid, in_burst, in_val); one sort8 sorts each burst and the
//      burst index selects the FIFO. Element e of burst b is channel 8b+e.
//      Selection starts after burst 7 has been loaded.
//   1  parallel: the whole vector arrives in one cycle (in_vec_valid,
//      in_vec); 8 sort8 instances load all 8 FIFOs at once.
// Timing: selection takes K cycles after the last load; out_valid is high
// for one cycle after that, with out_val/out_idx holding the K winners. So a
// vector costs 8 + K + 1 cycles in serial mode and 1 + K + 1 in parallel
// mode. in_ready is high while a new burst or vector may be loaded. Ties are
// broken towards the lower channel index.
//
// From the paper: the sub-vector sorting networks, the eight FIFOs loaded
// through the burst-index multiplexer, the find-max-of-8 tree with the
// FIFO pop index, the K-fold repetition and the parallel-load variant. This
// design's own choices: the cycle timing, tie rule and the in_ready rule (no
// loading during selection).
module kwta_local
  import cs_pkg::*;
#(
  parameter int unsigned K             = 8,
  parameter bit          PARALLEL_LOAD = 1'b0,
  localparam int unsigned M     = 8,      // sub-vectors / FIFOs
  localparam int unsigned G     = 8,      // elements per sub-vector
  localparam int unsigned C     = M * G,  // channels
  localparam int unsigned IDX_W = 6,
  localparam int unsigned E_W   = ACT_W + IDX_W,
  localparam int unsigned KC_W  = $clog2(K + 1)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // serial bursts (PARALLEL_LOAD = 0)
  input  logic                    in_valid,
  input  logic [2:0]              in_burst,
  input  act_t [G-1:0]            in_val,
  // whole vector (PARALLEL_LOAD = 1)
  input  logic                    in_vec_valid,
  input  act_t [C-1:0]            in_vec,
  output logic                    in_ready,
  // winners
  output logic                    out_valid,
  output act_t [K-1:0]            out_val,
  output logic [K-1:0][IDX_W-1:0] out_idx
);

  typedef enum logic [1:0] {S_LOAD, S_SEL, S_OUT} state_t;
  state_t state;

  // ---- sort and load ----------------------------------------------------
  logic [M-1:0]                  f_load;
  logic [M-1:0][G-1:0][E_W-1:0]  f_data;
  logic [M-1:0]                  f_pop;
  logic [M-1:0][E_W-1:0]         f_head;
  logic [M-1:0]                  f_hv;
  logic                          last_load;

  if (PARALLEL_LOAD) begin : g_par
    for (genvar m = 0; m < M; m++) begin : g_sort
      act_t [G-1:0]            sv;
      logic [G-1:0][IDX_W-1:0] si;
      act_t [G-1:0]            ov;
      logic [G-1:0][IDX_W-1:0] oi;
      always_comb
        for (int e = 0; e < G; e++) begin
          sv[e] = in_vec[m*G + e];
          si[e] = IDX_W'(m*G + e);
        end
      sort8 #(.IDX_W(IDX_W)) u_sort (.in_val(sv), .in_idx(si), .out_val(ov), .out_idx(oi));
      always_comb begin
        f_load[m] = in_vec_valid && in_ready;
        for (int e = 0; e < G; e++) f_data[m][e] = {ov[e], oi[e]};
      end
    end
    assign last_load = in_vec_valid && in_ready;
  end else begin : g_ser
    logic [G-1:0][IDX_W-1:0] si;
    act_t [G-1:0]            ov;
    logic [G-1:0][IDX_W-1:0] oi;
    always_comb
      for (int e = 0; e < G; e++) si[e] = {in_burst, 3'(e)};
    sort8 #(.IDX_W(IDX_W)) u_sort (.in_val(in_val), .in_idx(si), .out_val(ov), .out_idx(oi));
    // Mux8: the burst index steers the sorted burst to its FIFO.
    always_comb
      for (int m = 0; m < M; m++) begin
        f_load[m] = in_valid && in_ready && (in_burst == 3'(m));
        for (int e = 0; e < G; e++) f_data[m][e] = {ov[e], oi[e]};
      end
    assign last_load = in_valid && in_ready && (in_burst == 3'(M - 1));
  end

  for (genvar m = 0; m < M; m++) begin : g_fifo
    topk_fifo #(.DEPTH(G), .ENTRY_W(E_W)) u_fifo (
      .clk, .rst_n, .load(f_load[m]), .load_data(f_data[m]), .pop(f_pop[m]),
      .head(f_head[m]), .head_valid(f_hv[m])
    );
  end

  // ---- find max of 8, repeated K times ------------------------------------
  act_t [M-1:0]            h_val;
  logic [M-1:0][IDX_W-1:0] h_idx;
  logic                    mx_valid;
  act_t                    mx_val;
  logic [IDX_W-1:0]        mx_idx;
  logic [2:0]              mx_sel;

  always_comb
    for (int m = 0; m < M; m++) begin
      h_val[m] = f_head[m][E_W-1 -: ACT_W];
      h_idx[m] = f_head[m][IDX_W-1:0];
    end

  max8_tree #(.IDX_W(IDX_W)) u_max (
    .valid(f_hv), .val(h_val), .idx(h_idx),
    .max_valid(mx_valid), .max_val(mx_val), .max_idx(mx_idx), .max_sel(mx_sel)
  );

  logic [KC_W-1:0] nsel;

  always_comb
    for (int m = 0; m < M; m++) f_pop[m] = (state == S_SEL) && (mx_sel == 3'(m));

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state     <= S_LOAD;
      nsel      <= '0;
      out_valid <= 1'b0;
      out_val   <= '0;
      out_idx   <= '0;
    end else begin
      out_valid <= 1'b0;
      unique case (state)
        S_LOAD: if (last_load) begin
          state <= S_SEL;
          nsel  <= '0;
        end
        S_SEL: begin
          out_val[nsel] <= mx_valid ? mx_val : '0;
          out_idx[nsel] <= mx_idx;
          nsel <= nsel + 1'b1;
          if (nsel == KC_W'(K - 1)) state <= S_OUT;
        end
        S_OUT: begin
          out_valid <= 1'b1;
          state     <= S_LOAD;
        end
        default: state <= S_LOAD;
      endcase
    end
  end

  assign in_ready = (state == S_LOAD);

endmodule
