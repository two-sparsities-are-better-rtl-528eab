// tb_ss_conv: checks the sparse-sparse convolution block.
// Two instances: the 3x3 [64:64] block (TAPS=9) and a 1x1 block (TAPS=1),
// both K=8, N=4. Weights follow a complementary layout: entry j of row
// (tap, ch) belongs to set j and kernel j*16 + (5*ch + 3*tap + j) mod 16,
// so each kernel has 4 non-zeros per tap and the 4 adder-tree slots always
// suffice. Random winners (8 distinct channels per tap) are streamed with no
// gaps; every result is compared with a sum computed here from the same
// weights, and out_valid must come 2 cycles after the last tap. Finally
// the 1x1 block gets a layout where 8 sub-products share a kernel, and
// slot_overflow must rise.
module tb_ss_conv;
  import cs_pkg::*;
  localparam int C = 64, F = 64, K = 8, N = 4;

  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n;

  // 3x3 instance
  logic              in_valid, in_first, in_last;
  logic [3:0]        in_tap;
  act_t [K-1:0]      act_val;
  logic [K-1:0][5:0] act_idx;
  logic              wr_en;
  logic [9:0]        wr_addr;
  logic [N*14-1:0]   wr_data;
  logic              out_valid, ovf;
  acc_t [F-1:0]      out_sum;

  ss_conv #(.C(C), .F(F), .K(K), .N(N), .TAPS(9)) dut (
    .clk, .rst_n, .in_valid, .in_first, .in_last, .in_tap, .act_val, .act_idx,
    .wr_en, .wr_addr, .wr_data, .out_valid, .out_sum, .slot_overflow(ovf));

  // 1x1 instance
  logic              b_valid, b_wr_en, b_out_valid, b_ovf;
  logic [5:0]        b_wr_addr;
  acc_t [F-1:0]      b_sum;

  ss_conv #(.C(C), .F(F), .K(K), .N(N), .TAPS(1)) dut1 (
    .clk, .rst_n, .in_valid(b_valid), .in_first(1'b1), .in_last(1'b1), .in_tap(1'b0),
    .act_val, .act_idx, .wr_en(b_wr_en), .wr_addr(b_wr_addr), .wr_data,
    .out_valid(b_out_valid), .out_sum(b_sum), .slot_overflow(b_ovf));

  int checks = 0, failures = 0;
  int wv [9*C][N];
  int wk [9*C][N];

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // expected results, queued in issue order
  longint exp_m [64][F];
  int     exp_t [64];
  int     wp = 0, rp = 0;
  int     cyc = 0;
  always @(posedge clk) cyc++;

  // compare results as they appear
  always @(negedge clk) begin
    if (rst_n && out_valid) begin
      checks++;
      if (rp == wp) begin failures++; $display("unexpected 3x3 result at cycle %0d", cyc); end
      else begin
        longint e [F];
        e = exp_m[rp % 64];
        if (cyc - exp_t[rp % 64] != 2) begin
          failures++;
          $display("3x3 result latency wrong");
        end
        for (int f = 0; f < F; f++) begin
          checks++;
          if (longint'(out_sum[f]) != e[f]) begin
            failures++;
            if (failures < 10) $display("3x3 f=%0d got %0d exp %0d", f, out_sum[f], e[f]);
          end
        end
        rp++;
      end
    end
  end

  longint b_exp_m [64][F];
  int     bwp = 0, brp = 0;
  always @(negedge clk) begin
    if (rst_n && b_out_valid && brp != bwp) begin
      longint e [F];
      e = b_exp_m[brp % 64];
      brp++;
      for (int f = 0; f < F; f++) begin
        checks++;
        if (longint'(b_sum[f]) != e[f]) begin failures++; if (failures < 5) $display("1x1 f=%0d got %0d exp %0d", f, b_sum[f], e[f]); end
      end
    end
  end

  task automatic pick_winners();
    int used [C];
    foreach (used[i]) used[i] = 0;
    for (int p = 0; p < K; p++) begin
      int ch;
      do ch = $urandom_range(C - 1); while (used[ch]);
      used[ch] = 1;
      act_idx[p] = 6'(ch);
      act_val[p] = act_t'($urandom_range(255));
    end
  endtask

  initial begin
    rst_n = 0; in_valid = 0; in_first = 0; in_last = 0; in_tap = 0;
    act_val = '0; act_idx = '0; wr_en = 0; wr_addr = '0; wr_data = '0;
    b_valid = 0; b_wr_en = 0; b_wr_addr = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // load weights (rows 0..63 also go to the 1x1 instance)
    for (int r = 0; r < 9 * C; r++) begin
      int tap, ch;
      tap = r / C; ch = r % C;
      for (int j = 0; j < N; j++) begin
        wk[r][j] = j * 16 + (5 * ch + 3 * tap + j) % 16;
        wv[r][j] = $urandom_range(255) - 128;
        wr_data[j*14 +: 14] = {6'(wk[r][j]), 8'(wv[r][j])};
      end
      wr_en = 1; wr_addr = 10'(r);
      b_wr_en = (r < C); b_wr_addr = 6'(r);
      @(negedge clk);
    end
    wr_en = 0; b_wr_en = 0;
    // 3x3: 40 locations, taps back to back
    for (int loc = 0; loc < 40; loc++) begin
      longint e [F];
      foreach (e[f]) e[f] = 0;
      for (int tap = 0; tap < 9; tap++) begin
        pick_winners();
        for (int p = 0; p < K; p++)
          for (int j = 0; j < N; j++)
            e[wk[tap*C + act_idx[p]][j]] += longint'(act_val[p]) * wv[tap*C + act_idx[p]][j];
        in_valid = 1; in_tap = 4'(tap); in_first = (tap == 0); in_last = (tap == 8);
        if (tap == 8) begin
          exp_m[wp % 64] = e;
          exp_t[wp % 64] = cyc;
          wp++;
        end
        @(negedge clk);
        if (loc % 7 == 3) begin
          in_valid = 0;
          @(negedge clk);
        end
      end
    end
    in_valid = 0;
    // 1x1: one location per cycle
    for (int t = 0; t < 40; t++) begin
      longint e [F];
      foreach (e[f]) e[f] = 0;
      pick_winners();
      for (int p = 0; p < K; p++)
        for (int j = 0; j < N; j++)
          e[wk[act_idx[p]][j]] += longint'(act_val[p]) * wv[act_idx[p]][j];
      b_exp_m[bwp % 64] = e;
      bwp++;
      b_valid = 1;
      @(negedge clk);
    end
    b_valid = 0;
    repeat (4) @(negedge clk);
    checks += 4;
    if (rp != wp || brp != bwp || wp != 40 || bwp != 40) failures++;
    if (ovf || b_ovf) failures++;
    // overflow: every channel's entry j goes to kernel 16*j
    for (int r = 0; r < C; r++) begin
      for (int j = 0; j < N; j++) wr_data[j*14 +: 14] = {6'(16 * j), 8'd1};
      b_wr_en = 1; b_wr_addr = 6'(r);
      @(negedge clk);
    end
    b_wr_en = 0;
    pick_winners();
    b_valid = 1;
    @(negedge clk);
    b_valid = 0;
    repeat (2) @(negedge clk);
    if (!b_ovf) failures++;
    if (ovf) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
