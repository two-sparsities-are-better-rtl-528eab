// tb_sd_conv: checks the sparse-dense stem block at its full size
// (7x7x3 patch, 64 filters, 5 non-zero blocks per filter, 8 sets).
// Layout: in set s, the i-th of 45 used positions is (10*i + 3*s) mod 49
// and belongs to kernel 9*s + i/5 with slot i mod 5 (kernels >= 64 and the
// 4 spare positions are marked empty). Random patches are streamed one per
// cycle; each result must match a sum computed here and appear one cycle
// after its patch.
module tb_sd_conv;
  import cs_pkg::*;
  localparam int KW = 7, CB = 3, F = 64, NZ = 5, SETS = 8, POS = 49;

  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n, in_valid, wr_en, out_valid;
  act_t [POS*CB-1:0] patch;
  logic [8:0]  wr_addr;
  logic [33:0] wr_data;   // 1 + 3 + 6 + 24
  acc_t [F-1:0] out_sum;

  sd_conv #(.KW(KW), .CB(CB), .F(F), .NZ(NZ), .SETS(SETS)) dut (.*);

  int checks = 0, failures = 0;
  int ek [SETS*POS];     // kernel or -1
  int ew [SETS*POS][CB];

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  longint exp_m [F];
  logic   exp_v;

  always @(negedge clk) begin
    if (rst_n && exp_v) begin
      checks++;
      if (!out_valid) failures++;
      for (int f = 0; f < F; f++) begin
        checks++;
        if (longint'(out_sum[f]) != exp_m[f]) begin
          failures++;
          if (failures < 10) $display("f=%0d got %0d exp %0d", f, out_sum[f], exp_m[f]);
        end
      end
    end
  end

  initial begin
    rst_n = 0; in_valid = 0; wr_en = 0; wr_addr = '0; wr_data = '0; patch = '0; exp_v = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    foreach (ek[e]) ek[e] = -1;
    for (int s = 0; s < SETS; s++)
      for (int i = 0; i < 45; i++) begin
        int q, k;
        q = (10 * i + 3 * s) % POS;
        k = 9 * s + i / 5;
        if (k < F) begin
          ek[s*POS + q] = k;
          for (int c = 0; c < CB; c++) ew[s*POS + q][c] = $urandom_range(255) - 128;
        end
      end
    for (int e = 0; e < SETS * POS; e++) begin
      int s, q, i;
      s = e / POS; q = e % POS;
      i = 0;
      while ((10 * i + 3 * s) % POS != q) i++;   // inverse of the position map
      wr_data = '0;
      if (ek[e] >= 0) begin
        wr_data[33] = 1'b1;
        wr_data[32:30] = 3'(i % 5);
        wr_data[29:24] = 6'(ek[e]);
        for (int c = 0; c < CB; c++) wr_data[c*8 +: 8] = 8'(ew[e][c]);
      end else begin
        wr_data[29:0] = 30'($urandom);  // junk in an empty entry must be ignored
      end
      wr_en = 1; wr_addr = 9'(e);
      @(negedge clk);
    end
    wr_en = 0;
    for (int t = 0; t < 60; t++) begin
      longint e [F];
      foreach (e[f]) e[f] = 0;
      for (int i = 0; i < POS * CB; i++) patch[i] = act_t'($urandom_range(255));
      for (int x = 0; x < SETS * POS; x++)
        if (ek[x] >= 0)
          for (int c = 0; c < CB; c++) e[ek[x]] += longint'(patch[(x % POS) * CB + c]) * ew[x][c];
      in_valid = 1;
      @(negedge clk);
      exp_m = e;
      exp_v = 1;
      if (t % 5 == 4) begin
        in_valid = 0;
        @(negedge clk);
        exp_v = 0;
      end
    end
    in_valid = 0;
    @(negedge clk);
    exp_v = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
