// tb_atree_router: checks routing and per-kernel adder trees.
// Builds random sets of sub-products with distinct (Kernel ID, slot) pairs
// and compares every kernel's sum with a sum accumulated here. Also runs
// an odd slot count (5) to exercise the unbalanced tree.
module tb_atree_router;
  import cs_pkg::*;
  localparam int M = 32, F = 64, SLOTS = 4, KID_W = 6, SLOT_W = 2;
  localparam int M2 = 40, F2 = 16, SLOTS2 = 5, KID2_W = 4, SLOT2_W = 3;

  logic [M-1:0]              valid;
  prod_t [M-1:0]             prod;
  logic [M-1:0][KID_W-1:0]   kid;
  logic [M-1:0][SLOT_W-1:0]  slot;
  acc_t [F-1:0]              sum;

  logic [M2-1:0]             valid2;
  prod_t [M2-1:0]            prod2;
  logic [M2-1:0][KID2_W-1:0] kid2;
  logic [M2-1:0][SLOT2_W-1:0] slot2;
  acc_t [F2-1:0]             sum2;

  atree_router #(.M(M), .F(F), .SLOTS(SLOTS), .KID_W(KID_W)) dut (
    .valid, .prod, .kid, .slot, .sum);
  atree_router #(.M(M2), .F(F2), .SLOTS(SLOTS2), .KID_W(KID2_W)) dut2 (
    .valid(valid2), .prod(prod2), .kid(kid2), .slot(slot2), .sum(sum2));

  int checks = 0, failures = 0;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 500; t++) begin
      longint exp [F];
      longint exp2 [F2];
      bit used [F][SLOTS];
      bit used2 [F2][SLOTS2];
      foreach (exp[i]) exp[i] = 0;
      foreach (exp2[i]) exp2[i] = 0;
      foreach (used[i, s]) used[i][s] = 0;
      foreach (used2[i, s]) used2[i][s] = 0;
      for (int j = 0; j < M; j++) begin
        int k, s;
        do begin
          k = $urandom_range((t % 2) ? 7 : F - 1);
          s = $urandom_range(SLOTS - 1);
        end while (used[k][s] && (t % 2 == 0 || j < 32));
        valid[j] = !used[k][s] && ($urandom_range(4) != 0);
        if (valid[j]) used[k][s] = 1;
        kid[j]  = KID_W'(k);
        slot[j] = SLOT_W'(s);
        prod[j] = prod_t'($signed($urandom_range(65535)) - 32768);
        if (valid[j]) exp[k] += longint'(prod[j]);
      end
      for (int j = 0; j < M2; j++) begin
        int k, s;
        k = $urandom_range(F2 - 1);
        s = $urandom_range(SLOTS2 - 1);
        valid2[j] = !used2[k][s];
        if (valid2[j]) used2[k][s] = 1;
        kid2[j]  = KID2_W'(k);
        slot2[j] = SLOT2_W'(s);
        prod2[j] = prod_t'($signed($urandom_range(65535)) - 32768);
        if (valid2[j]) exp2[k] += longint'(prod2[j]);
      end
      #1;
      for (int f = 0; f < F; f++) begin
        checks++;
        if (longint'(sum[f]) != exp[f]) begin
          failures++;
          if (failures < 10) $display("t=%0d f=%0d sum=%0d exp=%0d", t, f, sum[f], exp[f]);
        end
      end
      for (int f = 0; f < F2; f++) begin
        checks++;
        if (longint'(sum2[f]) != exp2[f]) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
