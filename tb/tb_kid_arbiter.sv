// tb_kid_arbiter: checks the prefix-sum slot assignment.
// Random Kernel IDs drawn from a small range (so repeats are common) and
// random valid bits; the expected slot of each sub-product is the number of
// earlier valid sub-products with the same Kernel ID, computed here with a
// per-ID counter table. Overflow is expected when a count passes 3.
module tb_kid_arbiter;
  localparam int M = 32, KID_W = 6, SLOT_W = 2;

  logic [M-1:0]             valid;
  logic [M-1:0][KID_W-1:0]  kid;
  logic [M-1:0][SLOT_W-1:0] slot;
  logic                     overflow;

  kid_arbiter #(.M(M), .KID_W(KID_W), .SLOT_W(SLOT_W)) dut (.*);

  int checks = 0, failures = 0;
  int n_ovf = 0, n_noovf = 0;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 2000; t++) begin
      int seen [64];
      logic exp_ovf;
      int range;
      range = (t % 3 == 0) ? 6 : ((t % 3 == 1) ? 20 : 64);
      for (int j = 0; j < M; j++) begin
        kid[j]   = KID_W'($urandom_range(range - 1));
        valid[j] = ($urandom_range(3) != 0);
      end
      #1;
      foreach (seen[i]) seen[i] = 0;
      exp_ovf = 0;
      for (int j = 0; j < M; j++) begin
        if (valid[j]) begin
          checks++;
          if (int'(slot[j]) != (seen[kid[j]] % 4)) begin
            failures++;
            if (failures < 10) $display("t=%0d j=%0d kid=%0d slot=%0d exp=%0d", t, j, kid[j], slot[j], seen[kid[j]]);
          end
          if (seen[kid[j]] >= 4) exp_ovf = 1;
          seen[kid[j]]++;
        end
      end
      checks++;
      if (overflow !== exp_ovf) failures++;
      if (exp_ovf) n_ovf++; else n_noovf++;
    end
    checks++;
    if (n_ovf == 0 || n_noovf == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
