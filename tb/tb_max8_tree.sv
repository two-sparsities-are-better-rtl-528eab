// tb_max8_tree: checks the max-of-8 comparator tree, including invalid
// inputs, all-invalid, and ties (lowest channel index must win).
module tb_max8_tree;
  import cs_pkg::*;
  logic [7:0]      valid;
  act_t [7:0]      val;
  logic [7:0][5:0] idx;
  logic            max_valid;
  act_t            max_val;
  logic [5:0]      max_idx;
  logic [2:0]      max_sel;

  max8_tree #(.IDX_W(6)) dut (.*);

  int checks = 0, failures = 0;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 3000; t++) begin
      int best;
      best = -1;
      for (int i = 0; i < 8; i++) begin
        valid[i] = (t % 5 == 4) ? 1'b0 : ($urandom_range(3) != 0);
        val[i]   = act_t'((t % 2) ? $urandom_range(2) : $urandom_range(255));
        idx[i]   = 6'($urandom_range(63));
      end
      for (int i = 0; i < 8; i++)
        if (valid[i] && (best < 0 || val[i] > val[best] || (val[i] == val[best] && idx[i] < idx[best])))
          best = i;
      #1;
      checks++;
      if (max_valid !== (best >= 0)) failures++;
      if (best >= 0) begin
        checks++;
        if (max_val !== val[best] || max_idx !== idx[best] || max_sel !== 3'(best)) begin
          failures++;
          if (failures < 10) $display("t=%0d got %0d/%0d/%0d exp %0d", t, max_val, max_idx, max_sel, best);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
