// tb_sort8: checks the 8-input sorting network against a selection sort
// done here, on random bursts and on bursts with many equal values.
module tb_sort8;
  import cs_pkg::*;
  act_t [7:0]       in_val, out_val;
  logic [7:0][5:0]  in_idx, out_idx;

  sort8 #(.IDX_W(6)) dut (.*);

  int checks = 0, failures = 0;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 3000; t++) begin
      int v [8];
      int x [8];
      for (int i = 0; i < 8; i++) begin
        v[i] = (t % 2) ? $urandom_range(3) : $urandom_range(255);
        x[i] = (t * 8 + i * 5) % 64;
        in_val[i] = act_t'(v[i]);
        in_idx[i] = 6'(x[i]);
      end
      // reference: repeated selection of (largest value, then lowest index)
      for (int i = 0; i < 8; i++)
        for (int j = i + 1; j < 8; j++)
          if (v[j] > v[i] || (v[j] == v[i] && x[j] < x[i])) begin
            int tv, tx;
            tv = v[i]; v[i] = v[j]; v[j] = tv;
            tx = x[i]; x[i] = x[j]; x[j] = tx;
          end
      #1;
      for (int i = 0; i < 8; i++) begin
        checks++;
        if (int'(out_val[i]) != v[i] || int'(out_idx[i]) != x[i]) begin
          failures++;
          if (failures < 10) $display("t=%0d pos %0d got %0d/%0d exp %0d/%0d", t, i, out_val[i], out_idx[i], v[i], x[i]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
