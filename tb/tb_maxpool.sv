// tb_maxpool: random windows of 1 to 6 vectors (4 is the 2x2 case) with
// random gaps between vectors; checks every channel of out_vec against a
// running-max model, that out_valid comes exactly one cycle after the
// in_last vector and never at another time. Also runs a C=5 instance.
module tb_maxpool;
  import cs_pkg::*;
  localparam int C = 64;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n, in_valid, in_first, in_last, out_valid;
  act_t [C-1:0] in_vec, out_vec;
  logic out_valid2;
  act_t [4:0] out_vec2;

  maxpool dut (.*);
  maxpool #(.C(5)) dut2 (.clk, .rst_n, .in_valid, .in_first, .in_last, .in_vec(in_vec[4:0]),
                         .out_valid(out_valid2), .out_vec(out_vec2));

  int checks = 0, failures = 0;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int exp_max [C];
    rst_n = 0; in_valid = 0; in_first = 0; in_last = 0; in_vec = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int w = 0; w < 2000; w++) begin
      int len;
      len = (w % 3 == 0) ? 4 : $urandom_range(6, 1);
      for (int v = 0; v < len; v++) begin
        // optional idle cycles: out_valid must stay low
        repeat ($urandom_range(2)) begin
          @(negedge clk);
          checks++;
          if (out_valid || out_valid2) failures++;
        end
        in_valid = 1; in_first = (v == 0); in_last = (v == len - 1);
        for (int c = 0; c < C; c++) begin
          in_vec[c] = act_t'($urandom_range((w % 5 == 0) ? 3 : 255));
          if (v == 0 || int'(in_vec[c]) > exp_max[c]) exp_max[c] = in_vec[c];
        end
        @(negedge clk);
        in_valid = 0; in_first = 0; in_last = 0;
        checks++;
        if (out_valid != (v == len - 1) || out_valid2 != (v == len - 1)) failures++;
      end
      for (int c = 0; c < C; c++) begin
        checks++;
        if (int'(out_vec[c]) != exp_max[c]) begin
          failures++;
          if (failures < 10) $display("window %0d ch %0d got %0d exp %0d", w, c, out_vec[c], exp_max[c]);
        end
      end
      for (int c = 0; c < 5; c++) begin
        checks++;
        if (int'(out_vec2[c]) != exp_max[c]) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
