// tb_ss_serial_accum: checks the serial accumulator-routed layer at its
// full size (1600 inputs, 1500 outputs, 75 weights per input row).
// Row r, entry j belongs to set j and kernel 20*j + (7*r + j) mod 20, so
// the 75 Kernel IDs of a row are distinct and each output has 80
// non-zero weights (95% sparse). Two frames of random sparse activations
// (one per cycle, with gaps) are sent; after each, all 1500 accumulators
// are compared with sums computed here. The second frame checks that start
// clears the previous frame's sums.
module tb_ss_serial_accum;
  import cs_pkg::*;
  localparam int IN = 1600, OUT = 1500, N = 75;

  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n, start, in_valid, wr_en, busy;
  act_t act_val;
  logic [10:0] act_idx, wr_addr;
  logic [N*19-1:0] wr_data;
  acc_t [OUT-1:0] acc;

  ss_serial_accum #(.IN(IN), .OUT(OUT), .N(N)) dut (.*);

  int checks = 0, failures = 0;
  int wv [IN][N];

  function automatic int kid_of(int r, int j);
    return 20 * j + (7 * r + j) % 20;
  endfunction

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 0; start = 0; in_valid = 0; wr_en = 0; act_val = '0; act_idx = '0; wr_addr = '0; wr_data = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int r = 0; r < IN; r++) begin
      for (int j = 0; j < N; j++) begin
        wv[r][j] = $urandom_range(255) - 128;
        wr_data[j*19 +: 19] = {11'(kid_of(r, j)), 8'(wv[r][j])};
      end
      wr_en = 1; wr_addr = 11'(r);
      @(negedge clk);
    end
    wr_en = 0;
    for (int frame = 0; frame < 2; frame++) begin
      longint e [OUT];
      foreach (e[o]) e[o] = 0;
      start = 1;
      @(negedge clk);
      start = 0;
      for (int a = 0; a < 200; a++) begin
        int r, v;
        r = $urandom_range(IN - 1);
        v = $urandom_range(1, 255);
        for (int j = 0; j < N; j++) e[kid_of(r, j)] += longint'(v) * wv[r][j];
        in_valid = 1; act_idx = 11'(r); act_val = act_t'(v);
        @(negedge clk);
        if (a % 9 == 0) begin
          in_valid = 0;
          @(negedge clk);
        end
      end
      in_valid = 0;
      checks++;
      if (!busy) failures++;
      @(negedge clk);
      @(negedge clk);
      checks++;
      if (busy) failures++;
      for (int o = 0; o < OUT; o++) begin
        checks++;
        if (longint'(acc[o]) != e[o]) begin
          failures++;
          if (failures < 10) $display("frame %0d out %0d got %0d exp %0d", frame, o, acc[o], e[o]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
