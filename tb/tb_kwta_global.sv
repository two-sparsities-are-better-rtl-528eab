// tb_kwta_global: checks the histogram global k-WTA at its full size
// (1500 values in 300 blocks of 5, K = 225).
// For each run the threshold is computed here by the same top-down
// cumulative count, and every output block must equal the stored block with
// values below the threshold zeroed. Also checked: the threshold output,
// the block addresses, 300 output cycles, at least K survivors, and the
// cycle count from start to the first output: 300 histogram cycles +
// (256 - threshold) search cycles + 1 output register cycle after the
// start edge (seen at falling edge number 300 + 256 - threshold + 2).
module tb_kwta_global;
  import cs_pkg::*;
  localparam int NELEM = 1500, P = 5, K = 225, BLOCKS = 300;

  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n, wr_en, start, out_valid, done, busy;
  logic [8:0]  wr_addr, out_addr;
  act_t [P-1:0] wr_data, out_val;
  logic [10:0] k_sel;
  act_t thresh;

  kwta_global #(.NELEM(NELEM), .P(P), .K(K)) dut (.*);

  int checks = 0, failures = 0;
  int v [NELEM];

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 0; wr_en = 0; start = 0; wr_addr = '0; wr_data = '0; k_sel = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    while (busy) @(negedge clk);   // reset-time histogram clear
    for (int run = 0; run < 6; run++) begin
      int kk, thr, acc, lat, nout, npass;
      int hist [256];
      kk = (run == 1) ? 10 : (run == 4) ? 1500 : (run == 5) ? 1 : K;
      for (int i = 0; i < NELEM; i++)
        v[i] = (run == 2) ? $urandom_range(3) * 60 : (run == 3) ? $urandom_range(20) : $urandom_range(255);
      for (int b = 0; b < BLOCKS; b++) begin
        wr_en = 1; wr_addr = 9'(b);
        for (int l = 0; l < P; l++) wr_data[l] = act_t'(v[b * P + l]);
        @(negedge clk);
      end
      wr_en = 0;
      foreach (hist[i]) hist[i] = 0;
      for (int i = 0; i < NELEM; i++) hist[v[i]]++;
      thr = 0; acc = 0;
      for (int i = 255; i >= 0; i--) begin
        acc += hist[i];
        if (acc >= kk) begin thr = i; break; end
      end
      k_sel = (run == 0) ? 11'd0 : 11'(kk);
      start = 1;
      @(negedge clk);
      start = 0;
      lat = 1;
      while (!out_valid) begin
        @(negedge clk);
        lat++;
      end
      checks++;
      if (lat != 300 + (256 - thr) + 2) begin
        failures++;
        $display("run %0d latency %0d thr %0d", run, lat, thr);
      end
      nout = 0; npass = 0;
      while (out_valid) begin
        checks++;
        if (int'(out_addr) != nout) failures++;
        for (int l = 0; l < P; l++) begin
          int e;
          e = (v[nout * P + l] >= thr) ? v[nout * P + l] : 0;
          if (v[nout * P + l] >= thr) npass++;
          checks++;
          if (int'(out_val[l]) != e) begin
            failures++;
            if (failures < 10) $display("run %0d blk %0d lane %0d got %0d exp %0d", run, nout, l, out_val[l], e);
          end
        end
        nout++;
        @(negedge clk);
      end
      checks += 3;
      if (nout != BLOCKS) failures++;
      if (int'(thresh) != thr) begin failures++; $display("thresh %0d exp %0d", thresh, thr); end
      if (npass < kk) failures++;
      while (busy) @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
