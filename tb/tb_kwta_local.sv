// tb_kwta_local: checks the local k-WTA in both loading structures.
// Two instances (serial bursts and parallel load) get the same random
// 64-channel vectors, some with many equal values. The K winners must be
// the K largest values, largest first, ties to the lower channel, as a
// reference sort here gives. The latency from the last load to out_valid
// must be K+1 cycles after the loading edge (K selection cycles and the
// output cycle), i.e. out_valid is seen at the (K+2)th falling edge.
module tb_kwta_local;
  import cs_pkg::*;
  localparam int K = 8;

  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n;

  logic              s_in_valid, s_ready, s_out_valid;
  logic [2:0]        s_burst;
  act_t [7:0]        s_val;
  act_t [K-1:0]      s_oval;
  logic [K-1:0][5:0] s_oidx;

  logic              p_in_valid, p_ready, p_out_valid;
  act_t [63:0]       p_vec;
  act_t [K-1:0]      p_oval;
  logic [K-1:0][5:0] p_oidx;

  kwta_local #(.K(K), .PARALLEL_LOAD(1'b0)) dut_s (
    .clk, .rst_n, .in_valid(s_in_valid), .in_burst(s_burst), .in_val(s_val),
    .in_vec_valid(1'b0), .in_vec('0), .in_ready(s_ready),
    .out_valid(s_out_valid), .out_val(s_oval), .out_idx(s_oidx));

  kwta_local #(.K(K), .PARALLEL_LOAD(1'b1)) dut_p (
    .clk, .rst_n, .in_valid(1'b0), .in_burst(3'd0), .in_val('0),
    .in_vec_valid(p_in_valid), .in_vec(p_vec), .in_ready(p_ready),
    .out_valid(p_out_valid), .out_val(p_oval), .out_idx(p_oidx));

  int checks = 0, failures = 0;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic compare(string tag, act_t [K-1:0] ov, logic [K-1:0][5:0] oi, int ev [64], int ex [64]);
    for (int i = 0; i < K; i++) begin
      checks++;
      if (int'(ov[i]) != ev[i] || int'(oi[i]) != ex[i]) begin
        failures++;
        if (failures < 10) $display("%s winner %0d got %0d@%0d exp %0d@%0d", tag, i, ov[i], oi[i], ev[i], ex[i]);
      end
    end
  endtask

  initial begin
    rst_n = 0; s_in_valid = 0; s_burst = 0; s_val = '0; p_in_valid = 0; p_vec = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int t = 0; t < 300; t++) begin
      int v [64];
      int x [64];
      int lat;
      for (int c = 0; c < 64; c++) begin
        v[c] = (t % 3 == 0) ? $urandom_range(5) : $urandom_range(255);
        x[c] = c;
        p_vec[c] = act_t'(v[c]);
      end
      for (int i = 0; i < 64; i++)
        for (int j = i + 1; j < 64; j++)
          if (v[j] > v[i] || (v[j] == v[i] && x[j] < x[i])) begin
            int tv, tx;
            tv = v[i]; v[i] = v[j]; v[j] = tv;
            tx = x[i]; x[i] = x[j]; x[j] = tx;
          end
      // serial bursts in a random order of burst index, burst 7 last
      begin
        int order [8];
        for (int b = 0; b < 7; b++) order[b] = b;
        for (int b = 0; b < 7; b++) begin
          int r, tmp;
          r = $urandom_range(6);
          tmp = order[b]; order[b] = order[r]; order[r] = tmp;
        end
        order[7] = 7;
        checks++;
        if (!s_ready) failures++;
        for (int b = 0; b < 8; b++) begin
          s_in_valid = 1;
          s_burst = 3'(order[b]);
          for (int e = 0; e < 8; e++) s_val[e] = p_vec[order[b] * 8 + e];
          @(negedge clk);
        end
        s_in_valid = 0;
        lat = 1;
        while (!s_out_valid) begin
          @(negedge clk);
          lat++;
        end
        checks++;
        if (lat != K + 2) begin
          failures++;
          $display("serial latency %0d", lat);
        end
        compare("serial", s_oval, s_oidx, v, x);
      end
      // parallel load
      @(negedge clk);
      p_in_valid = 1;
      @(negedge clk);
      p_in_valid = 0;
      lat = 1;
      while (!p_out_valid) begin
        @(negedge clk);
        lat++;
      end
      checks++;
      if (lat != K + 2) begin
        failures++;
        $display("parallel latency %0d", lat);
      end
      compare("parallel", p_oval, p_oidx, v, x);
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
