// tb_wt_mem: checks the K-ported weight memory.
// Writes every row with a value computed from its address, then reads
// random addresses on all K ports and compares each port one cycle later
// with the same formula. Also checks that a read in the write cycle returns
// the old row.
module tb_wt_mem;
  localparam int K = 8, N = 4, DEPTH = 576, WT_W = 8, KID_W = 6;
  localparam int AW = $clog2(DEPTH), ROW_W = N * (WT_W + KID_W);

  logic clk = 0;
  always #5 clk = ~clk;

  logic                    wr_en;
  logic [AW-1:0]           wr_addr;
  logic [ROW_W-1:0]        wr_data;
  logic [K-1:0][AW-1:0]    rd_addr;
  logic [K-1:0][ROW_W-1:0] rd_data;

  wt_mem #(.K(K), .N(N), .DEPTH(DEPTH), .WT_W(WT_W), .KID_W(KID_W)) dut (.*);

  int checks = 0, failures = 0;

  function automatic logic [ROW_W-1:0] pattern(int a, int gen);
    logic [63:0] r;
    for (int b = 0; b < 64; b += 16) r[b +: 16] = 16'((a * 40503 + b * 977 + gen * 7919) & 16'hffff);
    return r[ROW_W-1:0];
  endfunction

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [K-1:0][AW-1:0] a;
    wr_en = 0; wr_addr = '0; wr_data = '0; rd_addr = '0;
    @(negedge clk);
    for (int i = 0; i < DEPTH; i++) begin
      wr_en = 1; wr_addr = AW'(i); wr_data = pattern(i, 0);
      @(negedge clk);
    end
    wr_en = 0;
    for (int t = 0; t < 300; t++) begin
      for (int p = 0; p < K; p++) a[p] = AW'($urandom_range(DEPTH - 1));
      rd_addr = a;
      @(negedge clk);
      for (int p = 0; p < K; p++) begin
        checks++;
        if (rd_data[p] !== pattern(int'(a[p]), 0)) begin
          failures++;
          if (failures < 5) $display("port %0d addr %0d: got %h exp %h", p, a[p], rd_data[p], pattern(int'(a[p]), 0));
        end
      end
    end
    // read during write of the same row returns the old row
    rd_addr = '0; rd_addr[3] = AW'(17);
    wr_en = 1; wr_addr = AW'(17); wr_data = pattern(17, 1);
    @(negedge clk);
    wr_en = 0;
    checks++;
    if (rd_data[3] !== pattern(17, 0)) failures++;
    @(negedge clk);
    checks++;
    if (rd_data[3] !== pattern(17, 1)) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
