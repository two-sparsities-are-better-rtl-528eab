// tb_topk_fifo: loads random 8-entry bursts, pops them in random gaps and
// checks head/head_valid against a queue model; also checks that a load
// replaces a partly popped FIFO.
module tb_topk_fifo;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n, load, pop, head_valid;
  logic [7:0][13:0] load_data;
  logic [13:0] head;

  topk_fifo #(.DEPTH(8), .ENTRY_W(14)) dut (.*);

  int checks = 0, failures = 0;
  logic [13:0] q [$];

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_head();
    checks++;
    if (head_valid !== (q.size() != 0)) failures++;
    if (q.size() != 0) begin
      checks++;
      if (head !== q[0]) begin
        failures++;
        if (failures < 10) $display("head %h exp %h", head, q[0]);
      end
    end
  endtask

  initial begin
    rst_n = 0; load = 0; pop = 0; load_data = '0;
    @(negedge clk); @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    check_head();
    for (int t = 0; t < 400; t++) begin
      load = 1;
      for (int i = 0; i < 8; i++) load_data[i] = 14'($urandom);
      pop = $urandom_range(1);
      @(negedge clk);
      q.delete();
      for (int i = 0; i < 8; i++) q.push_back(load_data[i]);
      load = 0;
      check_head();
      for (int p = 0; p < $urandom_range(12); p++) begin
        pop = $urandom_range(1);
        @(negedge clk);
        if (pop && q.size() != 0) void'(q.pop_front());
        check_head();
      end
      pop = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
