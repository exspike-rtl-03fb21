// tb_sync_fifo: random pushes and pops of a 4-deep FIFO against a queue
// model: data order, full/empty flags and the occupancy count.
module tb_sync_fifo;
  logic clk = 0, rst_n = 0; always #5 clk = ~clk;
  logic push, pop, full, empty; logic [15:0] wdata, rdata; logic [2:0] count;
  logic [15:0] q [$];
  int checks = 0, failures = 0, n_full = 0;

  sync_fifo #(.WIDTH(16), .DEPTH(4)) dut (.*);

  initial begin
    repeat (10000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    push = 0; pop = 0; wdata = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      checks++;
      if (full !== (q.size() == 4) || empty !== (q.size() == 0) || count !== 3'(q.size())) begin
        failures++; if (failures < 5) $display("flag mismatch size %0d", q.size());
      end
      if (q.size() > 0) begin
        checks++; if (rdata !== q[0]) begin failures++; if (failures < 5) $display("data mismatch"); end
      end
      if (q.size() == 4) n_full++;
      push = !full && ($urandom_range(99) < ((i / 200) % 2 ? 70 : 40));
      pop  = !empty && ($urandom_range(99) < ((i / 200) % 2 ? 40 : 70));
      wdata = 16'($urandom);
      @(posedge clk);
      if (pop) void'(q.pop_front());
      if (push) q.push_back(wdata);
    end
    checks++; if (n_full == 0) begin failures++; $display("never full"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
