// tb_fast_event_filter: loads random 64-bit spike words and checks that the
// filter emits exactly the set channels, lowest first, at one event per cycle
// when never stalled (the rate the paper states), and the same sequence under
// random back-pressure.
module tb_fast_event_filter;
  localparam int N = 64;
  logic clk = 0, rst_n = 0; always #5 clk = ~clk;
  logic load, idle, ev_valid, ev_ready; logic [N-1:0] load_word; logic [5:0] ev_ch;
  int checks = 0, failures = 0;

  fast_event_filter #(.N(N)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    load = 0; load_word = 0; ev_ready = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int it = 0; it < 300; it++) begin
      logic [N-1:0] word;
      int exp_ch [$];
      int cycles;
      automatic bit stall = (it % 2 == 1);
      word = {$urandom, $urandom} & {$urandom, $urandom};
      if (it == 0) word = 64'h8000_0000_0000_0001;
      for (int i = 0; i < N; i++) if (word[i]) exp_ch.push_back(i);
      @(negedge clk);
      checks++; if (!idle) begin failures++; $display("not idle before load"); end
      load = 1; load_word = word;
      @(negedge clk);
      load = 0;
      cycles = 0;
      while (exp_ch.size() > 0 && cycles < 1000) begin
        ev_ready = stall ? 1'($urandom_range(1)) : 1'b1;
        #1;
        if (ev_valid && ev_ready) begin
          checks++;
          if (int'(ev_ch) != exp_ch[0]) begin failures++; if (failures < 5) $display("got %0d exp %0d", ev_ch, exp_ch[0]); end
          void'(exp_ch.pop_front());
        end else if (!ev_valid) begin
          failures++; $display("filter went idle early"); break;
        end
        cycles++;
        @(negedge clk);
      end
      ev_ready = 0;
      if (!stall) begin
        checks++;
        if (cycles != $countones(word)) begin failures++; $display("rate: %0d cycles for %0d events", cycles, $countones(word)); end
      end
      checks++; if (!idle || ev_valid) begin failures++; $display("not idle after last event"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
