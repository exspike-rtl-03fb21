// tb_wpe_block: random weight additions interleaved with the APEC commands
// (save_ov, reload_ov, clear), compared with a model of the nine 16-bit
// accumulators and the overlap cache.
module tb_wpe_block;
  import exspike_pkg::*;
  logic clk = 0, rst_n = 0; always #5 clk = ~clk;
  logic add, save_ov, reload_ov, clear;
  logic [KTAPS*W_BITS-1:0] weights; logic [KTAPS*V_BITS-1:0] psum;
  logic [15:0] acc [9], ov [9];
  int checks = 0, failures = 0;

  wpe_block dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    add = 0; save_ov = 0; reload_ov = 0; clear = 0; weights = '0;
    for (int t = 0; t < 9; t++) begin acc[t] = 0; ov[t] = 0; end
    repeat (2) @(negedge clk); rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      automatic int r = $urandom_range(99);
      @(negedge clk);
      for (int t = 0; t < 9; t++) begin
        checks++;
        if (psum[t*16 +: 16] !== acc[t]) begin failures++; if (failures < 5) $display("tap %0d mismatch", t); end
      end
      add = 0; save_ov = 0; reload_ov = 0; clear = 0;
      for (int t = 0; t < 9; t++) weights[t*8 +: 8] = 8'($urandom);
      if (r < 80) add = 1; else if (r < 88) save_ov = 1; else if (r < 95) reload_ov = 1; else clear = 1;
      for (int t = 0; t < 9; t++) begin
        if (clear) begin acc[t] = 0; ov[t] = 0; end
        else if (reload_ov) acc[t] = ov[t];
        else if (save_ov) ov[t] = acc[t];
        else acc[t] = acc[t] + 16'(signed'(weights[t*8 +: 8]));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
