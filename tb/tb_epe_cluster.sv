// tb_epe_cluster: drives one EPE cluster through its three stages. Random
// events are accumulated in the WPE block and pushed into the eFIFO; the
// MPE adds each tap of the eFIFO head to a given membrane value (saturating);
// the FPE adds the bias, compares with the threshold and resets on a spike,
// or, with leak set at random, halves a potential that did not fire.
module tb_epe_cluster;
  import exspike_pkg::*;
  logic clk = 0, rst_n = 0; always #5 clk = ~clk;
  logic add, save_ov, reload_ov, clear, efifo_push, efifo_pop, efifo_full, efifo_empty;
  logic [KTAPS*W_BITS-1:0] weights; logic [3:0] mpe_tap; logic mpe_capture, bias_load, fpe_capture, fpe_spike, leak;
  logic signed [15:0] mpe_vin, mpe_v, bias_in, thresh, fpe_vin, fpe_v;
  int checks = 0, failures = 0, n_spk = 0, n_leak = 0;
  logic signed [15:0] ps [$][9];

  epe_cluster #(.EFD(4)) dut (.*);

  function automatic logic signed [15:0] sat(int v);
    return (v > 32767) ? 16'sd32767 : (v < -32768) ? -16'sd32768 : 16'(v);
  endfunction

  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic signed [15:0] acc [9];
    {add, save_ov, reload_ov, clear, efifo_push, efifo_pop, mpe_capture, bias_load, fpe_capture} = '0;
    leak = 0; weights = '0; mpe_tap = 0; mpe_vin = 0; bias_in = 0; thresh = 0; fpe_vin = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int round = 0; round < 40; round++) begin
      // fill the eFIFO with up to 4 entries
      while (!efifo_full && ps.size() < 3) begin
        for (int t = 0; t < 9; t++) acc[t] = 0;
        repeat ($urandom_range(1, 12)) begin
          @(negedge clk);
          {save_ov, reload_ov, clear, efifo_push} = '0;
          add = 1;
          for (int t = 0; t < 9; t++) begin
            weights[t*8 +: 8] = 8'($urandom);
            acc[t] = acc[t] + 16'(signed'(weights[t*8 +: 8]));
          end
        end
        @(negedge clk); add = 0; efifo_push = 1; clear = 1;
        ps.push_back(acc);
        @(negedge clk); efifo_push = 0; clear = 0;
      end
      // MPE: each tap of the head
      while (ps.size() > 0) begin
        for (int t = 0; t < 9; t++) begin
          automatic int v = (t == 3) ? 32700 : int'($signed(16'($urandom)));
          @(negedge clk); mpe_tap = 4'(t); mpe_vin = 16'(v); mpe_capture = 1;
          @(negedge clk); mpe_capture = 0;
          checks++;
          if (mpe_v !== sat(v + int'(ps[0][t]))) begin failures++; if (failures < 5) $display("mpe tap %0d", t); end
        end
        @(negedge clk); efifo_pop = 1; void'(ps.pop_front());
        @(negedge clk); efifo_pop = 0;
        checks++; if (efifo_empty !== (ps.size() == 0)) failures++;
      end
      // FPE
      bias_in = 16'($signed($urandom_range(200)) - 100); bias_load = 1;
      @(negedge clk); bias_load = 0;
      for (int i = 0; i < 10; i++) begin
        automatic int v = int'($signed(16'($urandom))) / 64;
        int s;
        @(negedge clk); fpe_vin = 16'(v); thresh = 16'($urandom_range(300)); leak = 1'($urandom); fpe_capture = 1;
        @(negedge clk); fpe_capture = 0;
        s = sat(v + int'(bias_in));
        checks++;
        if (fpe_spike !== (s >= int'(thresh)) || fpe_v !== ((s >= int'(thresh)) ? 16'sd0 : 16'(leak ? (s >>> 1) : s))) begin
          failures++; if (failures < 5) $display("fpe mismatch");
        end
        if (fpe_spike) n_spk++;
        if (leak && !fpe_spike && s < -1) n_leak++;
      end
    end
    checks++; if (n_spk == 0) failures++;
    checks++; if (n_leak == 0) begin failures++; $display("leak never applied"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
