// tb_eafc_core: feeds the EAFC core the events of a random 8x8 spike map with
// 8 channels (4x4 average pooling folded into the weights, so the FC weight
// row of an event is selected by channel and pooled position), with random
// gaps, and checks the 16 FC outputs of two output groups against a direct
// model, plus the one-event-per-cycle rate when events arrive back to back.
module tb_eafc_core;
  import exspike_pkg::*;
  logic clk = 0, rst_n = 0; always #5 clk = ~clk;
  logic [5:0] w; logic [9:0] cin; logic [2:0] pool_shift, fc_group, res_grp; logic [10:0] fc_base;
  logic layer_start, layer_end, idle, aer_valid, aer_pop, fcw_we;
  aer_t aer_data; logic [8:0] fcw_addr; logic [127:0] fcw_wdata; logic [255:0] res_data; logic [31:0] ev_count;
  logic [127:0] wm [512];
  logic signed [15:0] acc_ref [2][16];
  int checks = 0, failures = 0;

  eafc_core dut (.*);

  function automatic logic signed [15:0] sat(int v);
    return (v > 32767) ? 16'sd32767 : (v < -32768) ? -16'sd32768 : 16'(v);
  endfunction

  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int t0, nev;
    w = 6'd8; cin = 10'd8; pool_shift = 3'd2; fc_base = 11'd20; fc_group = 0; res_grp = 0;
    layer_start = 0; layer_end = 0; aer_valid = 0; aer_data = '0; fcw_we = 0; fcw_addr = 0; fcw_wdata = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int a = 0; a < 512; a++) begin
      wm[a] = {$urandom, $urandom, $urandom, $urandom};
      if (a == 30) wm[a] = {16{8'h7f}};
      @(negedge clk); fcw_we = 1; fcw_addr = 9'(a); fcw_wdata = wm[a];
    end
    @(negedge clk); fcw_we = 0;
    for (int grp = 0; grp < 2; grp++) begin
      fc_group = 3'(grp); fc_base = 11'(20 + grp * 100);
      @(negedge clk); layer_start = 1; @(negedge clk); layer_start = 0;
      for (int l = 0; l < 16; l++) acc_ref[grp][l] = 0;
      nev = 0; t0 = 0;
      for (int p = 0; p < 64; p++) begin
        automatic logic [7:0] s = 8'($urandom);
        if (grp == 0 && p == 2) s = 8'hff;
        for (int ch = 0; ch < 8; ch++) if (s[ch]) begin
          automatic int a = 20 + grp * 100 + (((p / 8) >> 2) * 2 + ((p % 8) >> 2)) * 8 + ch;
          for (int l = 0; l < 16; l++) acc_ref[grp][l] = sat(int'(acc_ref[grp][l]) + int'($signed(wm[a][l*8 +: 8])));
          if (grp == 1) repeat ($urandom_range(1)) @(negedge clk);
          aer_valid = 1; aer_data = '{pos: SPK_AW'(p), y: 6'(p / 8), x: 6'(p % 8), ch: CH_BITS'(ch)};
          @(negedge clk); aer_valid = 0;
          nev++;
        end
      end
      while (!idle) @(negedge clk);
      layer_end = 1; @(negedge clk); layer_end = 0;
    end
    for (int grp = 0; grp < 2; grp++) begin
      res_grp = 3'(grp); #1;
      for (int l = 0; l < 16; l++) begin
        checks++;
        if ($signed(res_data[l*16 +: 16]) !== acc_ref[grp][l]) begin failures++; if (failures < 5) $display("grp %0d lane %0d: %0d vs %0d", grp, l, $signed(res_data[l*16 +: 16]), acc_ref[grp][l]); end
      end
    end
    // rate: 20 back-to-back events take 20 cycles plus one cycle of latency
    @(negedge clk); layer_start = 1; @(negedge clk); layer_start = 0;
    t0 = 0;
    for (int i = 0; i < 20; i++) begin
      aer_valid = 1; aer_data = '{pos: 0, y: 0, x: 0, ch: CH_BITS'(i % 8)};
      #1; if (aer_pop) t0++;
      @(negedge clk);
    end
    aer_valid = 0;
    checks++; if (t0 != 20) begin failures++; $display("rate %0d", t0); end
    @(negedge clk);
    checks++; if (!idle) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
