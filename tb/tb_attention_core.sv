// tb_attention_core: a 4-channel-lane, 16-channel Attention Core in front of
// a behavioural spike SRAM. It streams random K rows (written unchanged), V
// rows (written unchanged, KV status = OR over rows of K AND V, after being
// cleared at the V layer start) and Q rows (written as Q AND KV status) for
// two lanes, with random gaps, and checks every written word and the KV
// status against a model of the paper's two-stage computation.
module tb_attention_core;
  import exspike_pkg::*;
  localparam int NC = 4, N = 16, NL = 4, ROWS = 12;
  logic clk = 0, rst_n = 0; always #5 clk = ~clk;
  logic layer_start, spk_valid, spk_ready, k_re, wr_en;
  att_mode_e mode; logic [3:0] g; logic [SPK_AW-1:0] dst_base, k_base, spk_pos, k_raddr, wr_addr;
  logic [NC-1:0] spk_data; logic [N-1:0] k_rdata, wr_data, kv_status; logic [NL-1:0] wr_lane;
  logic [N-1:0] mem [64], ref_mem [64], kv_ref;
  int checks = 0, failures = 0;

  attention_core #(.N_CL(NC), .N(N)) dut (.*);

  always_ff @(posedge clk) begin
    if (k_re) k_rdata <= mem[k_raddr[5:0]];
    if (wr_en) for (int l = 0; l < NL; l++) if (wr_lane[l]) mem[wr_addr[5:0]][l*NC +: NC] <= wr_data[l*NC +: NC];
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic layer(att_mode_e m, int lane, int dbase, int kbase, bit first);
    mode = m; g = 4'(lane); dst_base = SPK_AW'(dbase); k_base = SPK_AW'(kbase);
    if (first) begin
      @(negedge clk); layer_start = 1; @(negedge clk); layer_start = 0;
      if (m == ATT_V) kv_ref = '0;
    end
    for (int p = 0; p < ROWS; p++) begin
      logic [NC-1:0] s = NC'($urandom), o = s;
      if (m == ATT_V) kv_ref[lane*NC +: NC] |= s & ref_mem[kbase + p][lane*NC +: NC];
      if (m == ATT_Q) o = s & kv_ref[lane*NC +: NC];
      ref_mem[dbase + p][lane*NC +: NC] = o;
      repeat ($urandom_range(2)) @(negedge clk);
      spk_valid = 1; spk_data = s; spk_pos = SPK_AW'(p);
      #1; while (!spk_ready) begin @(negedge clk); #1; end
      @(negedge clk); spk_valid = 0;
    end
  endtask

  initial begin
    layer_start = 0; spk_valid = 0; spk_data = 0; spk_pos = 0; mode = ATT_NONE; g = 0; dst_base = 0; k_base = 0;
    for (int a = 0; a < 64; a++) begin mem[a] = '0; ref_mem[a] = '0; end
    kv_ref = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    // one layer covers both lanes (output-channel groups)
    for (int lane = 0; lane < 2; lane++) layer(ATT_K, lane, 0, 0, lane == 0);
    for (int lane = 0; lane < 2; lane++) layer(ATT_V, lane, 16, 0, lane == 0);
    for (int lane = 0; lane < 2; lane++) layer(ATT_NONE, lane, 48, 0, lane == 0);
    checks++; if (kv_status !== kv_ref) begin failures++; $display("kv status %h vs %h", kv_status, kv_ref); end
    checks++; if (kv_ref == '0) begin failures++; $display("kv status empty: weak test"); end
    for (int lane = 0; lane < 2; lane++) layer(ATT_Q, lane, 32, 0, lane == 0);
    @(negedge clk);
    for (int a = 0; a < 64; a++) begin
      checks++;
      if (mem[a] !== ref_mem[a]) begin failures++; if (failures < 5) $display("word %0d: %h vs %h", a, mem[a], ref_mem[a]); end
    end
    // a new V layer clears the status
    mode = ATT_V; @(negedge clk); layer_start = 1; @(negedge clk); layer_start = 0;
    checks++; if (kv_status != '0) begin failures++; $display("kv not cleared"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
