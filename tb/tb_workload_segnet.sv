// tb_workload_segnet: runs the layer chain of the spiking segmentation
// network 8C3-16C3-32C3-32C3-16TC3-2TC3 (XCY: X output channels, YxY kernel;
// TC: transposed convolution) through the accelerator at its default sizes.
// The input resolution is not fixed by the network description; an 8x8
// input is used, so the two stride-2 transposed layers give a 32x32 output
// map, which fills all 1024 words of one spike SRAM. The input is a 4-bit
// grey-scale image in direct coding: its four bit planes are four spike
// channels, and the first layer's weights are the same base kernel shifted
// left by the bit position (duplicated and shifted weights, prepared here as
// they would be offline). The four 3x3 convolutions keep the 8x8 size and
// alternate between the two spike SRAMs. Weights and thresholds are random
// with a small positive bias so that activity reaches the last layer; the
// clusters beyond each layer's output channel count are given zero weights.
// Every spike map and membrane potential is compared with a behavioural
// reference model (the same one as in the end-to-end test), and each layer
// must produce spikes.
module tb_workload_segnet;
  import exspike_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic start, busy, done, host_we, host_re, host_rsel;
  mem_sel_e host_sel;
  logic [12:0] host_addr;
  logic [WGT_WIDTH-1:0] host_wdata;
  logic [SPK_AW-1:0] host_raddr;
  logic [CIN_MAX-1:0] host_rdata;
  logic [2:0] fc_res_grp;
  logic [FC_LANES*V_BITS-1:0] fc_res_data;
  logic [31:0] stat_events, stat_overlaps, stat_accums, stat_fc_events, stat_cycles;

  exspike_top dut (.*);

  int checks = 0, failures = 0;

  // ---------------- reference state
  logic [CIN_MAX-1:0]   spk_ref [2][SPK_DEPTH];
  logic [NRN_WIDTH-1:0] nrn_ref [NRN_DEPTH];
  logic [WGT_WIDTH-1:0] wgt_ref [WGT_DEPTH];
  logic [FC_LANES*W_BITS-1:0] fcw_ref [FC_DEPTH];
  logic [CIN_MAX-1:0]   kv_ref;
  logic signed [V_BITS-1:0] fc_ref [FC_LANES];
  instr_t prog [10];

  // mechanism counters (reference side)
  int n_tconv = 0, n_pool = 0, n_leak = 0, n_g0 = 0, n_skip_pos = 0, n_pad_taps = 0, n_res_src = 0, n_v = 0, n_q = 0, n_multi_g = 0, n_spikes = 0;

  function automatic logic signed [V_BITS-1:0] sadd(logic signed [V_BITS-1:0] a, logic signed [V_BITS-1:0] b);
    return sat_add(a, b);
  endfunction

  task automatic ref_conv(instr_t I);
    bit tc = (I.op == OP_TCONV);
    int hw = int'(I.h) * int'(I.w);
    int OH = tc ? 2 * int'(I.h) : int'(I.h), OW = tc ? 2 * int'(I.w) : int'(I.w);
    logic signed [V_BITS-1:0] ps [N_CLUSTER][KTAPS];
    if (I.src_sel) n_res_src++;
    if (I.groups > 1) n_multi_g++;
    if (I.pool_shift != 0) n_pool++;
    if (I.g0 != 0) n_g0++;
    if (tc) n_tconv++;
    if (I.attn == ATT_V) kv_ref = '0;
    for (int g = 0; g < int'(I.groups); g++) begin
      for (int p = 0; p < hw; p++) begin
        logic [CIN_MAX-1:0] word;
        int y = p / int'(I.w), x = p % int'(I.w);
        // max pooling: OR over the 2^k x 2^k window of the stored map
        word = '0;
        for (int dy = 0; dy < (1 << I.pool_shift); dy++)
          for (int dx = 0; dx < (1 << I.pool_shift); dx++)
            word |= spk_ref[I.src_sel][int'(I.src_base) + ((y << I.pool_shift) + dy) * (int'(I.w) << I.pool_shift)
                                       + (x << I.pool_shift) + dx];
        for (int ch = int'(I.cin); ch < CIN_MAX; ch++) word[ch] = 1'b0;
        if (word == '0) begin n_skip_pos++; continue; end
        for (int c = 0; c < N_CLUSTER; c++)
          for (int t = 0; t < KTAPS; t++) ps[c][t] = '0;
        for (int ch = 0; ch < int'(I.cin); ch++) if (word[ch]) begin
          logic [WGT_WIDTH-1:0] wv = wgt_ref[int'(I.w_base) + g*int'(I.cin) + ch];
          for (int c = 0; c < N_CLUSTER; c++)
            for (int t = 0; t < KTAPS; t++)
              ps[c][t] = ps[c][t] + V_BITS'(signed'(wv[c*72 + t*8 +: 8]));
        end
        for (int t = 0; t < KTAPS; t++) begin
          int ty = tc ? 2*y - 1 + t/3 : y + 1 - t/3, tx = tc ? 2*x - 1 + t%3 : x + 1 - t%3;
          if (!I.ksize3 && !tc && t != 4) continue;
          if (ty < 0 || ty >= OH || tx < 0 || tx >= OW) begin n_pad_taps++; continue; end
          for (int c = 0; c < N_CLUSTER; c++) begin
            int a = int'(I.n_base) + g*OH*OW + ty*OW + tx;
            nrn_ref[a][c*16 +: 16] = sadd(nrn_ref[a][c*16 +: 16], ps[c][t]);
          end
        end
      end
      if (I.fire) begin
        for (int p = 0; p < OH*OW; p++) begin
          logic [N_CLUSTER-1:0] s, o;
          int a = int'(I.n_base) + g*OH*OW + p;
          for (int c = 0; c < N_CLUSTER; c++) begin
            logic signed [V_BITS-1:0] v;
            v = sadd(nrn_ref[a][c*16 +: 16], wgt_ref[int'(I.b_base) + g][c*16 +: 16]);
            s[c] = (v >= I.thresh);
            if (!s[c] && I.leak) begin
              v = v >>> 1;
              n_leak++;
            end
            nrn_ref[a][c*16 +: 16] = s[c] ? '0 : v;
          end
          n_spikes += $countones(s);
          o = s;
          // the spike lane is the absolute group g + g0
          if (I.attn == ATT_V) begin
            kv_ref[(g + int'(I.g0))*32 +: 32] |= s & spk_ref[I.k_sel][int'(I.k_base) + p][(g + int'(I.g0))*32 +: 32];
            n_v++;
          end
          if (I.attn == ATT_Q) begin o = s & kv_ref[(g + int'(I.g0))*32 +: 32]; n_q++; end
          spk_ref[I.dst_sel][int'(I.dst_base) + p][(g + int'(I.g0))*32 +: 32] = o;
        end
      end
    end
  endtask

  task automatic ref_fc(instr_t I);
    int hw = int'(I.h) * int'(I.w);
    for (int l = 0; l < FC_LANES; l++) fc_ref[l] = '0;
    for (int p = 0; p < hw; p++) begin
      int y = p / int'(I.w), x = p % int'(I.w);
      logic [CIN_MAX-1:0] word = spk_ref[I.src_sel][int'(I.src_base) + p];
      for (int ch = 0; ch < int'(I.cin); ch++) if (word[ch]) begin
        int a = int'(I.w_base) + ((y >> I.pool_shift) * (int'(I.w) >> I.pool_shift) + (x >> I.pool_shift)) * int'(I.cin) + ch;
        for (int l = 0; l < FC_LANES; l++) fc_ref[l] = sadd(fc_ref[l], V_BITS'(signed'(fcw_ref[a][l*8 +: 8])));
      end
    end
  endtask

  // ---------------- host access
  task automatic hwrite(mem_sel_e sel, int addr, logic [WGT_WIDTH-1:0] data);
    @(negedge clk);
    host_we = 1'b1; host_sel = sel; host_addr = 13'(addr); host_wdata = data;
    @(negedge clk);
    host_we = 1'b0;
  endtask

  task automatic hread(logic sel, int addr, output logic [CIN_MAX-1:0] data);
    @(negedge clk);
    host_re = 1'b1; host_rsel = sel; host_raddr = SPK_AW'(addr);
    @(negedge clk);
    host_re = 1'b0;
    data = host_rdata;
  endtask

  function automatic logic [7:0] rw(int lo, int hi);
    return 8'(lo + int'($urandom_range(hi - lo)));
  endfunction

  function automatic instr_t mk(op_e op, logic src, logic dst, logic k3, logic apec, logic fire, att_mode_e at,
                                int cin, int groups, int sb, int db, int wb, int bb, int nb, int th);
    instr_t I = '0;
    I.op = op; I.src_sel = src; I.dst_sel = dst; I.ksize3 = k3; I.apec = apec; I.fire = fire; I.attn = at;
    I.h = 6'd8; I.w = 6'd8; I.cin = 10'(cin); I.groups = 5'(groups);
    I.src_base = 10'(sb); I.dst_base = 10'(db); I.w_base = 11'(wb); I.b_base = 11'(bb); I.n_base = 13'(nb);
    I.thresh = 16'(th);
    return I;
  endfunction

  // watchdog
  initial begin
    repeat (2_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // output channels of the layer that owns a Weight SRAM row (weights and bias)
  function automatic int cout_of_row(int a);
    if (a < 10 || a == 100) return 8;
    if (a < 20 || a == 101) return 16;
    if (a < 80 || a == 102 || a == 103) return 32;
    if (a < 120 || a == 104) return 16;
    return 2;
  endfunction

  initial begin
    logic [CIN_MAX-1:0] rd;
    logic [WGT_WIDTH-1:0] wv;
    logic [3:0] pix [64];
    int t0, t1, sp_before, layer_spikes [6];
    start = 0; host_we = 0; host_re = 0; host_rsel = 0; host_sel = MEM_SPK; host_addr = '0;
    host_wdata = '0; host_raddr = '0; fc_res_grp = 3'd0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;

    // ---- spike buffers cleared, then the bit planes of a 4-bit 8x8 image
    for (int s = 0; s < 2; s++)
      for (int a = 0; a < SPK_DEPTH; a++) begin spk_ref[s][a] = '0; hwrite(s ? MEM_RES : MEM_SPK, a, '0); end
    for (int p = 0; p < 64; p++) begin
      logic [CIN_MAX-1:0] word = '0;
      // a smooth blob plus noise
      int y = p / 8, x = p % 8, d = (y - 4) * (y - 4) + (x - 3) * (x - 3);
      pix[p] = 4'((d < 16 ? 15 - d : 0) ^ $urandom_range(3));
      for (int b = 0; b < 4; b++) word[b] = pix[p][b];
      spk_ref[0][p] = word; hwrite(MEM_SPK, p, word);
    end
    for (int a = 0; a < 1600; a++) begin nrn_ref[a] = '0; hwrite(MEM_NRN, a, '0); end
    // ---- weights: layer 0 rows 0..3 hold one base kernel shifted by the bit
    for (int a = 0; a < 140; a++) begin
      for (int i = 0; i < WGT_WIDTH / 8; i++) wv[i*8 +: 8] = rw(-5, 7);
      if (a < 4) begin
        logic [WGT_WIDTH-1:0] base = wgt_ref[0];
        if (a == 0) base = wv;
        for (int i = 0; i < WGT_WIDTH / 8; i++) wv[i*8 +: 8] = 8'(signed'(base[i*8 +: 8]) <<< a);
      end
      if (a >= 100 && a < 106)
        for (int c = 0; c < N_CLUSTER; c++) wv[c*16 +: 16] = 16'($signed(rw(-2, 4)));
      // clusters beyond a layer's output channel count get zero weights and
      // bias, so they never fire
      for (int c = cout_of_row(a); c < N_CLUSTER; c++)
        if (a >= 100 && a < 106) wv[c*16 +: 16] = '0;
        else wv[c*72 +: 72] = '0;
      wgt_ref[a] = wv; hwrite(MEM_WGT, a, wv);
    end
    // ---- program        op        src dst k3 apec fire attn    cin grp  src  dst   w    b    n   th
    prog[0] = mk(OP_CONV,  0, 1, 1, 1, 1, ATT_NONE,  4, 1,   0,   0,   0, 100,   0, 40);
    prog[1] = mk(OP_CONV,  1, 0, 1, 1, 1, ATT_NONE,  8, 1,   0, 100,  10, 101,  64, 12);
    prog[2] = mk(OP_CONV,  0, 1, 1, 1, 1, ATT_NONE, 16, 1, 100, 100,  20, 102, 128, 14);
    prog[3] = mk(OP_CONV,  1, 0, 1, 1, 1, ATT_NONE, 32, 1, 100, 200,  40, 103, 192, 16);
    prog[4] = mk(OP_TCONV, 0, 1, 1, 1, 1, ATT_NONE, 32, 1, 200, 200,  80, 104, 256, 10);
    prog[5] = mk(OP_TCONV, 1, 0, 1, 1, 1, ATT_NONE, 16, 1, 200,   0, 120, 105, 512,  6);
    prog[5].h = 6'd16; prog[5].w = 6'd16;
    prog[6] = '0;  // OP_END
    for (int i = 0; i < 7; i++) hwrite(MEM_INS, i, WGT_WIDTH'(prog[i]));

    // ---- reference
    for (int i = 0; i < 6; i++) begin
      sp_before = n_spikes;
      ref_conv(prog[i]);
      layer_spikes[i] = n_spikes - sp_before;
    end
    $display("spikes per layer: %0d %0d %0d %0d %0d %0d", layer_spikes[0], layer_spikes[1], layer_spikes[2],
             layer_spikes[3], layer_spikes[4], layer_spikes[5]);

    // ---- run
    @(negedge clk); start = 1'b1; @(negedge clk); start = 1'b0;
    t0 = $time;
    wait (done);
    t1 = $time;
    repeat (2) @(negedge clk);
    $display("program finished in %0d cycles (busy counter %0d)", (t1 - t0) / 10, stat_cycles);

    for (int s = 0; s < 2; s++)
      for (int a = 0; a < SPK_DEPTH; a++) begin
        hread(s[0], a, rd);
        checks++;
        if (rd !== spk_ref[s][a]) begin
          failures++;
          if (failures < 10) $display("spike mismatch sram %0d addr %0d", s, a);
        end
      end
    for (int a = 0; a < 1600; a++) begin
      checks++;
      if (dut.u_neuron_sram.mem[a] !== nrn_ref[a]) begin
        failures++;
        if (failures < 10) $display("neuron mismatch addr %0d", a);
      end
    end
    $display("events=%0d overlaps=%0d accums=%0d", stat_events, stat_overlaps, stat_accums);
    for (int i = 0; i < 6; i++) begin
      checks++;
      if (layer_spikes[i] == 0) begin failures++; $display("layer %0d produced no spikes", i); end
    end
    checks++; if (n_tconv != 2) begin failures++; $display("transposed layers not run"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
