// tb_exspike_top: end-to-end test of the accelerator at its default sizes.
// It loads a random input spike map (8x8 positions, 64 channels, with
// correlated neighbours so APEC finds overlaps and some empty positions),
// random weights, biases and FC weights, and a 9-layer program:
//   L0 3x3 conv 64->64 (two channel groups, APEC on, leak)  Spike -> Residual
//   L1 1x1 conv, K spikes                                    Residual -> Spike
//   L2 1x1 conv, V spikes (KV status)                        Residual -> Spike
//   L3 1x1 conv, Q spikes (attention output)                 Residual -> Spike
//   L4 3x3 conv of the attention output, accumulate only (no fire)
//   L5 1x1 conv of the L0 output into the same neurons (shortcut), fire;
//      L4 and L5 form output group 1 (g0 = 1), i.e. channels 32..63
//   L6 2x2 max pooling of the L0 output fused into a 3x3 conv on the 4x4 map
//   L7 stride-2 3x3 transposed convolution of L6 back to 8x8 (APEC on)
//   L8 EAFC: 4x4 average pooling fused with a 16-output FC layer over the
//      64 channels written by L5
// A behavioural reference model in this file computes every spike map,
// membrane potential and FC output with the same arithmetic (16-bit wrapping
// partial sums, saturating membrane adds, hard reset) and the results are
// compared word by word. It also checks that each mechanism occurred: APEC
// overlaps, skipped empty positions, padding taps, eFIFO back-pressure,
// residual-source reads, attention V/Q, FC events, multiple groups, a group
// offset, leaking potentials, pooled input reads and a transposed convolution.
module tb_exspike_top;
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

  initial begin
    logic [CIN_MAX-1:0] rd, prev;
    logic [WGT_WIDTH-1:0] wv;
    int t0, t1;
    start = 0; host_we = 0; host_re = 0; host_rsel = 0; host_sel = MEM_SPK; host_addr = '0;
    host_wdata = '0; host_raddr = '0; fc_res_grp = 3'd1;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;

    // ---- spike buffers: zero the used regions, then the 8x8x64 input map
    for (int s = 0; s < 2; s++)
      for (int a = 0; a < 700; a++) begin spk_ref[s][a] = '0; hwrite(s ? MEM_RES : MEM_SPK, a, '0); end
    prev = '0;
    for (int p = 0; p < 64; p++) begin
      logic [CIN_MAX-1:0] word;
      word = '0;
      if (p % 9 != 5) begin
        for (int ch = 0; ch < 64; ch++)
          word[ch] = ($urandom_range(99) < 70) ? prev[ch] : ($urandom_range(99) < 35);
        // garbage above the layer's channel count must be ignored
        word[100] = 1'b1;
      end
      prev = word;
      spk_ref[0][p] = word; hwrite(MEM_SPK, p, word);
    end
    // ---- neurons: clear used regions
    for (int a = 0; a < 700; a++) begin nrn_ref[a] = '0; hwrite(MEM_NRN, a, '0); end
    // ---- weights (rows 0..799) and biases (rows 200..207)
    for (int a = 0; a < 800; a++) begin
      for (int i = 0; i < WGT_WIDTH / 8; i++) wv[i*8 +: 8] = rw(-8, 8);
      if (a >= 200 && a < 208)
        for (int c = 0; c < N_CLUSTER; c++) wv[c*16 +: 16] = 16'($signed(rw(-6, 6)));
      wgt_ref[a] = wv; hwrite(MEM_WGT, a, wv);
    end
    for (int a = 0; a < 256; a++) begin
      logic [FC_LANES*8-1:0] f;
      for (int l = 0; l < FC_LANES; l++) f[l*8 +: 8] = rw(-16, 16);
      fcw_ref[a] = f; hwrite(MEM_FCW, a, WGT_WIDTH'(f));
    end
    // ---- program
    prog[0] = mk(OP_CONV, 0, 1, 1, 1, 1, ATT_NONE, 64, 2,   0,   0,   0, 200,   0, 24);
    prog[0].leak = 1'b1;
    prog[1] = mk(OP_CONV, 1, 0, 0, 1, 1, ATT_K,    64, 1,   0, 100, 300, 202, 200,  6);
    prog[2] = mk(OP_CONV, 1, 0, 0, 1, 1, ATT_V,    64, 1,   0, 200, 400, 203, 300,  6);
    prog[2].k_sel = 1'b0; prog[2].k_base = 10'd100;
    prog[3] = mk(OP_CONV, 1, 0, 0, 1, 1, ATT_Q,    64, 1,   0, 300, 500, 204, 400,  4);
    prog[4] = mk(OP_CONV, 0, 1, 1, 1, 0, ATT_NONE, 32, 1, 300,   0, 600, 205, 500, 12);
    prog[5] = mk(OP_CONV, 1, 1, 0, 0, 1, ATT_NONE, 64, 1,   0, 500, 700, 205, 500, 12);
    prog[4].g0 = 4'd1; prog[5].g0 = 4'd1;
    prog[6] = mk(OP_CONV, 1, 0, 1, 1, 1, ATT_NONE, 64, 1,   0, 550, 400, 206, 580, 10);
    prog[6].h = 6'd4; prog[6].w = 6'd4; prog[6].pool_shift = 2'd1;
    prog[7] = mk(OP_TCONV, 0, 1, 1, 1, 1, ATT_NONE, 32, 1, 550, 600, 300, 207, 600, 6);
    prog[7].h = 6'd4; prog[7].w = 6'd4;
    prog[8] = mk(OP_FC,   1, 0, 0, 0, 0, ATT_NONE, 64, 1, 500,   0,   0,   0,   0,  0);
    prog[8].pool_shift = 2'd2; prog[8].fc_group = 3'd1;
    prog[9] = '0;  // OP_END
    for (int i = 0; i < 10; i++) hwrite(MEM_INS, i, WGT_WIDTH'(prog[i]));

    // ---- reference
    for (int i = 0; i < 8; i++) ref_conv(prog[i]);
    ref_fc(prog[8]);

    // ---- run
    @(negedge clk); start = 1'b1; @(negedge clk); start = 1'b0;
    t0 = $time;
    wait (done);
    t1 = $time;
    repeat (2) @(negedge clk);
    $display("program finished in %0d cycles (busy counter %0d)", (t1 - t0) / 10, stat_cycles);

    // ---- compare spike maps
    for (int s = 0; s < 2; s++)
      for (int a = 0; a < 700; a++) begin
        hread(s[0], a, rd);
        checks++;
        if (rd !== spk_ref[s][a]) begin
          failures++;
          if (failures < 10) $display("spike mismatch sram %0d addr %0d", s, a);
        end
      end
    // ---- compare membrane potentials
    for (int a = 0; a < 700; a++) begin
      checks++;
      if (dut.u_neuron_sram.mem[a] !== nrn_ref[a]) begin
        failures++;
        if (failures < 10) $display("neuron mismatch addr %0d", a);
      end
    end
    // ---- compare FC outputs
    @(negedge clk);
    for (int l = 0; l < FC_LANES; l++) begin
      checks++;
      if ($signed(fc_res_data[l*16 +: 16]) !== fc_ref[l]) begin
        failures++;
        $display("fc mismatch lane %0d: %0d vs %0d", l, $signed(fc_res_data[l*16 +: 16]), fc_ref[l]);
      end
    end

    // ---- mechanisms
    $display("events=%0d overlaps=%0d accums=%0d fc_events=%0d efifo_stalls=%0d skipped_pos=%0d pad_taps=%0d res_src=%0d v=%0d q=%0d spikes=%0d",
             stat_events, stat_overlaps, stat_accums, stat_fc_events, dut.u_epe.efifo_stall_count,
             n_skip_pos, n_pad_taps, n_res_src, n_v, n_q, n_spikes);
    checks++; if (stat_overlaps == 0) begin failures++; $display("no APEC overlap seen"); end
    checks++; if (dut.u_epe.efifo_stall_count == 0) begin failures++; $display("no eFIFO back-pressure seen"); end
    checks++; if (stat_fc_events == 0) begin failures++; $display("no FC event seen"); end
    $display("pooled layers=%0d leaking potentials=%0d group-offset layers=%0d transposed layers=%0d",
             n_pool, n_leak, n_g0, n_tconv);
    checks++; if (n_pool == 0 || n_leak == 0 || n_g0 == 0 || n_tconv == 0) begin failures++; $display("pooling, leak or group offset did not occur"); end
    checks++; if (n_skip_pos == 0 || n_pad_taps == 0 || n_res_src == 0 || n_v == 0 || n_q == 0 || n_multi_g == 0)
      begin failures++; $display("a mechanism did not occur"); end
    checks++; if (stat_accums != stat_events - stat_fc_events) begin failures++; $display("event/accumulation count mismatch"); end
    checks++; if (!(n_spikes > 100)) begin failures++; $display("too few spikes for a meaningful test"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
