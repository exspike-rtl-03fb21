// tb_epe_core: a 4-cluster EPE core on a 5x6 map with 16 input channels,
// output group 1. The testbench plays the Sparse Core: it offers the events of
// each sequence (APEC pairs: overlap, P0, P1; unpaired positions: SINGLE),
// waits until they are taken, then offers the sequence-end token. Weight and
// Neuron SRAM are one-cycle behavioural memories. After accumulation it fires
// the group and checks every membrane potential and spike against a direct
// convolution model (stride 1, zero padding, saturating adds), then repeats
// with a 1x1 kernel and the leak on (potentials that do not fire are halved),
// and finally as a stride-2 transposed convolution onto a 10x12 output map
// (target of tap (ky,kx) is (2y-1+ky, 2x-1+kx)) with APEC pairs.
module tb_epe_core;
  import exspike_pkg::*;
  localparam int NC = 4, WW = NC * 72, NW = NC * 16;
  localparam int H = 5, W = 6, CIN = 16;
  logic clk = 0, rst_n = 0; always #5 clk = ~clk;

  logic [5:0] h, w, seq_y, seq_x; logic [9:0] cin; logic [3:0] g; logic ksize3, leak, tconv;
  logic [10:0] w_base, b_base, wgt_raddr; logic [12:0] n_base, nrn_raddr, nrn_waddr;
  logic signed [15:0] thresh;
  logic aer_valid, aer_pop, seq_valid, seq_push, seq_ready, wgt_re, nrn_re, nrn_we;
  aer_t aer_data; seq_tag_e seq_tag; logic [SPK_AW-1:0] seq_pos, spk_pos;
  logic [WW-1:0] wgt_rdata; logic [NW-1:0] nrn_rdata, nrn_wdata;
  logic mpe_idle, fire_start, fire_done, spk_valid, spk_ready; logic [NC-1:0] spk_data;
  logic [31:0] acc_count, efifo_stall_count;

  epe_core #(.N_CL(NC), .EFD(2)) dut (.*);

  logic [WW-1:0] wmem [256];
  logic [NW-1:0] nmem [256], nref [256];
  logic [CIN-1:0] smap [H*W];
  logic [NC-1:0] spk_ref [4*H*W];
  int checks = 0, failures = 0;

  always_ff @(posedge clk) begin
    if (wgt_re) wgt_rdata <= wmem[wgt_raddr[7:0]];
    if (nrn_re) nrn_rdata <= nmem[nrn_raddr[7:0]];
    if (nrn_we) nmem[nrn_waddr[7:0]] <= nrn_wdata;
  end

  function automatic logic signed [15:0] sat(int v);
    return (v > 32767) ? 16'sd32767 : (v < -32768) ? -16'sd32768 : 16'(v);
  endfunction

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic send_seq(logic [CIN-1:0] word, seq_tag_e tag, logic push, int pos);
    for (int ch = 0; ch < CIN; ch++) if (word[ch]) begin
      @(negedge clk);
      aer_valid = 1; aer_data = '{pos: SPK_AW'(pos), y: 6'(pos / W), x: 6'(pos % W), ch: CH_BITS'(ch)};
      #1; while (!aer_pop) begin @(negedge clk); #1; end
    end
    @(negedge clk); aer_valid = 0;
    seq_valid = 1; seq_tag = tag; seq_push = push; seq_pos = SPK_AW'(pos); seq_y = 6'(pos / W); seq_x = 6'(pos % W);
    #1; while (!seq_ready) begin @(negedge clk); #1; end
    @(posedge clk); #1;
    seq_valid = 0;
  endtask

  task automatic run_layer(logic k3, logic tc = 0);
    int OH = tc ? 2*H : H, OW = tc ? 2*W : W;
    ksize3 = k3; tconv = tc;
    // reference: direct convolution
    for (int a = 0; a < 256; a++) nref[a] = nmem[a];
    for (int p = 0; p < H*W; p++) begin
      int y = p / W, x = p % W;
      if (smap[p] == '0) continue;
      for (int t = 0; t < 9; t++) begin
        int ty = tc ? 2*y - 1 + t/3 : y + 1 - t/3, tx = tc ? 2*x - 1 + t%3 : x + 1 - t%3;
        if (ty < 0 || ty >= OH || tx < 0 || tx >= OW || (!k3 && !tc && t != 4)) continue;
        for (int c = 0; c < NC; c++) begin
          logic [15:0] s = 0;
          int a = 5 + OH*OW + ty*OW + tx;
          for (int ch = 0; ch < CIN; ch++) if (smap[p][ch]) s += 16'(signed'(wmem[3 + CIN + ch][c*72 + t*8 +: 8]));
          nref[a][c*16 +: 16] = sat(int'($signed(nref[a][c*16 +: 16])) + int'($signed(s)));
        end
      end
    end
    for (int p = 0; p < OH*OW; p++) begin
      int a = 5 + OH*OW + p;
      for (int c = 0; c < NC; c++) begin
        int v = int'(sat(int'($signed(nref[a][c*16 +: 16])) + int'($signed(wmem[61][c*16 +: 16]))));
        spk_ref[p][c] = (v >= int'(thresh));
        nref[a][c*16 +: 16] = spk_ref[p][c] ? 16'd0 : 16'(leak ? (v >>> 1) : v);
      end
    end
    // drive
    for (int p = 0; p < H*W; ) begin
      bit pr = (p % W) + 1 < W;
      logic [CIN-1:0] s0 = smap[p], s1 = pr ? smap[p+1] : '0, ov = s0 & s1;
      if ((s0 | s1) != '0) begin
        if (pr) begin
          if (ov != '0) send_seq(ov, TAG_OV, 0, p);
          send_seq(s0 & ~ov, TAG_P0, |s0, p);
          send_seq(s1 & ~ov, TAG_P1, |s1, p + 1);
        end else send_seq(s0, TAG_SINGLE, 1, p);
      end
      p += pr ? 2 : 1;
    end
    while (!mpe_idle) @(negedge clk);
    fire_start = 1; @(negedge clk); fire_start = 0;
    while (!fire_done) begin
      spk_ready = $urandom_range(1);
      #1;
      if (spk_valid && spk_ready) begin
        checks++;
        if (spk_data !== spk_ref[spk_pos]) begin failures++; if (failures < 5) $display("spike mismatch pos %0d", spk_pos); end
      end
      @(negedge clk);
    end
    for (int a = 0; a < 256; a++) begin
      checks++;
      if (nmem[a] !== nref[a]) begin failures++; if (failures < 5) $display("neuron mismatch %0d", a); end
    end
  endtask

  initial begin
    h = 6'(H); w = 6'(W); cin = 10'(CIN); g = 4'd1; w_base = 11'd3; b_base = 11'd60; n_base = 13'd5; thresh = 16'sd40;
    aer_valid = 0; aer_data = '0; seq_valid = 0; seq_tag = TAG_SINGLE; seq_push = 0; seq_pos = '0; seq_y = 0; seq_x = 0;
    fire_start = 0; spk_ready = 0; ksize3 = 1; leak = 0; tconv = 0;
    for (int a = 0; a < 256; a++) begin
      for (int i = 0; i < WW / 32; i++) wmem[a][i*32 +: 32] = $urandom;
      nmem[a] = '0;
    end
    for (int c = 0; c < NC; c++) wmem[61][c*16 +: 16] = 16'($signed($urandom_range(20)) - 10);
    for (int p = 0; p < H*W; p++) smap[p] = (p == 7) ? '0 : 16'($urandom | $urandom);
    for (int a = 0; a < 256; a++) for (int c = 0; c < NC; c++) nmem[a][c*16 +: 16] = 16'($signed($urandom_range(60)) - 30);
    repeat (2) @(negedge clk); rst_n = 1;
    run_layer(1);
    leak = 1;
    run_layer(0);
    leak = 0;
    run_layer(1, 1);
    checks++; if (efifo_stall_count == 0) begin failures++; $display("no eFIFO stall"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
