// tb_sparse_core: runs the Sparse Core over a 4x5 map of 64-channel spike
// words (odd width, so row ends are unpaired; one empty position) from a
// behavioural one-cycle-latency SRAM, with APEC on, with APEC off and in FC
// mode. A consumer pops the AER FIFO and accepts sequence-end tokens with
// random delays. For every token the events received since the previous one
// must be exactly the expected sequence (overlap, then each position's
// non-overlap part) with the expected tag, position and push bit. Channels at
// or above cin must never appear. Two more runs use max pooling of the input
// (2x2 with APEC on, 4x4 with APEC off): each scanned word must be the OR of
// its window in the stored full-size map.
module tb_sparse_core;
  import exspike_pkg::*;
  localparam int N = 64;
  logic clk = 0, rst_n = 0; always #5 clk = ~clk;
  logic [1:0] mp_shift;
  logic start, fc_mode, apec_en, done, rd_en, aer_valid, aer_pop, seq_valid, seq_push, seq_ready;
  logic [5:0] h, w, seq_y, seq_x; logic [9:0] cin; logic [SPK_AW-1:0] src_base, rd_addr, seq_pos;
  logic [N-1:0] rd_data; aer_t aer_data; seq_tag_e seq_tag; logic [31:0] ev_count, ov_count;
  logic [N-1:0] mem [256];
  int checks = 0, failures = 0;

  sparse_core #(.N(N), .AERD(4)) dut (.*);

  always_ff @(posedge clk) if (rd_en) rd_data <= mem[rd_addr[7:0]];

  typedef struct { seq_tag_e tag; logic push; int pos; logic [N-1:0] ev; } seq_t;
  seq_t exp_q [$];
  logic [N-1:0] got;
  int n_tokens, n_events_exp;

  // consumer
  always @(negedge clk) begin
    aer_pop   = aer_valid && ($urandom_range(99) < 70);
    seq_ready = $urandom_range(99) < 40;
  end
  always @(posedge clk) if (rst_n) begin
    if (aer_valid && aer_pop) begin
      checks++;
      if (int'(aer_data.ch) >= int'(cin)) begin failures++; $display("channel above cin"); end
      if (!fc_mode && got[aer_data.ch]) begin failures++; $display("duplicate event"); end
      got[aer_data.ch] = 1'b1;
    end
    if (seq_valid && seq_ready) begin
      seq_t e;
      n_tokens++;
      checks++;
      if (exp_q.size() == 0) begin failures++; $display("unexpected token"); end
      else begin
        e = exp_q.pop_front();
        if (seq_tag != e.tag || seq_push != e.push || int'(seq_pos) != e.pos || got != e.ev ||
            int'(seq_y) != e.pos / int'(w) || int'(seq_x) != e.pos % int'(w)) begin
          failures++;
          if (failures < 6) $display("token mismatch pos %0d tag %0d/%0d", seq_pos, seq_tag, e.tag);
        end
      end
      got = '0;
    end
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // word of scanned position p: the OR of its pooling window
  function automatic logic [N-1:0] word(int p, int k);
    logic [N-1:0] r = '0;
    int y = p / int'(w), x = p % int'(w), sw = int'(w) << k;
    for (int dy = 0; dy < (1 << k); dy++)
      for (int dx = 0; dx < (1 << k); dx++)
        r |= mem[int'(src_base) + ((y << k) + dy) * sw + (x << k) + dx];
    return r;
  endfunction

  task automatic run(logic apec, logic fc, int k = 0);
    int hw = int'(h) * int'(w);
    logic [N-1:0] msk = '0;
    int ev_before = int'(ev_count);
    for (int i = 0; i < int'(cin); i++) msk[i] = 1'b1;
    exp_q = {}; n_events_exp = 0;
    for (int p = 0; p < hw; ) begin
      logic [N-1:0] s0 = word(p, k) & msk, s1, ov;
      int x = p % int'(w);
      bit pr = apec && !fc && (x + 1 < int'(w));
      s1 = pr ? (word(p + 1, k) & msk) : '0;
      ov = pr ? (s0 & s1) : '0;
      if ((s0 | s1) != '0) begin
        if (ov != '0) exp_q.push_back('{TAG_OV, 1'b0, p, ov});
        exp_q.push_back('{pr ? TAG_P0 : TAG_SINGLE, |s0, p, s0 & ~ov});
        if (pr) exp_q.push_back('{TAG_P1, |s1, p + 1, s1 & ~ov});
        n_events_exp += $countones(s0) + $countones(s1) - $countones(ov);
      end
      p += pr ? 2 : 1;
    end
    if (fc) exp_q = {};
    got = '0; n_tokens = 0;
    apec_en = apec; fc_mode = fc; mp_shift = 2'(k);
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    wait (done); @(negedge clk); @(negedge clk);
    checks++; if (exp_q.size() != 0) begin failures++; $display("%0d tokens missing", exp_q.size()); end
    checks++; if (int'(ev_count) - ev_before != n_events_exp) begin failures++; $display("event count %0d vs %0d", int'(ev_count) - ev_before, n_events_exp); end
    if (fc) begin checks++; if ($countones(got) == 0) failures++; end
  endtask

  initial begin
    start = 0; fc_mode = 0; apec_en = 0; mp_shift = 0; h = 6'd4; w = 6'd5; cin = 10'd48; src_base = 10'd10;
    for (int a = 0; a < 256; a++) begin
      mem[a] = {$urandom, $urandom} & {$urandom, $urandom};
      if (a > 10) mem[a] = (mem[a-1] & {$urandom, $urandom}) | ({$urandom, $urandom} & {$urandom, $urandom} & {$urandom, $urandom});
    end
    mem[17] = '0;
    mem[18] = 64'hFFFF_0000_0000_0000;   // only channels >= cin: behaves as empty
    repeat (2) @(negedge clk); rst_n = 1;
    run(1, 0);
    checks++; if (ov_count == 0) begin failures++; $display("no overlap found"); end
    run(0, 0);
    run(0, 1);
    // pooled scans: 2x2 over an 8x10 stored map, 4x4 over an 8x12 one
    for (int a = 10; a < 256; a++) mem[a] = {$urandom, $urandom} & {$urandom, $urandom} & {$urandom, $urandom};
    run(1, 0, 1);
    h = 6'd2; w = 6'd3; src_base = 10'd100;
    run(0, 0, 2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
