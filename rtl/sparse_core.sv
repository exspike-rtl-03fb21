// sparse_core: the Sparse Core. For every spatial position of the input map
// (row-major, one Spike SRAM word per position) it reads the spike word,
// optionally pairs it with its right-hand neighbour for APEC, and feeds the
// resulting spike sequences one at a time through the fast event filter into
// the AER FIFO. With APEC a pair gives up to three sequences: the overlap
// (tag OV), then the non-overlap parts of the left (P0) and right (P1)
// position; without it each position is one sequence (SINGLE). All-zero
// positions are skipped entirely.
// As in the paper, a sequence is complete when the AER FIFO is empty and the
// filter idle; the core then offers a sequence-end token (seq_valid/seq_ready,
// with tag, position and whether the position had any spike) so the EPE core
// can move its partial sums on. In FC mode (EAFC layers) no tokens are sent.
// Max pooling: with mp_shift = k > 0 the stored map is (h<<k) x (w<<k) and
// each scanned position (y,x) is the OR of the 2^k x 2^k source words
// ((y<<k)+dy, (x<<k)+dx), i.e. spike max pooling fused into the next layer's
// input read; h and w are then the pooled sizes.
// Timing: one read per cycle (1 per position, 4^k with pooling, twice that
// for an APEC pair) plus three cycles of overhead per position, then one
// cycle per event in the filter. Channels at or above cin are masked off.
// The pairing rule (horizontal neighbours in the same row), the token
// handshake and the place of max pooling are this design's choices; the
// paper only lists max pooling among the supported operators.
module sparse_core
  import exspike_pkg::*;
#(
  parameter int unsigned N    = CIN_MAX,
  parameter int unsigned AERD = AER_DEPTH
) (
  input  logic              clk,
  input  logic              rst_n,
  // layer control
  input  logic              start,
  input  logic              fc_mode,
  input  logic              apec_en,
  input  logic [1:0]        mp_shift,
  input  logic [5:0]        h,
  input  logic [5:0]        w,
  input  logic [9:0]        cin,
  input  logic [SPK_AW-1:0] src_base,
  output logic              done,
  // spike buffer read port (1-cycle latency)
  output logic              rd_en,
  output logic [SPK_AW-1:0] rd_addr,
  input  logic [N-1:0]      rd_data,
  // AER FIFO read side
  output logic              aer_valid,
  output aer_t              aer_data,
  input  logic              aer_pop,
  // sequence-end token to the EPE core
  output logic              seq_valid,
  output seq_tag_e          seq_tag,
  output logic              seq_push,
  output logic [SPK_AW-1:0] seq_pos,
  output logic [5:0]        seq_y,
  output logic [5:0]        seq_x,
  input  logic              seq_ready,
  // statistics
  output logic [31:0]       ev_count,
  output logic [31:0]       ov_count
);
  typedef enum logic [2:0] {S_IDLE, S_RD0, S_FETCH, S_WAIT, S_SEL, S_LOAD, S_DRAIN, S_END} state_e;
  state_e state;

  logic [SPK_AW-1:0] p;
  logic [5:0]        x, y;
  logic              pair;
  logic [N-1:0]      s0, s1, ov, n0, n1;
  logic [1:0]        seq_idx;      // 0: OV, 1: P0/SINGLE, 2: P1
  logic [10:0]       hw;

  assign hw = 11'(h) * 11'(w);

  // channels at or above cin are not part of the layer's input
  logic [N-1:0] ch_mask;
  always_comb
    for (int i = 0; i < N; i++) ch_mask[i] = (i < 32'(cin));

  apec_compress #(.N(N)) u_apec (.pair(pair), .s0(s0), .s1(s1), .ov(ov), .n0(n0), .n1(n1));

  // current sequence word and tag
  logic [N-1:0] cur_word;
  seq_tag_e     cur_tag;
  logic         cur_push;
  logic [SPK_AW-1:0] cur_pos;
  logic [5:0]   cur_x;
  always_comb begin
    unique case (seq_idx)
      2'd0:    begin cur_word = ov; cur_tag = TAG_OV; cur_push = 1'b0; end
      2'd1:    begin cur_word = n0; cur_tag = pair ? TAG_P0 : TAG_SINGLE; cur_push = |s0; end
      default: begin cur_word = n1; cur_tag = TAG_P1; cur_push = |s1; end
    endcase
    cur_pos = (seq_idx == 2'd2) ? p + 1'b1 : p;
    cur_x   = (seq_idx == 2'd2) ? x + 1'b1 : x;
  end

  // fast event filter -> AER FIFO
  logic f_idle, f_load, f_ev_valid, fifo_full, fifo_empty;
  logic [CH_BITS-1:0] f_ch;
  aer_t fifo_in, fifo_out;

  fast_event_filter #(.N(N)) u_filter (
    .clk, .rst_n, .load(f_load), .load_word(cur_word), .idle(f_idle),
    .ev_valid(f_ev_valid), .ev_ch(f_ch), .ev_ready(!fifo_full));

  assign fifo_in = '{pos: cur_pos, y: y, x: cur_x, ch: CH_BITS'(f_ch)};

  sync_fifo #(.WIDTH($bits(aer_t)), .DEPTH(AERD)) u_aer_fifo (
    .clk, .rst_n, .push(f_ev_valid && !fifo_full), .wdata(fifo_in),
    .pop(aer_pop), .rdata(fifo_out), .full(fifo_full), .empty(fifo_empty), .count());

  assign aer_valid = !fifo_empty;
  assign aer_data  = fifo_out;
  assign f_load    = (state == S_LOAD);

  assign seq_valid = (state == S_END) && !fc_mode && ((s0 | s1) != '0);
  assign seq_tag   = cur_tag;
  assign seq_push  = cur_push;
  assign seq_pos   = cur_pos;
  assign seq_y     = y;
  assign seq_x     = cur_x;

  // read engine: issue counter ic walks the 4^k source words of the left
  // position, then those of the right one; data returns one cycle later and
  // is OR-ed into s0 or s1
  logic [7:0]  ic, ic_last;
  logic        rdv_q, rtgt_q;
  logic        rd_pi;                 // which position of the pair ic is on
  logic [2:0]  rd_dy, rd_dx;
  logic [15:0] src_w, src_y, src_x;
  always_comb begin
    ic_last = (8'(1) << (2 * mp_shift) << pair) - 8'd1;
    rd_pi   = pair && ic[2 * mp_shift];
    rd_dy   = 3'((ic >> mp_shift) & ((8'(1) << mp_shift) - 8'd1));
    rd_dx   = 3'(ic & ((8'(1) << mp_shift) - 8'd1));
    src_w   = 16'(w) << mp_shift;
    src_y   = (16'(y) << mp_shift) + 16'(rd_dy);
    src_x   = ((16'(x) + 16'(rd_pi)) << mp_shift) + 16'(rd_dx);
    rd_en   = (state == S_FETCH);
    rd_addr = src_base + SPK_AW'(src_y * src_w + src_x);
  end

  // next sequence after seq_idx, or 3 when the group is finished
  function automatic logic [1:0] next_seq(logic [1:0] idx, logic pr);
    if (idx == 2'd0) return 2'd1;
    if (idx == 2'd1 && pr) return 2'd2;
    return 2'd3;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      p        <= '0;
      x        <= '0;
      y        <= '0;
      pair     <= 1'b0;
      s0       <= '0;
      s1       <= '0;
      seq_idx  <= '0;
      ic       <= '0;
      rdv_q    <= 1'b0;
      rtgt_q   <= 1'b0;
      done     <= 1'b0;
      ev_count <= '0;
      ov_count <= '0;
    end else begin
      done <= 1'b0;
      if (f_ev_valid && !fifo_full) ev_count <= ev_count + 1;
      rdv_q  <= rd_en;
      rtgt_q <= rd_pi;
      if (rdv_q) begin
        if (rtgt_q) s1 <= s1 | (rd_data & ch_mask);
        else        s0 <= s0 | (rd_data & ch_mask);
      end
      unique case (state)
        S_IDLE: if (start) begin
          p <= '0; x <= '0; y <= '0;
          state <= (hw == 0) ? S_IDLE : S_RD0;
          done  <= (hw == 0);
        end
        S_RD0: begin
          pair  <= apec_en && !fc_mode && (7'(x) + 7'd1 < 7'(w));
          s0    <= '0;
          s1    <= '0;
          ic    <= '0;
          state <= S_FETCH;
        end
        S_FETCH: begin
          ic <= ic + 8'd1;
          if (ic == ic_last) state <= S_WAIT;
        end
        S_WAIT: state <= S_SEL;          // last word is merged in this cycle
        S_SEL: begin
          state   <= S_LOAD;
          seq_idx <= (pair && |(s0 & s1)) ? 2'd0 : 2'd1;   // skip an empty overlap
        end
        S_LOAD: begin
          if ((s0 | s1) == '0) begin
            state <= S_END;        // nothing at this position: fall to advance
          end else begin
            if (seq_idx == 2'd0) ov_count <= ov_count + 1;
            state <= S_DRAIN;
          end
        end
        S_DRAIN: if (f_idle && fifo_empty) state <= S_END;
        S_END: begin
          if ((s0 | s1) == '0 || fc_mode || seq_ready) begin
            if ((s0 | s1) != '0 && next_seq(seq_idx, pair) != 2'd3) begin
              seq_idx <= next_seq(seq_idx, pair);
              state   <= S_LOAD;
            end else begin
              // advance to the next position (or pair of positions)
              if (11'(p) + (pair ? 11'd2 : 11'd1) >= hw) begin
                state <= S_IDLE;
                done  <= 1'b1;
              end else begin
                p     <= p + (pair ? SPK_AW'(2) : SPK_AW'(1));
                if (7'(x) + (pair ? 7'd2 : 7'd1) >= 7'(w)) begin
                  x <= '0;
                  y <= y + 1'b1;
                end else begin
                  x <= x + (pair ? 6'd2 : 6'd1);
                end
                state <= S_RD0;
              end
            end
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
