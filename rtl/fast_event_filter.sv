// fast_event_filter: turns one spike word (all input channels of a spatial
// position) into a stream of channel indices, one valid event per cycle.
// Following the paper's Fig. 4, a register holds the events not yet issued;
// the lowest active bit is isolated as a one-hot code (r AND (NOT r + 1)),
// the one-hot code is mapped to its bit position by a look-up encoder, and
// the register is updated with r AND NOT(one-hot) when the event is taken.
// A new word is loaded through the input multiplexer only while the filter is
// idle (register all zero). Interface: load/load_word (accepted when idle),
// ev_valid/ev_ch/ev_ready handshake towards the AER FIFO. Latency: the first
// event is offered the cycle after the load; then one event per cycle.
module fast_event_filter #(
  parameter int unsigned N = 512,
  localparam int unsigned IW = $clog2(N)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          load,
  input  logic [N-1:0]  load_word,
  output logic          idle,
  output logic          ev_valid,
  output logic [IW-1:0] ev_ch,
  input  logic          ev_ready
);
  logic [N-1:0] r, onehot;

  assign onehot   = r & (~r + N'(1));
  assign ev_valid = |r;
  assign idle     = ~|r;

  // one-hot -> index look-up: bit b of the index is the OR of all one-hot
  // positions whose index has bit b set
  always_comb begin
    ev_ch = '0;
    for (int i = 0; i < N; i++) begin
      ev_ch |= onehot[i] ? IW'(i) : '0;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) r <= '0;
    else if (idle) begin
      if (load) r <= load_word;
    end else if (ev_ready) r <= r & ~onehot;
  end

  a_load_when_idle: assert property (@(posedge clk) disable iff (!rst_n) load |-> idle);
endmodule
