// sync_fifo: synchronous first-word-fall-through FIFO. It is the AER FIFO of
// the Sparse Core (event addresses from the fast event filter to the EPE /
// EAFC core) and the elastic FIFO (eFIFO) of each EPE cluster (3x3 partial
// sums from the WPE block to the MPE). The paper names both FIFOs and their
// role; depth, first-word-fall-through reads and the full/empty flags are this
// design's choice. rdata shows the oldest entry while empty is low; pop
// removes it at the clock edge. push while full and pop while empty are
// protocol errors caught by assertions.
module sync_fifo #(
  parameter int unsigned WIDTH = 32,
  parameter int unsigned DEPTH = 16,
  localparam int unsigned PW = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             push,
  input  logic [WIDTH-1:0] wdata,
  input  logic             pop,
  output logic [WIDTH-1:0] rdata,
  output logic             full,
  output logic             empty,
  output logic [PW:0]      count
);
  logic [WIDTH-1:0] mem [DEPTH];
  logic [PW-1:0] wptr, rptr;

  assign full  = (count == (PW+1)'(DEPTH));
  assign empty = (count == '0);
  assign rdata = mem[rptr];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr  <= '0;
      rptr  <= '0;
      count <= '0;
    end else begin
      if (push && !full) begin
        wptr <= (wptr == PW'(DEPTH - 1)) ? '0 : wptr + 1'b1;
      end
      if (pop && !empty) begin
        rptr <= (rptr == PW'(DEPTH - 1)) ? '0 : rptr + 1'b1;
      end
      count <= count + (PW+1)'(push && !full) - (PW+1)'(pop && !empty);
    end
  end

  always_ff @(posedge clk) if (push && !full) mem[wptr] <= wdata;

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) !(push && full));
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) !(pop && empty));
endmodule
