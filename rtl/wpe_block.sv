// wpe_block: the WPE block of one EPE cluster: 3x3 weight processing elements
// (WPE units), one per kernel tap. For every input event the cluster's 3x3
// kernel slice (nine 8-bit weights, read from the Weight SRAM word of the
// event's input channel) is added to the nine partial-sum accumulators, so the
// block accumulates the event's whole target region in one cycle.
// It also holds acc_ov, the cache of the APEC overlap partial sums (the
// storage the paper names as the main cost of APEC, Co x k^2 x w_acc bits):
//   save_ov   : acc_ov <= acc              (end of an overlap sequence)
//   reload_ov : acc <= acc_ov              (after a P0 sequence was emitted)
//   clear     : acc <= 0, acc_ov <= 0      (after P1 / SINGLE was emitted)
// An add in the same cycle as a command is not allowed (the EPE core never
// does it). Accumulators are 16 bit and wrap, like the membrane potential.
module wpe_block
  import exspike_pkg::*;
(
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        add,
  input  logic [KTAPS*W_BITS-1:0]     weights,   // tap t at [t*8 +: 8], t = ky*3+kx
  input  logic                        save_ov,
  input  logic                        reload_ov,
  input  logic                        clear,
  output logic [KTAPS*V_BITS-1:0]     psum       // tap t at [t*16 +: 16]
);
  logic signed [V_BITS-1:0] acc    [KTAPS];
  logic signed [V_BITS-1:0] acc_ov [KTAPS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int t = 0; t < KTAPS; t++) begin
        acc[t]    <= '0;
        acc_ov[t] <= '0;
      end
    end else begin
      for (int t = 0; t < KTAPS; t++) begin
        if (clear) begin
          acc[t]    <= '0;
          acc_ov[t] <= '0;
        end else if (reload_ov) begin
          acc[t] <= acc_ov[t];
        end else if (save_ov) begin
          acc_ov[t] <= acc[t];
        end else if (add) begin
          acc[t] <= acc[t] + V_BITS'(signed'(weights[t*W_BITS +: W_BITS]));
        end
      end
    end
  end

  always_comb
    for (int t = 0; t < KTAPS; t++) psum[t*V_BITS +: V_BITS] = acc[t];

  a_one_cmd: assert property (@(posedge clk) disable iff (!rst_n)
                              $onehot0({add, save_ov, reload_ov, clear}));
endmodule
