// epe_cluster: one EPE cluster, responsible for one output channel of the
// current 32-channel group. It chains the paper's three elements:
//  * WPE block: 3x3 weight accumulation per event (see wpe_block);
//  * elastic FIFO (eFIFO): the nine partial sums of a finished position are
//    pushed here (efifo_push) and wait for the MPE;
//  * MPE: adds one selected partial sum (tap mpe_tap of the eFIFO head) to a
//    membrane potential read from the Neuron SRAM and registers the result
//    (mpe_capture); mpe_v is written back by the EPE core;
//  * FPE: adds the channel bias to a membrane potential, compares with the
//    threshold (>=) and registers both the spike and the new potential
//    (hard reset to 0 after a spike; with leak set, a potential that does
//    not fire is halved, an arithmetic shift, before it is stored).
// All clusters of the EPE core receive the same control signals; only the
// weights, the Neuron SRAM slice and the bias differ. Adds saturate to 16 bit.
// The paper names LIF neurons with tau = 0.5; this design reads that as a
// decay factor of one half per timestep, applied at the fire step so that the
// next timestep's inputs add to the decayed potential. Reset-to-zero,
// saturation and where the leak is applied are this design's choices.
module epe_cluster
  import exspike_pkg::*;
#(
  parameter int unsigned EFD = EFIFO_DEPTH
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // WPE block
  input  logic                    add,
  input  logic [KTAPS*W_BITS-1:0] weights,
  input  logic                    save_ov,
  input  logic                    reload_ov,
  input  logic                    clear,
  // eFIFO
  input  logic                    efifo_push,
  input  logic                    efifo_pop,
  output logic                    efifo_full,
  output logic                    efifo_empty,
  // MPE
  input  logic [3:0]              mpe_tap,
  input  logic                    mpe_capture,
  input  logic signed [V_BITS-1:0] mpe_vin,
  output logic signed [V_BITS-1:0] mpe_v,
  // FPE
  input  logic                    bias_load,
  input  logic signed [V_BITS-1:0] bias_in,
  input  logic signed [V_BITS-1:0] thresh,
  input  logic                    leak,
  input  logic                    fpe_capture,
  input  logic signed [V_BITS-1:0] fpe_vin,
  output logic signed [V_BITS-1:0] fpe_v,
  output logic                    fpe_spike
);
  logic [KTAPS*V_BITS-1:0] psum, head;

  wpe_block u_wpe (.clk, .rst_n, .add, .weights, .save_ov, .reload_ov, .clear, .psum);

  sync_fifo #(.WIDTH(KTAPS*V_BITS), .DEPTH(EFD)) u_efifo (
    .clk, .rst_n, .push(efifo_push), .wdata(psum), .pop(efifo_pop), .rdata(head),
    .full(efifo_full), .empty(efifo_empty), .count());

  logic signed [V_BITS-1:0] bias_q;
  logic signed [V_BITS-1:0] fsum;
  assign fsum = sat_add(fpe_vin, bias_q);

  // potential kept when no spike: halved (arithmetic shift) when leaking
  logic signed [V_BITS-1:0] fkeep;
  assign fkeep = leak ? (fsum >>> 1) : fsum;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mpe_v     <= '0;
      bias_q    <= '0;
      fpe_v     <= '0;
      fpe_spike <= 1'b0;
    end else begin
      if (mpe_capture) mpe_v <= sat_add(mpe_vin, head[mpe_tap*V_BITS +: V_BITS]);
      if (bias_load)   bias_q <= bias_in;
      if (fpe_capture) begin
        fpe_spike <= (fsum >= thresh);
        fpe_v     <= (fsum >= thresh) ? '0 : fkeep;
      end
    end
  end
endmodule
