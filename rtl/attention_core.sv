// attention_core: the Attention Core for spike-driven self-attention. It sits
// between the FPEs and the spike buffers: every 32-channel spike vector the
// EPE core fires (one position = one token row, lane g of the channel word)
// passes through it on its way to the Spike or Residual Spike SRAM.
//  * ATT_NONE / ATT_K: the vector is written back unchanged (1 cycle).
//  * ATT_V: the matching K row (same position and lane, from the K map) is
//    read while V is written back; K AND V (the KV mask, never stored) is
//    OR-ed column-wise into the KV status register (2 cycles).
//  * ATT_Q: the written vector is Q AND KV status (the attention spikes).
// The KV status register holds one bit per channel (CIN_MAX bits, registers,
// not BRAM, as in the paper) and is cleared when a V layer starts
// (layer_start with mode ATT_V). The two-stage order (K, then V, then Q) and
// the AND/OR functions follow the paper's Fig. 6; lane addressing and the
// handshake are this design's choices.
module attention_core
  import exspike_pkg::*;
#(
  parameter int unsigned N_CL = N_CLUSTER,
  parameter int unsigned N    = CIN_MAX,
  localparam int unsigned NL  = N / N_CL
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              layer_start,
  input  att_mode_e         mode,
  input  logic [3:0]        g,
  input  logic [SPK_AW-1:0] dst_base,
  input  logic [SPK_AW-1:0] k_base,
  // spikes from the EPE core
  input  logic              spk_valid,
  input  logic [N_CL-1:0]   spk_data,
  input  logic [SPK_AW-1:0] spk_pos,
  output logic              spk_ready,
  // K read port (data from the SRAM selected by the layer's k_sel)
  output logic              k_re,
  output logic [SPK_AW-1:0] k_raddr,
  input  logic [N-1:0]      k_rdata,
  // write-back port (SRAM selected by the layer's dst_sel)
  output logic              wr_en,
  output logic [SPK_AW-1:0] wr_addr,
  output logic [NL-1:0]     wr_lane,
  output logic [N-1:0]      wr_data,
  // KV status (observable for debug and tests)
  output logic [N-1:0]      kv_status
);
  logic v_wait;   // V mode: K row read issued, data arrives this cycle

  logic [N_CL-1:0] kv_lane, k_lane, out_vec;
  assign kv_lane = kv_status[32'(g)*N_CL +: N_CL];
  assign k_lane  = k_rdata[32'(g)*N_CL +: N_CL];

  always_comb begin
    unique case (mode)
      ATT_Q:   out_vec = spk_data & kv_lane;
      default: out_vec = spk_data;
    endcase
    k_re      = spk_valid && (mode == ATT_V) && !v_wait;
    k_raddr   = k_base + spk_pos;
    spk_ready = spk_valid && ((mode != ATT_V) || v_wait);
    wr_en     = spk_ready;
    wr_addr   = dst_base + spk_pos;
    wr_lane   = NL'(1) << g;
    wr_data   = N'(out_vec) << (32'(g) * N_CL);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v_wait    <= 1'b0;
      kv_status <= '0;
    end else begin
      if (layer_start && mode == ATT_V) kv_status <= '0;
      if (k_re) v_wait <= 1'b1;
      if (v_wait) begin
        v_wait <= 1'b0;
        kv_status[32'(g)*N_CL +: N_CL] <= kv_lane | (spk_data & k_lane);
      end
    end
  end
endmodule
