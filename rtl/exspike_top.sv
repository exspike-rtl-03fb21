// exspike_top: the ExSpike accelerator. It wires the four computing cores
// around the on-chip memories:
//   Spike SRAM / Residual Spike SRAM (spike buffer, one word per position)
//     -> Sparse Core (APEC, fast event filter, AER FIFO)
//     -> EPE Core (32 EPE clusters: WPE block, eFIFO, MPE, FPE; Weight and
//        Neuron SRAM)            -> Attention Core -> back to the spike buffer
//     -> or EAFC Core (fused average pooling + FC, FC weight memory)
//   Instruction SRAM -> Fetcher and Decoder (layer / group sequencing).
// Host interface: while busy is low the host loads any memory through
// host_we/host_sel/host_addr/host_wdata (the low bits of host_wdata are used
// for narrower memories; spike words are written whole), reads spike words
// through host_re/host_rsel/host_raddr (data on host_rdata one cycle later)
// and reads FC results through fc_res_grp/fc_res_data. A pulse on start runs
// the program from instruction 0; done pulses when OP_END is reached.
// Spike buffer ports are shared in time: the Sparse Core reads during the
// scan of a group, the Attention Core reads K rows during the fire sweep, and
// the host only while the accelerator is idle. The statistics outputs count
// filtered events, APEC overlap sequences, weight accumulations, FC events
// and busy cycles.
// Output groups: the fetcher counts g from 0 for each instruction. Weight,
// bias and neuron addresses use this relative g, while the spike lane written
// back is g + g0, so a layer too large for the Weight SRAM can be split into
// several instructions (with weight reloads in between) that cover different
// groups of the same output map. For convolutions pool_shift selects max
// pooling of the input map in the Sparse Core; for FC layers it is the
// average-pooling window of the EAFC core.
module exspike_top
  import exspike_pkg::*;
(
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     start,
  output logic                     busy,
  output logic                     done,
  // host memory load port
  input  logic                     host_we,
  input  mem_sel_e                 host_sel,
  input  logic [12:0]              host_addr,
  input  logic [WGT_WIDTH-1:0]     host_wdata,
  // host spike read port
  input  logic                     host_re,
  input  logic                     host_rsel,      // 0 Spike SRAM, 1 Residual Spike SRAM
  input  logic [SPK_AW-1:0]        host_raddr,
  output logic [CIN_MAX-1:0]       host_rdata,
  // FC results
  input  logic [2:0]               fc_res_grp,
  output logic [FC_LANES*V_BITS-1:0] fc_res_data,
  // statistics
  output logic [31:0]              stat_events,
  output logic [31:0]              stat_overlaps,
  output logic [31:0]              stat_accums,
  output logic [31:0]              stat_fc_events,
  output logic [31:0]              stat_cycles
);
  // ---------------------------------------------------------------- control
  instr_t cfg;
  logic [3:0] g;
  logic layer_start, sc_start, sc_done, mpe_idle, fire_start, fire_done, eafc_idle, fc_layer_end;
  logic ins_re;
  logic [INS_AW-1:0] ins_raddr;
  logic [INS_BITS-1:0] ins_rdata;

  fetch_decode u_fetch (
    .clk, .rst_n, .start, .busy, .done,
    .ins_re, .ins_raddr, .ins_rdata,
    .cfg, .g, .layer_start,
    .sc_start, .sc_done, .mpe_idle, .fire_start, .fire_done,
    .eafc_idle, .fc_layer_end,
    .layer_count(), .cycle_count(stat_cycles));

  sram_sdp #(.WIDTH(INS_BITS), .DEPTH(INS_DEPTH)) u_ins_sram (
    .clk, .we(host_we && host_sel == MEM_INS), .waddr(host_addr[INS_AW-1:0]), .wlane(1'b1),
    .wdata(host_wdata[INS_BITS-1:0]), .re(ins_re), .raddr(ins_raddr), .rdata(ins_rdata));

  // ---------------------------------------------------------------- spike buffer
  logic              sc_rd_en, att_k_re;
  logic [SPK_AW-1:0] sc_rd_addr, att_k_raddr, spk_raddr;
  logic [CIN_MAX-1:0] spk_rdata, res_rdata;
  logic              att_wr_en;
  logic [SPK_AW-1:0] att_wr_addr;
  logic [N_LANES-1:0] att_wr_lane;
  logic [CIN_MAX-1:0] att_wr_data;
  logic              spk_we, res_we, spk_re;
  logic [SPK_AW-1:0] spk_waddr;
  logic [N_LANES-1:0] spk_wlane;
  logic [CIN_MAX-1:0] spk_wdata;

  always_comb begin
    spk_re    = host_re || att_k_re || sc_rd_en;
    spk_raddr = host_re ? host_raddr : (att_k_re ? att_k_raddr : sc_rd_addr);
    if (host_we && (host_sel == MEM_SPK || host_sel == MEM_RES)) begin
      spk_we    = (host_sel == MEM_SPK);
      res_we    = (host_sel == MEM_RES);
      spk_waddr = host_addr[SPK_AW-1:0];
      spk_wlane = '1;
      spk_wdata = host_wdata[CIN_MAX-1:0];
    end else begin
      spk_we    = att_wr_en && !cfg.dst_sel;
      res_we    = att_wr_en && cfg.dst_sel;
      spk_waddr = att_wr_addr;
      spk_wlane = att_wr_lane;
      spk_wdata = att_wr_data;
    end
  end

  sram_sdp #(.WIDTH(CIN_MAX), .DEPTH(SPK_DEPTH), .LANES(N_LANES)) u_spike_sram (
    .clk, .we(spk_we), .waddr(spk_waddr), .wlane(spk_wlane), .wdata(spk_wdata),
    .re(spk_re), .raddr(spk_raddr), .rdata(spk_rdata));

  sram_sdp #(.WIDTH(CIN_MAX), .DEPTH(SPK_DEPTH), .LANES(N_LANES)) u_residual_sram (
    .clk, .we(res_we), .waddr(spk_waddr), .wlane(spk_wlane), .wdata(spk_wdata),
    .re(spk_re), .raddr(spk_raddr), .rdata(res_rdata));

  assign host_rdata = host_rsel ? res_rdata : spk_rdata;

  // ---------------------------------------------------------------- Sparse Core
  logic     aer_valid, aer_pop, epe_aer_pop, eafc_aer_pop;
  aer_t     aer_data;
  logic     seq_valid, seq_push, seq_ready;
  seq_tag_e seq_tag;
  logic [SPK_AW-1:0] seq_pos;
  logic [5:0] seq_y, seq_x;
  logic     is_fc;

  assign is_fc   = (cfg.op == OP_FC);
  assign aer_pop = is_fc ? eafc_aer_pop : epe_aer_pop;

  sparse_core u_sparse (
    .clk, .rst_n, .start(sc_start), .fc_mode(is_fc), .apec_en(cfg.apec),
    .mp_shift(is_fc ? 2'd0 : cfg.pool_shift),
    .h(cfg.h), .w(cfg.w), .cin(cfg.cin), .src_base(cfg.src_base), .done(sc_done),
    .rd_en(sc_rd_en), .rd_addr(sc_rd_addr), .rd_data(cfg.src_sel ? res_rdata : spk_rdata),
    .aer_valid, .aer_data, .aer_pop,
    .seq_valid, .seq_tag, .seq_push, .seq_pos, .seq_y, .seq_x, .seq_ready,
    .ev_count(stat_events), .ov_count(stat_overlaps));

  // ---------------------------------------------------------------- EPE Core
  logic wgt_re, nrn_re, nrn_we_epe;
  logic [10:0] wgt_raddr;
  logic [WGT_WIDTH-1:0] wgt_rdata;
  logic [12:0] nrn_raddr, nrn_waddr_epe;
  logic [NRN_WIDTH-1:0] nrn_rdata, nrn_wdata_epe;
  logic spk_valid, spk_ready;
  logic [N_CLUSTER-1:0] spk_data;
  logic [SPK_AW-1:0] spk_pos;

  epe_core u_epe (
    .clk, .rst_n,
    .h(cfg.h), .w(cfg.w), .cin(cfg.cin), .g, .ksize3(cfg.ksize3), .tconv(cfg.op == OP_TCONV),
    .w_base(cfg.w_base), .b_base(cfg.b_base), .n_base(cfg.n_base), .thresh(cfg.thresh), .leak(cfg.leak),
    .aer_valid(aer_valid && !is_fc), .aer_data, .aer_pop(epe_aer_pop),
    .seq_valid, .seq_tag, .seq_push, .seq_pos, .seq_y, .seq_x, .seq_ready,
    .wgt_re, .wgt_raddr, .wgt_rdata,
    .nrn_re, .nrn_raddr, .nrn_rdata, .nrn_we(nrn_we_epe), .nrn_waddr(nrn_waddr_epe), .nrn_wdata(nrn_wdata_epe),
    .mpe_idle, .fire_start, .fire_done,
    .spk_valid, .spk_data, .spk_pos, .spk_ready,
    .acc_count(stat_accums), .efifo_stall_count());

  sram_sdp #(.WIDTH(WGT_WIDTH), .DEPTH(WGT_DEPTH)) u_weight_sram (
    .clk, .we(host_we && host_sel == MEM_WGT), .waddr(host_addr[WGT_AW-1:0]), .wlane(1'b1),
    .wdata(host_wdata), .re(wgt_re), .raddr(wgt_raddr[WGT_AW-1:0]), .rdata(wgt_rdata));

  logic host_nrn_we;
  assign host_nrn_we = host_we && host_sel == MEM_NRN;

  sram_sdp #(.WIDTH(NRN_WIDTH), .DEPTH(NRN_DEPTH)) u_neuron_sram (
    .clk, .we(host_nrn_we || nrn_we_epe),
    .waddr(host_nrn_we ? host_addr[NRN_AW-1:0] : nrn_waddr_epe[NRN_AW-1:0]), .wlane(1'b1),
    .wdata(host_nrn_we ? host_wdata[NRN_WIDTH-1:0] : nrn_wdata_epe),
    .re(nrn_re), .raddr(nrn_raddr[NRN_AW-1:0]), .rdata(nrn_rdata));

  // ---------------------------------------------------------------- Attention Core
  attention_core u_attn (
    .clk, .rst_n, .layer_start, .mode(cfg.attn), .g(g + cfg.g0), .dst_base(cfg.dst_base), .k_base(cfg.k_base),
    .spk_valid, .spk_data, .spk_pos, .spk_ready,
    .k_re(att_k_re), .k_raddr(att_k_raddr), .k_rdata(cfg.k_sel ? res_rdata : spk_rdata),
    .wr_en(att_wr_en), .wr_addr(att_wr_addr), .wr_lane(att_wr_lane), .wr_data(att_wr_data),
    .kv_status());

  // ---------------------------------------------------------------- EAFC Core
  eafc_core u_eafc (
    .clk, .rst_n, .w(cfg.w), .cin(cfg.cin), .pool_shift(3'(cfg.pool_shift)), .fc_base(cfg.w_base),
    .fc_group(cfg.fc_group), .layer_start(layer_start && is_fc), .layer_end(fc_layer_end),
    .idle(eafc_idle),
    .aer_valid(aer_valid && is_fc), .aer_data, .aer_pop(eafc_aer_pop),
    .fcw_we(host_we && host_sel == MEM_FCW), .fcw_addr(host_addr[FC_AW-1:0]),
    .fcw_wdata(host_wdata[FC_LANES*W_BITS-1:0]),
    .res_grp(fc_res_grp), .res_data(fc_res_data), .ev_count(stat_fc_events));

  a_host_when_idle: assert property (@(posedge clk) disable iff (!rst_n) (host_we || host_re) |-> !busy);
endmodule
