// epe_core: the EPE Core, the main event-driven convolution engine (OPT2).
// It holds N_CL EPE clusters (one per output channel of the current group)
// and three sequencers:
//  * Event accumulation: while the AER FIFO is non-empty one event is popped
//    per cycle; its channel selects the Weight SRAM word
//    w_base + g*cin + ch (all clusters' 3x3 kernels for that input channel),
//    which arrives one cycle later and is added in every WPE block.
//  * Sequence ends from the Sparse Core (tag OV / P0 / P1 / SINGLE) move the
//    partial sums: OV caches them as acc_ov, P0 pushes them to the eFIFOs and
//    restarts from acc_ov, P1/SINGLE push and clear (positions without spikes
//    push nothing). A token is accepted only when no weight read is in flight
//    and the eFIFOs have room.
//  * MPE: for each eFIFO entry (one input position y,x) it visits the taps
//    (ky,kx) whose target neuron (y+1-ky, x+1-kx) lies inside the map
//    (stride 1, zero padding; only the centre tap for 1x1 kernels), reading,
//    adding and writing one Neuron SRAM word (32 potentials): 3 cycles/tap.
//  * FPE (fire_start): reads the group's biases (Weight SRAM word b_base+g,
//    16 bit per cluster), then sweeps all H*W neurons: read, add bias and
//    compare, write back, and hand the 32 spikes of the position to the
//    Attention Core (spk_valid/spk_ready); fire_done pulses at the end.
// Transposed convolution (tconv, stride 2): the output map is 2H x 2W and
// tap (ky,kx) of an event at (y,x) targets (2y-1+ky, 2x-1+kx); everything
// else, APEC included, is unchanged because each partial sum still belongs to
// one input position.
// Neuron address: n_base + g*OH*OW + y*OW + x (OH x OW the output map). The
// address formulas, the per-tap read-modify-write, the bias storage and the
// transposed-convolution mapping (the paper only names the operator) are this
// design's choices.
module epe_core
  import exspike_pkg::*;
#(
  parameter int unsigned N_CL = N_CLUSTER,
  parameter int unsigned EFD  = EFIFO_DEPTH,
  localparam int unsigned WW  = N_CL * KTAPS * W_BITS,
  localparam int unsigned NW  = N_CL * V_BITS
) (
  input  logic               clk,
  input  logic               rst_n,
  // layer configuration (stable during a layer)
  input  logic [5:0]         h,
  input  logic [5:0]         w,
  input  logic [9:0]         cin,
  input  logic [3:0]         g,
  input  logic               ksize3,
  input  logic               tconv,
  input  logic [10:0]        w_base,
  input  logic [10:0]        b_base,
  input  logic [12:0]        n_base,
  input  logic signed [V_BITS-1:0] thresh,
  input  logic                    leak,
  // AER FIFO
  input  logic               aer_valid,
  input  aer_t               aer_data,
  output logic               aer_pop,
  // sequence-end tokens from the Sparse Core
  input  logic               seq_valid,
  input  seq_tag_e           seq_tag,
  input  logic               seq_push,
  input  logic [SPK_AW-1:0]  seq_pos,
  input  logic [5:0]         seq_y,
  input  logic [5:0]         seq_x,
  output logic               seq_ready,
  // Weight SRAM read port
  output logic               wgt_re,
  output logic [10:0]        wgt_raddr,
  input  logic [WW-1:0]      wgt_rdata,
  // Neuron SRAM ports
  output logic               nrn_re,
  output logic [12:0]        nrn_raddr,
  input  logic [NW-1:0]      nrn_rdata,
  output logic               nrn_we,
  output logic [12:0]        nrn_waddr,
  output logic [NW-1:0]      nrn_wdata,
  // control
  output logic               mpe_idle,
  input  logic               fire_start,
  output logic               fire_done,
  // spikes to the Attention Core
  output logic               spk_valid,
  output logic [N_CL-1:0]    spk_data,
  output logic [SPK_AW-1:0]  spk_pos,
  input  logic               spk_ready,
  // statistics
  output logic [31:0]        acc_count,
  output logic [31:0]        efifo_stall_count
);
  // ------------------------------------------------------------------
  // event accumulation
  logic acc_v;                  // weight word arriving this cycle
  logic seq_fire;
  logic efifo_full, efifo_empty;
  logic [N_CL-1:0] c_full, c_empty;
  logic tagq_full, tagq_empty;

  assign efifo_full  = tagq_full | (|c_full);
  assign efifo_empty = tagq_empty;

  typedef enum logic [1:0] {F_IDLE, F_BIAS, F_RUN} fstate_e;
  fstate_e fstate;

  assign aer_pop   = aer_valid && (fstate == F_IDLE);
  assign seq_ready = !acc_v && !efifo_full && (fstate == F_IDLE);
  assign seq_fire  = seq_valid && seq_ready;

  logic save_ov, reload_ov, clear_acc, ef_push;
  always_comb begin
    save_ov   = seq_fire && (seq_tag == TAG_OV);
    reload_ov = seq_fire && (seq_tag == TAG_P0);
    clear_acc = seq_fire && (seq_tag == TAG_P1 || seq_tag == TAG_SINGLE);
    ef_push   = seq_fire && (seq_tag != TAG_OV) && seq_push;
  end

  logic [10:0] ev_addr;
  assign ev_addr = w_base + 11'(15'(g) * 15'(cin)) + 11'(aer_data.ch);

  // ------------------------------------------------------------------
  // tag FIFO: position of each eFIFO entry (kept in lockstep with the eFIFOs)
  typedef struct packed { logic [5:0] y; logic [5:0] x; } ytag_t;
  ytag_t tag_head;
  logic  ef_pop;

  sync_fifo #(.WIDTH($bits(ytag_t)), .DEPTH(EFD)) u_tagq (
    .clk, .rst_n, .push(ef_push), .wdata({seq_y, seq_x}), .pop(ef_pop), .rdata(tag_head),
    .full(tagq_full), .empty(tagq_empty), .count());

  // ------------------------------------------------------------------
  // MPE sequencer
  typedef enum logic [1:0] {M_IDLE, M_RD, M_ADD, M_WR} mstate_e;
  mstate_e     mstate;
  logic [3:0]  tap;
  logic [12:0] m_addr;
  logic        tap_ok;
  logic signed [7:0] ty, tx;
  logic [12:0] hw;
  logic [12:0] grp_base;
  logic [6:0]  oh, ow;           // output map size

  assign oh       = tconv ? {h, 1'b0} : {1'b0, h};
  assign ow       = tconv ? {w, 1'b0} : {1'b0, w};
  assign hw       = 13'(oh) * 13'(ow);
  assign grp_base = n_base + 13'(17'(g) * 17'(hw));

  always_comb begin
    // tap = ky*3 + kx; convolution target (y + 1 - ky, x + 1 - kx),
    // transposed convolution target (2y - 1 + ky, 2x - 1 + kx)
    if (tconv) begin
      ty = 8'({tag_head.y, 1'b0}) - 8'sd1 + 8'(tap / 4'd3);
      tx = 8'({tag_head.x, 1'b0}) - 8'sd1 + 8'(tap % 4'd3);
    end else begin
      ty = 8'(tag_head.y) + 8'sd1 - 8'(tap / 4'd3);
      tx = 8'(tag_head.x) + 8'sd1 - 8'(tap % 4'd3);
    end
    tap_ok = (ty >= 0) && (ty < 8'(oh)) && (tx >= 0) && (tx < 8'(ow)) && (ksize3 || tconv || tap == 4'd4);
  end

  assign mpe_idle = (mstate == M_IDLE) && efifo_empty && !acc_v;
  assign ef_pop   = (mstate == M_RD && !tap_ok && tap == 4'd8) || (mstate == M_WR && tap == 4'd8);

  // ------------------------------------------------------------------
  // FPE sequencer
  logic [9:0]  fpos;
  logic [1:0]  fphase;          // 0 read, 1 calc, 2 write+offer
  logic [12:0] f_addr;
  assign f_addr = grp_base + 13'(fpos);

  // ------------------------------------------------------------------
  // clusters
  logic signed [V_BITS-1:0] mpe_v  [N_CL];
  logic signed [V_BITS-1:0] fpe_v  [N_CL];
  logic [N_CL-1:0]          fpe_spk;
  logic mpe_capture, fpe_capture, bias_load;

  assign mpe_capture = (mstate == M_ADD);
  assign fpe_capture = (fstate == F_RUN) && (fphase == 2'd1);
  assign bias_load   = (fstate == F_BIAS);

  for (genvar c = 0; c < N_CL; c++) begin : g_cl
    epe_cluster #(.EFD(EFD)) u_cl (
      .clk, .rst_n,
      .add(acc_v), .weights(wgt_rdata[c*KTAPS*W_BITS +: KTAPS*W_BITS]),
      .save_ov, .reload_ov, .clear(clear_acc),
      .efifo_push(ef_push), .efifo_pop(ef_pop), .efifo_full(c_full[c]), .efifo_empty(c_empty[c]),
      .mpe_tap(tap), .mpe_capture, .mpe_vin(nrn_rdata[c*V_BITS +: V_BITS]), .mpe_v(mpe_v[c]),
      .bias_load, .bias_in(wgt_rdata[c*V_BITS +: V_BITS]), .thresh, .leak,
      .fpe_capture, .fpe_vin(nrn_rdata[c*V_BITS +: V_BITS]), .fpe_v(fpe_v[c]), .fpe_spike(fpe_spk[c]));
  end

  // ------------------------------------------------------------------
  // memory ports
  always_comb begin
    wgt_re    = aer_pop || (fstate == F_IDLE && fire_start);
    wgt_raddr = (fstate == F_IDLE && fire_start && !aer_pop) ? b_base + 11'(g) : ev_addr;
    nrn_re    = (mstate == M_RD && tap_ok) || (fstate == F_RUN && fphase == 2'd0);
    nrn_raddr = (fstate == F_RUN) ? f_addr : m_addr;
    nrn_we    = (mstate == M_WR) || (fstate == F_RUN && fphase == 2'd2 && !spk_valid);
    nrn_waddr = (fstate == F_RUN) ? f_addr : m_addr;
    for (int c = 0; c < N_CL; c++)
      nrn_wdata[c*V_BITS +: V_BITS] = (fstate == F_RUN) ? fpe_v[c] : mpe_v[c];
  end
  assign m_addr    = grp_base + 13'(13'(ty) * 13'(ow)) + 13'(tx);
  assign spk_data  = fpe_spk;
  assign spk_pos   = SPK_AW'(fpos);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc_v     <= 1'b0;
      mstate    <= M_IDLE;
      tap       <= '0;
      fstate    <= F_IDLE;
      fphase    <= '0;
      fpos      <= '0;
      fire_done <= 1'b0;
      spk_valid <= 1'b0;
      acc_count <= '0;
      efifo_stall_count <= '0;
    end else begin
      acc_v     <= aer_pop;
      fire_done <= 1'b0;
      if (aer_pop) acc_count <= acc_count + 1;
      if (seq_valid && !acc_v && efifo_full) efifo_stall_count <= efifo_stall_count + 1;

      // MPE
      unique case (mstate)
        M_IDLE: if (!efifo_empty) begin tap <= '0; mstate <= M_RD; end
        M_RD:   if (tap_ok) mstate <= M_ADD;
                else if (tap == 4'd8) mstate <= M_IDLE;
                else tap <= tap + 1'b1;
        M_ADD:  mstate <= M_WR;
        M_WR:   if (tap == 4'd8) mstate <= M_IDLE;
                else begin tap <= tap + 1'b1; mstate <= M_RD; end
        default: mstate <= M_IDLE;
      endcase

      // FPE
      unique case (fstate)
        F_IDLE: if (fire_start) fstate <= F_BIAS;
        F_BIAS: begin fstate <= F_RUN; fpos <= '0; fphase <= '0; end
        F_RUN: begin
          unique case (fphase)
            2'd0: fphase <= 2'd1;
            2'd1: fphase <= 2'd2;
            default: begin
              if (!spk_valid) spk_valid <= 1'b1;
              else if (spk_ready) begin
                spk_valid <= 1'b0;
                fphase    <= 2'd0;
                if (13'(fpos) + 13'd1 >= hw) begin
                  fstate    <= F_IDLE;
                  fire_done <= 1'b1;
                end else fpos <= fpos + 1'b1;
              end
            end
          endcase
        end
        default: fstate <= F_IDLE;
      endcase
    end
  end

  a_fire_when_idle: assert property (@(posedge clk) disable iff (!rst_n)
                                     fire_start |-> (mpe_idle && !aer_valid));
  a_lockstep: assert property (@(posedge clk) disable iff (!rst_n)
                               (c_empty == {N_CL{tagq_empty}}));
endmodule
