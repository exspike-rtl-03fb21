// fetch_decode: the Fetcher and Decoder. After start it reads the layer
// program from the Instruction SRAM (one 128-bit instr_t per word, starting
// at address 0) and sequences the cores layer by layer until an OP_END:
//  * OP_CONV / OP_TCONV: for each 32-channel output group g = 0..groups-1 it starts a
//    Sparse Core scan of the input map, waits for the scan to finish and the
//    EPE core's eFIFOs and MPE to drain, then (if the fire bit is set) starts
//    the FPE sweep and waits for it (Algorithm 1, OPT2: the group loop
//    G = ceil(Co/P) around the spatial loops).
//  * OP_FC: one Sparse Core scan with the events routed to the EAFC core,
//    then layer_end stores the FC outputs.
// layer_start pulses once when a layer's instruction is decoded (it clears
// the EAFC accumulators and, for a V layer, the KV status). busy is high from
// start to done. The paper names this block and says the program holds the
// model parameters; the sequencing is this design's own.
module fetch_decode
  import exspike_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  output logic               busy,
  output logic               done,
  // Instruction SRAM read port
  output logic               ins_re,
  output logic [INS_AW-1:0]  ins_raddr,
  input  logic [INS_BITS-1:0] ins_rdata,
  // decoded layer and group
  output instr_t             cfg,
  output logic [3:0]         g,
  output logic               layer_start,
  // Sparse Core
  output logic               sc_start,
  input  logic               sc_done,
  // EPE core
  input  logic               mpe_idle,
  output logic               fire_start,
  input  logic               fire_done,
  // EAFC core
  input  logic               eafc_idle,
  output logic               fc_layer_end,
  // statistics
  output logic [31:0]        layer_count,
  output logic [31:0]        cycle_count
);
  typedef enum logic [2:0] {D_IDLE, D_FETCH, D_DEC, D_SCAN, D_WSCAN, D_DRAIN, D_FIRE} dstate_e;
  dstate_e state;
  logic [INS_AW-1:0] pc;
  instr_t            ins;
  assign ins = instr_t'(ins_rdata);

  assign busy      = (state != D_IDLE);
  assign ins_re    = (state == D_FETCH);
  assign ins_raddr = pc;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state        <= D_IDLE;
      pc           <= '0;
      cfg          <= '0;
      g            <= '0;
      done         <= 1'b0;
      layer_start  <= 1'b0;
      sc_start     <= 1'b0;
      fire_start   <= 1'b0;
      fc_layer_end <= 1'b0;
      layer_count  <= '0;
      cycle_count  <= '0;
    end else begin
      done         <= 1'b0;
      layer_start  <= 1'b0;
      sc_start     <= 1'b0;
      fire_start   <= 1'b0;
      fc_layer_end <= 1'b0;
      if (busy) cycle_count <= cycle_count + 1;
      unique case (state)
        D_IDLE: if (start) begin pc <= '0; state <= D_FETCH; end
        D_FETCH: state <= D_DEC;
        D_DEC: begin
          cfg <= ins;
          g   <= '0;
          if (ins.op == OP_END) begin
            state <= D_IDLE;
            done  <= 1'b1;
          end else begin
            layer_start <= 1'b1;
            layer_count <= layer_count + 1;
            state       <= D_SCAN;
          end
        end
        D_SCAN: begin sc_start <= 1'b1; state <= D_WSCAN; end
        D_WSCAN: if (sc_done) state <= D_DRAIN;
        D_DRAIN: begin
          if (cfg.op == OP_FC) begin
            if (eafc_idle) begin
              fc_layer_end <= 1'b1;
              pc    <= pc + 1'b1;
              state <= D_FETCH;
            end
          end else if (mpe_idle) begin
            if (cfg.fire) begin
              fire_start <= 1'b1;
              state      <= D_FIRE;
            end else if (5'(g) + 5'd1 < cfg.groups) begin
              g <= g + 1'b1; state <= D_SCAN;
            end else begin
              pc <= pc + 1'b1; state <= D_FETCH;
            end
          end
        end
        D_FIRE: if (fire_done) begin
          if (5'(g) + 5'd1 < cfg.groups) begin
            g <= g + 1'b1; state <= D_SCAN;
          end else begin
            pc <= pc + 1'b1; state <= D_FETCH;
          end
        end
        default: state <= D_IDLE;
      endcase
    end
  end
endmodule
