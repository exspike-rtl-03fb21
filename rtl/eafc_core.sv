// eafc_core: the EAFC Core, event-driven fused average pooling + fully
// connected layer (OPT3). Average pooling is folded into the FC weights
// offline (each weight divided by the pooling window size), so every input
// event (channel ch at y,x) simply adds one FC weight row to the outputs:
//   y_fc[o] += Wfc'[o][ch, y>>ps, x>>ps]
// The FC controller turns an event into the FC weight memory address
//   base + ((y>>ps)*(W>>ps) + (x>>ps))*cin + ch
// (ps = log2 of the pooling window side), reads the row of FC_LANES 8-bit
// weights (one cycle) and adds it to FC_LANES 16-bit saturating accumulators,
// one event per cycle. layer_start clears the accumulators; layer_end copies
// them to result group fc_group, which the host reads through res_grp/res_data.
// The paper describes the controller, the memory and the weight scaling; the
// address formula, the lane count (16 outputs per pass) and the result
// registers are this design's choices. The FC weight memory is loaded by the
// host through fcw_we/fcw_addr/fcw_wdata.
module eafc_core
  import exspike_pkg::*;
#(
  parameter int unsigned LANES  = FC_LANES,
  parameter int unsigned DEPTH  = FC_DEPTH,
  parameter int unsigned GROUPS = FC_GROUPS,
  localparam int unsigned AW    = $clog2(DEPTH),
  localparam int unsigned GW    = $clog2(GROUPS)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // layer configuration
  input  logic [5:0]              w,
  input  logic [9:0]              cin,
  input  logic [2:0]              pool_shift,
  input  logic [10:0]             fc_base,
  input  logic [GW-1:0]           fc_group,
  input  logic                    layer_start,
  input  logic                    layer_end,
  output logic                    idle,
  // events from the Sparse Core's AER FIFO
  input  logic                    aer_valid,
  input  aer_t                    aer_data,
  output logic                    aer_pop,
  // FC weight memory load port
  input  logic                    fcw_we,
  input  logic [AW-1:0]           fcw_addr,
  input  logic [LANES*W_BITS-1:0] fcw_wdata,
  // results
  input  logic [GW-1:0]           res_grp,
  output logic [LANES*V_BITS-1:0] res_data,
  output logic [31:0]             ev_count
);
  logic acc_v;
  logic [LANES*W_BITS-1:0] wrow;
  logic [AW-1:0] raddr;
  logic signed [V_BITS-1:0] acc [LANES];
  logic [LANES*V_BITS-1:0] res [GROUPS];

  assign aer_pop = aer_valid;
  assign idle    = !aer_valid && !acc_v;

  // FC controller: event -> weight row address
  logic [5:0] py, px, pw;
  always_comb begin
    py    = aer_data.y >> pool_shift;
    px    = aer_data.x >> pool_shift;
    pw    = w >> pool_shift;
    raddr = AW'(fc_base + 11'((16'(py) * 16'(pw) + 16'(px)) * 16'(cin)) + 11'(aer_data.ch));
  end

  sram_sdp #(.WIDTH(LANES*W_BITS), .DEPTH(DEPTH)) u_fcw (
    .clk, .we(fcw_we), .waddr(fcw_addr), .wlane(1'b1), .wdata(fcw_wdata),
    .re(aer_pop), .raddr, .rdata(wrow));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc_v    <= 1'b0;
      ev_count <= '0;
      for (int l = 0; l < LANES; l++) acc[l] <= '0;
      for (int gi = 0; gi < GROUPS; gi++) res[gi] <= '0;
    end else begin
      acc_v <= aer_pop;
      if (aer_pop) ev_count <= ev_count + 1;
      if (layer_start) begin
        for (int l = 0; l < LANES; l++) acc[l] <= '0;
      end else if (acc_v) begin
        for (int l = 0; l < LANES; l++)
          acc[l] <= sat_add(acc[l], V_BITS'(signed'(wrow[l*W_BITS +: W_BITS])));
      end
      if (layer_end)
        for (int l = 0; l < LANES; l++) res[fc_group][l*V_BITS +: V_BITS] <= acc[l];
    end
  end

  assign res_data = res[res_grp];

  a_end_when_idle: assert property (@(posedge clk) disable iff (!rst_n) layer_end |-> idle);
endmodule
