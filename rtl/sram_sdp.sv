// sram_sdp: simple dual-port synchronous RAM used for every on-chip memory of
// the accelerator (Spike SRAM, Residual Spike SRAM, Neuron SRAM, Weight SRAM,
// Instruction SRAM and FC weight memory), as on an FPGA block RAM.
// One write port with per-lane write enables (LANES equal slices of the word)
// and one read port with one cycle of latency: rdata holds mem[raddr] of the
// cycle re was high. A read of the address written in the same cycle returns
// the old word. Contents are not reset; the host loads what is read.
// The paper gives the capacities; the port arrangement is this design's own.
module sram_sdp #(
  parameter int unsigned WIDTH = 512,
  parameter int unsigned DEPTH = 1024,
  parameter int unsigned LANES = 1,
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1,
  localparam int unsigned LW = WIDTH / LANES
) (
  input  logic             clk,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [LANES-1:0] wlane,
  input  logic [WIDTH-1:0] wdata,
  input  logic             re,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] rdata
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) begin
      for (int l = 0; l < LANES; l++)
        if (wlane[l]) mem[waddr][l*LW +: LW] <= wdata[l*LW +: LW];
    end
    if (re) rdata <= mem[raddr];
  end

  initial assert (LW * LANES == WIDTH) else $error("sram_sdp: WIDTH not a multiple of LANES");
endmodule
