// apec_compress: adjacent-position event compression (APEC) for a group of
// two spike words, the group size the paper adopts. The overlap sequence is
// the bit-wise AND of the two words (events shared by both positions); each
// non-overlap sequence is its word with the overlap removed. Accumulating the
// overlap once and adding each non-overlap part gives the same partial sums as
// processing both words in full, with |overlap| fewer events. With pair low
// (compression off, or no neighbour) the overlap is empty and n0 equals s0.
// Purely combinational.
module apec_compress #(
  parameter int unsigned N = 512
) (
  input  logic         pair,
  input  logic [N-1:0] s0,
  input  logic [N-1:0] s1,
  output logic [N-1:0] ov,
  output logic [N-1:0] n0,
  output logic [N-1:0] n1
);
  always_comb begin
    ov = pair ? (s0 & s1) : '0;
    n0 = s0 & ~ov;
    n1 = pair ? (s1 & ~ov) : '0;
  end
endmodule
