// maj_popcount: XNorMaj-3 popcount over K activation/weight pairs.
//
// The K pairs are cut into K/3 groups; each group goes through one
// xnor_maj3 unit, and the K/3 majority bits are summed. Compared with an
// exact XNOR-popcount, the adder sees one bit per three pairs instead of two
// bits, so it is narrower and shallower. K must be a multiple of 3 (layers
// pad their inputs). Group g holds pairs 3g, 3g+1 and 3g+2; the layers put the
// three pixels of one kernel row of one channel in one group.
//
// Purely combinational. Ports: x, w (K bits each), count (0 .. K/3).
//
// The grouping in threes and the summation follow the paper; the slice
// layout of the groups and the count width ceil(log2(K/3+1)) are this
// design's choices (the paper prints ceil(log2(N/3)), equal for CNV-P sizes).
module maj_popcount
  import majnet_pkg::*;
#(
  parameter int unsigned K  = 576,             // 3x3x64, Conv2 of CNV-P
  parameter int unsigned CW = cnt_width(K)
) (
  input  logic [K-1:0]  x,
  input  logic [K-1:0]  w,
  output logic [CW-1:0] count
);
  localparam int unsigned G = K / 3;

  logic [G-1:0] maj;

  xnor_maj3 #(.N(G)) u_units (.x(x), .w(w), .y(maj));

  always_comb count = CW'($countones(maj));

  initial assert (K % 3 == 0) else $error("maj_popcount: K=%0d is not a multiple of 3", K);
endmodule
