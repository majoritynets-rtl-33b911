// xnor_maj3: N XNorMaj-3 units side by side.
//
// Each unit multiplies three activation/weight pairs in the binary domain
// (XNOR; logic 1 = +1, logic 0 = -1) and takes a 3-input majority vote of
// the three products: 1 when at least two of them are +1. That is the sign
// of the 3-term dot product, clip(x.w, -1, 1) in the majority convolution.
// On an FPGA one unit is a single 6-input LUT. Unit g takes member m of its
// group from x[m][g] / w[m][g], so the three members arrive as three N-bit
// slices and the whole array is three XNORs and a majority on vectors.
//
// Combinational. Ports: x, w (3 x N bits), y (N majority bits).
//
// The XNOR-and-majority function follows the paper; packing many units into
// one vector module is this design's choice.
module xnor_maj3 #(
  parameter int unsigned N = 1
) (
  input  logic [2:0][N-1:0] x,
  input  logic [2:0][N-1:0] w,
  output logic [N-1:0]      y
);
  logic [2:0][N-1:0] z;

  always_comb begin
    z = ~(x ^ w);
    y = (z[0] & z[1]) | (z[0] & z[2]) | (z[1] & z[2]);
  end
endmodule
