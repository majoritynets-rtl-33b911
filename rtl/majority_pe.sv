// majority_pe: one processing unit of a majority layer.
//
// The PE computes the XNorMaj-3 popcount of a window (or FC input vector)
// against the weights of one output channel and compares it with that
// channel's threshold. The threshold stands for the whole linear transform
// that follows the popcount (majority scale factors, bias and batch
// normalisation), as in threshold-based BNN accelerators; the output bit is
// 1 when count >= thr. A channel whose transform has a negative slope is
// assumed to be trained/exported with its weights inverted, so that a single
// ">=" compare serves all channels.
//
// Combinational. Ports: x, w (K bits), thr (CW bits), count, y.
//
// Popcount followed by a threshold comparator follows the paper; the
// ">=" direction and the weight inversion convention are this design's.
module majority_pe
  import majnet_pkg::*;
#(
  parameter int unsigned K  = 576,
  parameter int unsigned CW = cnt_width(K)
) (
  input  logic [K-1:0]  x,
  input  logic [K-1:0]  w,
  input  logic [CW-1:0] thr,
  output logic [CW-1:0] count,
  output logic          y
);
  maj_popcount #(.K(K), .CW(CW)) u_pop (.x(x), .w(w), .count(count));

  always_comb y = (count >= thr);
endmodule
