// mfc_layer: a majority fully-connected (MFC) layer.
//
// The whole NIN-bit input vector is presented at once. It is padded to
// K = NIN rounded up to a multiple of 3 with PAD_BIT activations, so that the
// pairs split into K/3 majority groups; group g holds
// inputs g, g+K/3 and g+2K/3 (the weights of
// the pad positions are part of the loaded weight word). A pe_array of
// COUT/FF PEs folded FF times produces COUT threshold bits and, for a final
// classifier layer, the COUT majority popcounts, whose largest entry names
// the predicted class.
//
// Handshake: valid/ready on the input vector and on the output. Timing: FF
// cycles per vector, result registered after the last fold.
//
// Padding FC inputs to a multiple of 3 and folding follow the paper; the pad
// value, the grouping of inputs and the score output are this design's.
module mfc_layer
  import majnet_pkg::*;
#(
  parameter int unsigned NIN     = 4096,   // FC1 of CNV-P
  parameter int unsigned COUT    = 512,
  parameter int unsigned FF      = 64,
  parameter bit          PAD_BIT = 1'b0,
  parameter int unsigned K       = pad3(NIN),
  parameter int unsigned CW      = cnt_width(K),
  parameter int unsigned CHW     = (COUT > 1) ? $clog2(COUT) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              cfg_we,
  input  logic [CHW-1:0]    cfg_ch,
  input  logic [K-1:0]      cfg_w,
  input  logic [CW-1:0]     cfg_thr,
  input  logic              in_valid,
  output logic              in_ready,
  input  logic [NIN-1:0]    in_vec,
  output logic              out_valid,
  input  logic              out_ready,
  output logic [COUT-1:0]   out_bits,
  output logic [CW-1:0]     out_count [COUT]
);
  logic [K-1:0] vec;

  always_comb begin
    vec = {K{PAD_BIT}};
    vec[NIN-1:0] = in_vec;
  end

  pe_array #(.K(K), .COUT(COUT), .FF(FF), .CW(CW), .CHW(CHW)) u_pes (
    .clk, .rst_n, .cfg_we, .cfg_ch, .cfg_w, .cfg_thr,
    .in_valid, .in_ready, .in_vec(vec),
    .out_valid, .out_ready, .out_bits, .out_count
  );
endmodule
