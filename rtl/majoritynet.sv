// majoritynet: CNV-P MajorityNet from layer 2 to the classifier.
//
// The padded CNV network with every binary layer replaced by its majority
// version: five MConv layers (Conv2 .. Conv6, 3x3 kernels, one pixel of
// padding so each keeps its map size), max pools after Conv2, Conv4 and
// Conv6 (32 -> 16 -> 8 -> 4), a collector that gathers the final 4 x 4 x 256
// map into a 4096-bit vector, and three MFC layers (FC1 4096 -> 512,
// FC2 512 -> 512, FC3 512 -> 10). Layer 1, which works on the non-binary
// image, is not part of this design: its binary 32 x 32 x 64 output map
// streams in on in_pixel in raster order, one pixel per handshake.
//
// Each layer is folded by its own factor FF (1, 4, 4, 16, 16, 64, 64, 10):
// after every pool the pixel rate drops by 4, so the next layers can share
// each PE among 4x more output channels at the same frame throughput.
// All layers are joined by valid/ready handshakes, so any layer may stall
// the ones before it.
//
// Outputs: FC3's ten majority popcounts (class scores; the largest names
// the class) and its thresholded bits, with out_valid/out_ready per image.
// The popcounts of FC1 and FC2 and of the conv PEs are left unused: only
// their thresholded bits go on.
// Configuration: cfg_we writes the weight word (low bits of cfg_w, in the
// layer's window or vector layout) and threshold (low bits of cfg_thr) of
// channel cfg_ch of layer cfg_layer (majnet_pkg::layer_e).
//
// Channel counts and folding factors follow the paper's CNV-P table; map
// size and pool positions come from the CNV topology; the configuration bus
// is this design's own.
module majoritynet
  import majnet_pkg::*;
#(
  parameter int unsigned D     = 32,    // input map size (after layer 1)
  parameter int unsigned C1    = 64,    // Conv1 output channels = Conv2 input
  parameter int unsigned C2    = 64,
  parameter int unsigned C3    = 128,
  parameter int unsigned C4    = 128,
  parameter int unsigned C5    = 256,
  parameter int unsigned C6    = 256,
  parameter int unsigned F1    = 512,
  parameter int unsigned F2    = 512,
  parameter int unsigned NCLS  = 10,
  parameter int unsigned FF2   = 1,
  parameter int unsigned FF3   = 4,
  parameter int unsigned FF4   = 4,
  parameter int unsigned FF5   = 16,
  parameter int unsigned FF6   = 16,
  parameter int unsigned FFC1  = 64,
  parameter int unsigned FFC2  = 64,
  parameter int unsigned FFC3  = 10,
  parameter bit          PAD_BIT = 1'b0,
  // derived sizes
  parameter int unsigned NFC   = (D / 8) * (D / 8) * C6,    // FC1 inputs
  parameter int unsigned K1    = pad3(NFC),
  parameter int unsigned CFGW  = K1,                         // widest weight word
  parameter int unsigned CFGT  = cnt_width(K1),              // widest threshold
  parameter int unsigned CHW   = 9,      // channel index (up to 512)
  parameter int unsigned CWO   = cnt_width(F2)               // class score width
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // configuration bus
  input  logic                 cfg_we,
  input  logic [3:0]           cfg_layer,
  input  logic [CHW-1:0]       cfg_ch,
  input  logic [CFGW-1:0]      cfg_w,
  input  logic [CFGT-1:0]      cfg_thr,
  // binary feature map from layer 1
  input  logic                 in_valid,
  output logic                 in_ready,
  input  logic [C1-1:0]        in_pixel,
  // classifier output
  output logic                 out_valid,
  input  logic                 out_ready,
  output logic [NCLS-1:0]      out_bits,
  output logic [CWO-1:0]       out_score [NCLS]
);
  localparam int unsigned KC2 = 9*C1, KC3 = 9*C2, KC4 = 9*C3, KC5 = 9*C4, KC6 = 9*C5;
  localparam int unsigned KF2 = pad3(F1), KF3 = pad3(F2);

  // stream wires between layers
  logic          v2, r2;  logic [C2-1:0] p2;
  logic          v3, r3;  logic [C3-1:0] p3;
  logic          v4, r4;  logic [C4-1:0] p4;
  logic          v5, r5;  logic [C5-1:0] p5;
  logic          v6, r6;  logic [C6-1:0] p6;
  logic          vc, rc;  logic [NFC-1:0] vec1;
  logic          vf1, rf1; logic [F1-1:0] b1;
  logic          vf2, rf2; logic [F2-1:0] b2;
  logic [cnt_width(K1)-1:0]  cnt1 [F1];
  logic [cnt_width(KF2)-1:0] cnt2 [F2];

  function automatic logic we_of(input layer_e l);
    return cfg_we && (cfg_layer == l);
  endfunction

  mconv_layer #(.D(D),   .CIN(C1), .COUT(C2), .FF(FF2), .POOL(1'b1), .PAD_BIT(PAD_BIT)) u_conv2 (
    .clk, .rst_n, .cfg_we(we_of(L_CONV2)), .cfg_ch(cfg_ch[$clog2(C2)-1:0]),
    .cfg_w(cfg_w[KC2-1:0]), .cfg_thr(cfg_thr[cnt_width(KC2)-1:0]),
    .in_valid, .in_ready, .in_pixel, .out_valid(v2), .out_ready(r2), .out_pixel(p2));

  mconv_layer #(.D(D/2), .CIN(C2), .COUT(C3), .FF(FF3), .POOL(1'b0), .PAD_BIT(PAD_BIT)) u_conv3 (
    .clk, .rst_n, .cfg_we(we_of(L_CONV3)), .cfg_ch(cfg_ch[$clog2(C3)-1:0]),
    .cfg_w(cfg_w[KC3-1:0]), .cfg_thr(cfg_thr[cnt_width(KC3)-1:0]),
    .in_valid(v2), .in_ready(r2), .in_pixel(p2), .out_valid(v3), .out_ready(r3), .out_pixel(p3));

  mconv_layer #(.D(D/2), .CIN(C3), .COUT(C4), .FF(FF4), .POOL(1'b1), .PAD_BIT(PAD_BIT)) u_conv4 (
    .clk, .rst_n, .cfg_we(we_of(L_CONV4)), .cfg_ch(cfg_ch[$clog2(C4)-1:0]),
    .cfg_w(cfg_w[KC4-1:0]), .cfg_thr(cfg_thr[cnt_width(KC4)-1:0]),
    .in_valid(v3), .in_ready(r3), .in_pixel(p3), .out_valid(v4), .out_ready(r4), .out_pixel(p4));

  mconv_layer #(.D(D/4), .CIN(C4), .COUT(C5), .FF(FF5), .POOL(1'b0), .PAD_BIT(PAD_BIT)) u_conv5 (
    .clk, .rst_n, .cfg_we(we_of(L_CONV5)), .cfg_ch(cfg_ch[$clog2(C5)-1:0]),
    .cfg_w(cfg_w[KC5-1:0]), .cfg_thr(cfg_thr[cnt_width(KC5)-1:0]),
    .in_valid(v4), .in_ready(r4), .in_pixel(p4), .out_valid(v5), .out_ready(r5), .out_pixel(p5));

  mconv_layer #(.D(D/4), .CIN(C5), .COUT(C6), .FF(FF6), .POOL(1'b1), .PAD_BIT(PAD_BIT)) u_conv6 (
    .clk, .rst_n, .cfg_we(we_of(L_CONV6)), .cfg_ch(cfg_ch[$clog2(C6)-1:0]),
    .cfg_w(cfg_w[KC6-1:0]), .cfg_thr(cfg_thr[cnt_width(KC6)-1:0]),
    .in_valid(v5), .in_ready(r5), .in_pixel(p5), .out_valid(v6), .out_ready(r6), .out_pixel(p6));

  fc_collector #(.NPIX((D/8)*(D/8)), .C(C6)) u_collect (
    .clk, .rst_n, .in_valid(v6), .in_ready(r6), .in_pixel(p6),
    .out_valid(vc), .out_ready(rc), .out_vec(vec1));

  mfc_layer #(.NIN(NFC), .COUT(F1), .FF(FFC1), .PAD_BIT(PAD_BIT)) u_fc1 (
    .clk, .rst_n, .cfg_we(we_of(L_FC1)), .cfg_ch(cfg_ch[$clog2(F1)-1:0]),
    .cfg_w(cfg_w[K1-1:0]), .cfg_thr(cfg_thr[cnt_width(K1)-1:0]),
    .in_valid(vc), .in_ready(rc), .in_vec(vec1),
    .out_valid(vf1), .out_ready(rf1), .out_bits(b1), .out_count(cnt1));

  mfc_layer #(.NIN(F1), .COUT(F2), .FF(FFC2), .PAD_BIT(PAD_BIT)) u_fc2 (
    .clk, .rst_n, .cfg_we(we_of(L_FC2)), .cfg_ch(cfg_ch[$clog2(F2)-1:0]),
    .cfg_w(cfg_w[KF2-1:0]), .cfg_thr(cfg_thr[cnt_width(KF2)-1:0]),
    .in_valid(vf1), .in_ready(rf1), .in_vec(b1),
    .out_valid(vf2), .out_ready(rf2), .out_bits(b2), .out_count(cnt2));

  mfc_layer #(.NIN(F2), .COUT(NCLS), .FF(FFC3), .PAD_BIT(PAD_BIT)) u_fc3 (
    .clk, .rst_n, .cfg_we(we_of(L_FC3)), .cfg_ch(cfg_ch[$clog2(NCLS)-1:0]),
    .cfg_w(cfg_w[KF3-1:0]), .cfg_thr(cfg_thr[cnt_width(KF3)-1:0]),
    .in_valid(vf2), .in_ready(rf2), .in_vec(b2),
    .out_valid, .out_ready, .out_bits, .out_count(out_score));

  initial assert (D % 8 == 0) else $error("majoritynet: D must be a multiple of 8");
endmodule
