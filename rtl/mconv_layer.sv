// mconv_layer: a majority convolution (MConv) layer with optional 2x2 max pool.
//
// A D x D x CIN binary feature map streams in one pixel per handshake, all
// input channels in parallel. The window_buffer pads it by one pixel on each
// side and produces one 3x3xCIN window per output pixel; the pe_array (COUT/FF
// PEs folded FF times) turns each window into COUT output bits, each the
// threshold of an XNorMaj-3 popcount whose 3-input groups are the three pixels
// of one kernel row of one input channel. With POOL set, a maxpool2x2 follows,
// so the output map is D/2 x D/2 instead of D x D. A layer after a pool sees
// a quarter of the pixel rate and can be folded 4x more at equal throughput.
//
// Weights of channel n are loaded as one 9*CIN-bit word in the window layout
// (bit j*3*CIN + i*CIN + ch = kernel row i, column j, input channel ch).
// Handshake: valid/ready on input pixels and output pixels. Throughput: one
// window per FF cycles, (D+2)^2 grid steps per frame. The PE popcounts are
// not used by a convolution layer (only the thresholded bits go on).
//
// The structure (buffers, folded PEs, threshold, pool) and the row-wise
// majority groups follow the paper; handshakes and layouts are this design's.
module mconv_layer
  import majnet_pkg::*;
#(
  parameter int unsigned D       = 32,
  parameter int unsigned CIN     = 64,
  parameter int unsigned COUT    = 64,
  parameter int unsigned FF      = 1,
  parameter bit          POOL    = 1'b1,
  parameter bit          PAD_BIT = 1'b0,
  parameter int unsigned K       = 9 * CIN,
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
  input  logic [CIN-1:0]    in_pixel,
  output logic              out_valid,
  input  logic              out_ready,
  output logic [COUT-1:0]   out_pixel
);
  logic            win_valid, win_ready;
  logic [K-1:0]    window;
  logic            pe_valid, pe_ready;
  logic [COUT-1:0] pe_bits;
  logic [CW-1:0]   pe_count [COUT];

  window_buffer #(.D(D), .C(CIN), .PAD_BIT(PAD_BIT)) u_win (
    .clk, .rst_n, .in_valid, .in_ready, .in_pixel,
    .win_valid, .win_ready, .window
  );

  pe_array #(.K(K), .COUT(COUT), .FF(FF), .CW(CW), .CHW(CHW)) u_pes (
    .clk, .rst_n, .cfg_we, .cfg_ch, .cfg_w, .cfg_thr,
    .in_valid(win_valid), .in_ready(win_ready), .in_vec(window),
    .out_valid(pe_valid), .out_ready(pe_ready), .out_bits(pe_bits), .out_count(pe_count)
  );

  if (POOL) begin : g_pool
    maxpool2x2 #(.D(D), .C(COUT)) u_pool (
      .clk, .rst_n, .in_valid(pe_valid), .in_ready(pe_ready), .in_pixel(pe_bits),
      .out_valid, .out_ready, .out_pixel
    );
  end else begin : g_nopool
    always_comb begin
      out_valid = pe_valid;
      pe_ready  = out_ready;
      out_pixel = pe_bits;
    end
  end
endmodule
