// tb_majoritynet_full: two images through the MajorityNet at its full size.
//
// The design is instantiated with its default parameters (CNV-P, layers 2 to
// FC3: 32x32x64 input map, channels 64-64-128-128-256-256, FC 4096-512-512-10,
// folding factors 1, 4, 4, 16, 16, 64, 64, 10). majoritynet_driver loads all
// weights and thresholds (1930 channel words), streams two random images and
// checks the ten class scores and bits against its reference model, plus the
// occurrence of every flow-control mechanism.
module tb_majoritynet_full;
  import majnet_pkg::*;
  localparam int unsigned NCLS = 10;
  localparam int unsigned CFGW = pad3(4096), CFGT = cnt_width(CFGW), CWO = cnt_width(512);

  logic clk, rst_n, cfg_we, in_valid, in_ready, out_valid, out_ready;
  logic [3:0] cfg_layer;
  logic [8:0] cfg_ch;
  logic [CFGW-1:0] cfg_w;
  logic [CFGT-1:0] cfg_thr;
  logic [63:0] in_pixel;
  logic [NCLS-1:0] out_bits;
  logic [CWO-1:0] out_score [NCLS];

  majoritynet u_dut (.*);

  majoritynet_driver #(.NIMG(2), .MAXCYC(400000)) u_drv (
    .*,
    .ev_pad (u_dut.u_conv3.u_win.advance && u_dut.u_conv3.u_win.pad),
    .ev_fold(u_dut.u_conv5.u_pes.step && !u_dut.u_conv5.u_pes.last),
    .ev_pool(u_dut.u_conv4.g_pool.u_pool.out_valid && u_dut.u_conv4.g_pool.u_pool.out_ready),
    .vec_fire(u_dut.vc && u_dut.rc),
    .vec(u_dut.vec1)
  );
endmodule
