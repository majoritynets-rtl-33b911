// tb_majoritynet: end-to-end test of a reduced MajorityNet.
//
// Same layer structure as the full network (five majority conv layers, three
// pools, collector, three majority FC layers) with small maps and channel
// counts, and folding factors that keep every layer folded except Conv2.
// majoritynet_driver loads random parameters, streams three images with
// random gaps and backpressure, and checks the class scores and bits against
// its own reference model; it also checks that padding, input stalls, folding,
// pooling, output backpressure and FC input padding all occurred.
module tb_majoritynet;
  import majnet_pkg::*;
  localparam int unsigned D = 8, C1 = 4, C2 = 4, C3 = 6, C4 = 6, C5 = 8, C6 = 8;
  localparam int unsigned F1 = 12, F2 = 9, NCLS = 3;
  localparam int unsigned NFC = (D/8)*(D/8)*C6, CFGW = pad3(NFC) > pad3(9*C5) ? pad3(NFC) : pad3(9*C5);
  localparam int unsigned CFGT = cnt_width(CFGW), CWO = cnt_width(F2);

  logic clk, rst_n, cfg_we, in_valid, in_ready, out_valid, out_ready;
  logic [3:0] cfg_layer;
  logic [8:0] cfg_ch;
  logic [CFGW-1:0] cfg_w;
  logic [CFGT-1:0] cfg_thr;
  logic [C1-1:0] in_pixel;
  logic [NCLS-1:0] out_bits;
  logic [CWO-1:0] out_score [NCLS];

  majoritynet #(.D(D), .C1(C1), .C2(C2), .C3(C3), .C4(C4), .C5(C5), .C6(C6),
                .F1(F1), .F2(F2), .NCLS(NCLS),
                .FF2(1), .FF3(2), .FF4(2), .FF5(4), .FF6(4), .FFC1(4), .FFC2(3), .FFC3(3),
                .CFGW(CFGW), .CFGT(CFGT)) u_dut (.*);

  majoritynet_driver #(.D(D), .C1(C1), .C2(C2), .C3(C3), .C4(C4), .C5(C5), .C6(C6),
                       .F1(F1), .F2(F2), .NCLS(NCLS), .NIMG(3), .MAXCYC(200000),
                       .CFGW(CFGW), .CFGT(CFGT)) u_drv (
    .*,
    .ev_pad (u_dut.u_conv3.u_win.advance && u_dut.u_conv3.u_win.pad),
    .ev_fold(u_dut.u_conv5.u_pes.step && !u_dut.u_conv5.u_pes.last),
    .ev_pool(u_dut.u_conv4.g_pool.u_pool.out_valid && u_dut.u_conv4.g_pool.u_pool.out_ready),
    .vec_fire(u_dut.vc && u_dut.rc),
    .vec(u_dut.vec1)
  );
endmodule
