// tb_mconv_layer: majority convolution layer against the convolution algorithm.
//
// Two instances on the same random 6x6x4 input maps: one with COUT = 6,
// FF = 2 and a 2x2 pool (3x3 output), one with COUT = 4, FF = 1 and no pool
// (6x6 output). The reference computes every output bit the way the majority
// convolution is defined: for each kernel row of each input channel the
// +/-1 dot product of three pixels and three weights, clipped to +/-1; the
// +1 results are counted and compared with the channel threshold; pad pixels
// are -1 (logic 0). Two maps are streamed with gaps and backpressure.
module tb_mconv_layer;
  import majnet_pkg::*;
  localparam int unsigned D = 6, CIN = 4, K = 9*CIN, CW = cnt_width(K), NF = 2;
  localparam int unsigned CA = 6, CB = 4;
  logic clk = 1'b0, rst_n, cfg_we_a, cfg_we_b, in_valid, in_ready_a, in_ready_b;
  logic [2:0] cfg_ch;
  logic [K-1:0] cfg_w;
  logic [CW-1:0] cfg_thr;
  logic [CIN-1:0] in_pixel;
  logic va, ra, vb, rb;
  logic [CA-1:0] pa;
  logic [CB-1:0] pb;
  logic [K-1:0] wa [CA], wb [CB];
  int ta [CA], tb [CB];
  logic [CIN-1:0] img [NF][D][D];
  bit conv_a [NF][D][D][CA];
  int unsigned checks = 0, failures = 0, na = 0, nb = 0;

  mconv_layer #(.D(D), .CIN(CIN), .COUT(CA), .FF(2), .POOL(1'b1)) u_a (
    .clk, .rst_n, .cfg_we(cfg_we_a), .cfg_ch(cfg_ch), .cfg_w, .cfg_thr,
    .in_valid(in_valid && in_ready_b), .in_ready(in_ready_a), .in_pixel, .out_valid(va), .out_ready(ra), .out_pixel(pa));
  mconv_layer #(.D(D), .CIN(CIN), .COUT(CB), .FF(1), .POOL(1'b0)) u_b (
    .clk, .rst_n, .cfg_we(cfg_we_b), .cfg_ch(cfg_ch[1:0]), .cfg_w, .cfg_thr,
    .in_valid(in_valid && in_ready_a), .in_ready(in_ready_b), .in_pixel, .out_valid(vb), .out_ready(rb), .out_pixel(pb));

  always #5 clk = ~clk;
  always @(negedge clk) begin ra = ($urandom_range(3) != 0); rb = ($urandom_range(3) != 0); end

  function automatic bit conv_bit(input int f, input int r, input int c, input logic [K-1:0] w, input int t);
    int cnt = 0;
    for (int m = 0; m < int'(CIN); m++)
      for (int i = 0; i < 3; i++) begin
        automatic int td = 0;
        for (int j = 0; j < 3; j++) begin
          automatic int rr = r + i - 1, cc = c + j - 1;
          automatic logic xa = (rr < 0 || cc < 0 || rr >= int'(D) || cc >= int'(D)) ? 1'b0 : img[f][rr][cc][m];
          td += (xa == w[j*3*CIN + i*CIN + m]) ? 1 : -1;
        end
        if (td > 0) cnt++;
      end
    return cnt >= t;
  endfunction

  always @(posedge clk) if (rst_n && va && ra) begin
    automatic int f = int'(na) / 9, r = (int'(na) % 9) / 3, c = int'(na) % 3;
    for (int n = 0; n < int'(CA); n++) begin
      automatic bit e = conv_a[f][2*r][2*c][n] | conv_a[f][2*r][2*c+1][n] | conv_a[f][2*r+1][2*c][n] | conv_a[f][2*r+1][2*c+1][n];
      checks++;
      if (pa[n] != e) begin failures++; $display("A map %0d (%0d,%0d) ch %0d: %b", f, r, c, n, pa[n]); end
    end
    na++;
  end

  always @(posedge clk) if (rst_n && vb && rb) begin
    automatic int f = int'(nb) / int'(D*D), r = (int'(nb) % int'(D*D)) / int'(D), c = int'(nb) % int'(D);
    for (int n = 0; n < int'(CB); n++) begin
      checks++;
      if (pb[n] != conv_bit(f, r, c, wb[n], tb[n])) begin failures++; $display("B map %0d (%0d,%0d) ch %0d: %b", f, r, c, n, pb[n]); end
    end
    nb++;
  end

  initial begin
    rst_n = 1'b0; cfg_we_a = 1'b0; cfg_we_b = 1'b0; cfg_ch = '0; cfg_w = '0; cfg_thr = '0;
    in_valid = 1'b0; in_pixel = '0;
    for (int n = 0; n < int'(CA); n++) begin wa[n] = {$urandom, $urandom}; ta[n] = int'($urandom_range(4, 8)); end
    for (int n = 0; n < int'(CB); n++) begin wb[n] = {$urandom, $urandom}; tb[n] = int'($urandom_range(4, 8)); end
    for (int f = 0; f < NF; f++) for (int r = 0; r < D; r++) for (int c = 0; c < D; c++) img[f][r][c] = CIN'($urandom);
    for (int f = 0; f < NF; f++) for (int r = 0; r < D; r++) for (int c = 0; c < D; c++)
      for (int n = 0; n < int'(CA); n++) conv_a[f][r][c][n] = conv_bit(f, r, c, wa[n], ta[n]);
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < int'(CA); n++) begin
      @(negedge clk); cfg_we_a = 1'b1; cfg_ch = 3'(n); cfg_w = wa[n]; cfg_thr = CW'(ta[n]);
    end
    @(negedge clk); cfg_we_a = 1'b0;
    for (int n = 0; n < int'(CB); n++) begin
      @(negedge clk); cfg_we_b = 1'b1; cfg_ch = 3'(n); cfg_w = wb[n]; cfg_thr = CW'(tb[n]);
    end
    @(negedge clk); cfg_we_b = 1'b0;
    // both layers take the same stream: each sees the pixel valid only when
    // the other is ready too, so a pixel moves into both or neither
    for (int f = 0; f < NF; f++)
      for (int r = 0; r < D; r++)
        for (int c = 0; c < D; c++) begin
          @(negedge clk);
          while ($urandom_range(4) == 0) begin in_valid = 1'b0; @(negedge clk); end
          in_valid = 1'b1; in_pixel = img[f][r][c];
          @(posedge clk);
          while (!(in_ready_a && in_ready_b)) @(posedge clk);
        end
    @(negedge clk); in_valid = 1'b0;
    wait (na == NF*9 && nb == NF*D*D);
    checks++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired: %0d / %0d outputs", na, nb);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
