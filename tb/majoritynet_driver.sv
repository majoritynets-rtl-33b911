// majoritynet_driver: stimulus and reference model for majoritynet tests.
//
// Generates random weights and thresholds for every layer, loads them over
// the configuration bus, streams NIMG random 32x32x64-style input maps (sizes
// from the parameters) with random input gaps, holds out_ready low at random,
// and checks FC3's scores and bits against a behavioural model written
// straight from the majority convolution algorithm: per output pixel and
// channel, each kernel row of each input channel gives a 3-term +/-1 dot
// product, clipped to +/-1; the +1 results are counted and compared with the
// channel threshold. Pools are 2x2 ORs, padding pixels are all PAD_BIT.
// The FC1 input vector (the output of all five conv layers) is also checked
// bit by bit.
// Mechanism counters (padding steps, input stalls, folds, pooled pixels,
// output backpressure, FC input padding) must each be seen at least once.
// The parameters must match the majoritynet instance being driven.
module majoritynet_driver
  import majnet_pkg::*;
#(
  parameter int unsigned D = 32, C1 = 64, C2 = 64, C3 = 128, C4 = 128, C5 = 256, C6 = 256,
  parameter int unsigned F1 = 512, F2 = 512, NCLS = 10,
  parameter bit          PAD_BIT = 1'b0,
  parameter int unsigned NIMG = 1,
  parameter int unsigned MAXCYC = 2000000,
  parameter int unsigned NFC  = (D / 8) * (D / 8) * C6,
  parameter int unsigned CFGW = pad3(NFC),
  parameter int unsigned CFGT = cnt_width(pad3(NFC)),
  parameter int unsigned CWO  = cnt_width(F2)
) (
  output logic                 clk,
  output logic                 rst_n,
  output logic                 cfg_we,
  output logic [3:0]           cfg_layer,
  output logic [8:0]           cfg_ch,
  output logic [CFGW-1:0]      cfg_w,
  output logic [CFGT-1:0]      cfg_thr,
  output logic                 in_valid,
  input  logic                 in_ready,
  output logic [C1-1:0]        in_pixel,
  input  logic                 out_valid,
  output logic                 out_ready,
  input  logic [NCLS-1:0]      out_bits,
  input  logic [CWO-1:0]       out_score [NCLS],
  // mechanism events observed inside the design
  input  logic                 ev_pad,
  input  logic                 ev_fold,
  input  logic                 ev_pool,
  // FC1 input vector as it leaves the collector (checked bit by bit)
  input  logic                 vec_fire,
  input  logic [NFC-1:0]       vec
);
  int unsigned checks = 0, failures = 0, cycles = 0;
  int unsigned n_pad = 0, n_stall = 0, n_fold = 0, n_pool = 0, n_bp = 0;

  // ---------------- parameters and maps of the reference ----------------
  localparam int unsigned CMAX = 512;
  typedef logic [CFGW-1:0] word_t;
  word_t wconv [5][CMAX];      // conv weights, window layout
  int    tconv [5][CMAX];
  word_t wfc   [3][CMAX];
  int    tfc   [3][CMAX];
  int cin_of [5], cout_of [5], dim_of [5], fc_in [3], fc_out [3];

  bit img [NIMG][D][D][C1];
  bit exp_bits [NIMG][NCLS];
  int exp_score [NIMG][NCLS];
  bit exp_vec [NIMG][NFC];
  int unsigned nvec = 0;

  initial begin
    clk = 1'b0;
    forever #5 clk = ~clk;
  end
  always @(posedge clk) cycles++;

  // reference feature maps: conv reads fa and writes fb, pool reads fb and writes fa
  localparam int unsigned CM = (C1 > C6) ? C1 : C6;
  localparam int unsigned VM = (CFGW > F1) ? CFGW : F1;
  bit fa [D][D][CM];
  bit fb [D][D][CM];
  bit va [VM];
  bit vb [VM];
  int sc [VM];

  task automatic ref_conv(input int l, input int d, input int cin, input int cout);
    for (int r = 0; r < d; r++)
      for (int c = 0; c < d; c++)
        for (int n = 0; n < cout; n++) begin
          int cnt = 0;
          for (int m = 0; m < cin; m++)
            for (int i = 0; i < 3; i++) begin
              int td = 0;
              for (int j = 0; j < 3; j++) begin
                int rr = r + i - 1, cc = c + j - 1;
                bit xa = (rr < 0 || rr >= d || cc < 0 || cc >= d) ? PAD_BIT : fa[rr][cc][m];
                bit wb = wconv[l][n][j*3*cin + i*cin + m];
                td += (xa == wb) ? 1 : -1;
              end
              if (td > 0) cnt++;       // clip to +/-1, count the +1s
            end
          fb[r][c][n] = (cnt >= tconv[l][n]);
        end
  endtask

  task automatic ref_pool(input int d, input int ch);
    for (int r = 0; r < d/2; r++)
      for (int c = 0; c < d/2; c++)
        for (int k = 0; k < ch; k++)
          fa[r][c][k] = fb[2*r][2*c][k] | fb[2*r][2*c+1][k] | fb[2*r+1][2*c][k] | fb[2*r+1][2*c+1][k];
  endtask

  task automatic ref_copy(input int d, input int ch);
    for (int r = 0; r < d; r++)
      for (int c = 0; c < d; c++)
        for (int k = 0; k < ch; k++) fa[r][c][k] = fb[r][c][k];
  endtask

  // one majority FC layer va -> vb: groups g, g+G, g+2G of the padded input
  task automatic ref_fc(input int l, input int nin, input int cout);
    int k = int'(pad3(nin)), g = k / 3;
    for (int n = 0; n < cout; n++) begin
      int cnt = 0;
      for (int q = 0; q < g; q++) begin
        int td = 0;
        for (int mm = 0; mm < 3; mm++) begin
          int idx = q + mm*g;
          bit xa = (idx < nin) ? va[idx] : PAD_BIT;
          td += (xa == wfc[l][n][idx]) ? 1 : -1;
        end
        if (td > 0) cnt++;
      end
      sc[n] = cnt;
      vb[n] = (cnt >= tfc[l][n]);
    end
  endtask

  task automatic ref_image(input int im);
    for (int r = 0; r < int'(D); r++)
      for (int c = 0; c < int'(D); c++)
        for (int k = 0; k < int'(C1); k++) fa[r][c][k] = img[im][r][c][k];
    // layer sizes come from run-time variables so that the simulator
    // compiles each task once instead of specialising it per call
    ref_conv(0, dim_of[0], cin_of[0], cout_of[0]); ref_pool(dim_of[0], cout_of[0]);
    ref_conv(1, dim_of[1], cin_of[1], cout_of[1]); ref_copy(dim_of[1], cout_of[1]);
    ref_conv(2, dim_of[2], cin_of[2], cout_of[2]); ref_pool(dim_of[2], cout_of[2]);
    ref_conv(3, dim_of[3], cin_of[3], cout_of[3]); ref_copy(dim_of[3], cout_of[3]);
    ref_conv(4, dim_of[4], cin_of[4], cout_of[4]); ref_pool(dim_of[4], cout_of[4]);
    for (int r = 0; r < int'(D/8); r++)
      for (int c = 0; c < int'(D/8); c++)
        for (int k = 0; k < int'(C6); k++) va[(r*(D/8) + c)*C6 + k] = fa[r][c][k];
    for (int k = 0; k < int'(NFC); k++) exp_vec[im][k] = va[k];
    ref_fc(0, fc_in[0], fc_out[0]);
    for (int n = 0; n < int'(F1); n++) va[n] = vb[n];
    ref_fc(1, fc_in[1], fc_out[1]);
    for (int n = 0; n < int'(F2); n++) va[n] = vb[n];
    ref_fc(2, fc_in[2], fc_out[2]);
    for (int n = 0; n < int'(NCLS); n++) begin
      exp_bits[im][n]  = vb[n];
      exp_score[im][n] = sc[n];
    end
  endtask

  function automatic word_t rand_word();
    word_t w = '0;
    for (int k = 0; k < int'(CFGW); k += 32) w = (w << 32) | word_t'($urandom);
    return w;
  endfunction

  // threshold near the mean count of K/3 random majority bits
  function automatic int rand_thr(input int k);
    int t = (k / 6) + int'($urandom_range(4)) - 2;
    return (t < 0) ? 0 : t;
  endfunction

  task automatic cfg_write(input int l, input int ch, input word_t w, input int t);
    @(negedge clk);
    cfg_we = 1'b1; cfg_layer = 4'(l); cfg_ch = 9'(ch); cfg_w = w; cfg_thr = CFGT'(t);
    @(negedge clk);
    cfg_we = 1'b0;
  endtask

  // ---------------- stimulus ----------------
  initial begin : main
    rst_n = 1'b0; cfg_we = 1'b0; cfg_layer = '0; cfg_ch = '0; cfg_w = '0; cfg_thr = '0;
    in_valid = 1'b0; in_pixel = '0;
    cin_of  = '{C1, C2, C3, C4, C5};
    cout_of = '{C2, C3, C4, C5, C6};
    dim_of  = '{D, D/2, D/2, D/4, D/4};
    fc_in   = '{NFC, F1, F2};
    fc_out  = '{F1, F2, NCLS};
    for (int l = 0; l < 5; l++)
      for (int n = 0; n < int'(cout_of[l]); n++) begin
        wconv[l][n] = rand_word();
        tconv[l][n] = rand_thr(9 * int'(cin_of[l]));
      end
    for (int n = 0; n < int'(F1); n++)   begin wfc[0][n] = rand_word(); tfc[0][n] = rand_thr(int'(pad3(NFC))); end
    for (int n = 0; n < int'(F2); n++)   begin wfc[1][n] = rand_word(); tfc[1][n] = rand_thr(int'(pad3(F1))); end
    for (int n = 0; n < int'(NCLS); n++) begin wfc[2][n] = rand_word(); tfc[2][n] = rand_thr(int'(pad3(F2))); end
    for (int im = 0; im < int'(NIMG); im++)
      for (int r = 0; r < int'(D); r++)
        for (int c = 0; c < int'(D); c++)
          for (int k = 0; k < int'(C1); k++) img[im][r][c][k] = 1'($urandom);
    for (int im = 0; im < int'(NIMG); im++) ref_image(im);

    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int l = 0; l < 5; l++)
      for (int n = 0; n < int'(cout_of[l]); n++) cfg_write(l, n, wconv[l][n], tconv[l][n]);
    for (int n = 0; n < int'(F1); n++)   cfg_write(5, n, wfc[0][n], tfc[0][n]);
    for (int n = 0; n < int'(F2); n++)   cfg_write(6, n, wfc[1][n], tfc[1][n]);
    for (int n = 0; n < int'(NCLS); n++) cfg_write(7, n, wfc[2][n], tfc[2][n]);

    // stream the images with random gaps
    for (int im = 0; im < int'(NIMG); im++)
      for (int r = 0; r < int'(D); r++)
        for (int c = 0; c < int'(D); c++) begin
          @(negedge clk);
          while ($urandom_range(9) == 0) begin in_valid = 1'b0; @(negedge clk); end
          in_valid = 1'b1;
          for (int k = 0; k < int'(C1); k++) in_pixel[k] = img[im][r][c][k];
          @(posedge clk);
          while (!in_ready) @(posedge clk);
        end
    @(negedge clk);
    in_valid = 1'b0;
  end

  // ---------------- output checking ----------------
  int unsigned nout = 0;
  // the first result always meets one cycle of backpressure
  always @(negedge clk) out_ready = (out_valid && n_bp == 0) ? 1'b0 : ($urandom_range(3) != 0);

  always @(posedge clk) begin
    if (in_valid && !in_ready) n_stall++;
    if (out_valid && !out_ready) n_bp++;
    if (ev_pad)  n_pad++;
    if (ev_fold) n_fold++;
    if (ev_pool) n_pool++;
    if (rst_n && vec_fire && nvec < NIMG) begin
      automatic int bad = 0;
      for (int k = 0; k < int'(NFC); k++) begin
        checks++;
        if (vec[k] != exp_vec[nvec][k]) bad++;
      end
      if (bad != 0) begin failures += bad; $display("image %0d: %0d FC1 input bits differ", nvec, bad); end
      nvec++;
    end
    if (rst_n && out_valid && out_ready) begin
      for (int n = 0; n < int'(NCLS); n++) begin
        checks++;
        if (out_score[n] != CWO'(exp_score[nout][n]) || out_bits[n] != exp_bits[nout][n]) begin
          failures++;
          $display("image %0d class %0d: score %0d bit %0d, expected %0d / %0d",
                   nout, n, out_score[n], out_bits[n], exp_score[nout][n], exp_bits[nout][n]);
        end
      end
      nout++;
      if (nout == NIMG) finish_test();
    end
  end

  task automatic mech(input string name, input int unsigned n);
    checks++;
    $display("mechanism %-26s seen %0d times", name, n);
    if (n == 0) begin failures++; $display("  never happened"); end
  endtask

  task automatic finish_test();
    mech("padding pixel inserted", n_pad);
    mech("input stall (in_ready low)", n_stall);
    mech("PE fold step", n_fold);
    mech("max-pooled pixel", n_pool);
    mech("output backpressure", n_bp);
    mech("FC input padded to 3n", (pad3(NFC) != NFC) ? 1 : 0);
    $display("images %0d, cycles %0d", nout, cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask

  initial begin : watchdog
    repeat (MAXCYC) @(posedge clk);
    failures++;
    $display("watchdog: only %0d of %0d images after %0d cycles", nout, NIMG, MAXCYC);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
