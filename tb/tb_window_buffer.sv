// tb_window_buffer: sliding-window generation with padding and stalls.
//
// A 5x5x3 map is streamed twice (two frames) with random input gaps while the
// window consumer is randomly not ready. Every window that is taken is
// compared with the 3x3x3 neighbourhood of the next output pixel in raster
// order, built here from the frame with out-of-map positions set to the pad
// value. Checks also the number of windows per frame (D*D) and that a frame
// with no stalls takes (D+2)^2 grid steps.
module tb_window_buffer;
  localparam int unsigned D = 5, C = 3, W = D + 2;
  logic clk = 1'b0, rst_n, in_valid, in_ready, win_valid, win_ready;
  logic [C-1:0] in_pixel;
  logic [9*C-1:0] window;
  logic [C-1:0] frame [2][D][D];
  int unsigned checks = 0, failures = 0, nwin = 0, cyc = 0;
  bit stall_mode;

  window_buffer #(.D(D), .C(C), .PAD_BIT(1'b0)) u_dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  always @(negedge clk) win_ready = stall_mode ? ($urandom_range(2) == 0) : 1'b1;

  always @(posedge clk) if (rst_n && win_valid && win_ready) begin
    automatic int f = int'(nwin / (D*D)) % 2;
    automatic int r = int'(nwin % (D*D)) / D;
    automatic int c = int'(nwin % D);
    automatic logic [9*C-1:0] e;
    for (int i = 0; i < 3; i++)
      for (int j = 0; j < 3; j++)
        for (int ch = 0; ch < C; ch++) begin
          automatic int rr = r + i - 1, cc = c + j - 1;
          e[(j*3 + i)*C + ch] = (rr < 0 || cc < 0 || rr >= D || cc >= D) ? 1'b0 : frame[f][rr][cc][ch];
        end
    checks++;
    if (window !== e) begin failures++; $display("window %0d: %h expected %h", nwin, window, e); end
    nwin++;
  end

  task automatic send_frame(input int f, input bit gaps);
    for (int r = 0; r < D; r++)
      for (int c = 0; c < D; c++) begin
        @(negedge clk);
        while (gaps && $urandom_range(3) == 0) begin in_valid = 1'b0; @(negedge clk); end
        in_valid = 1'b1; in_pixel = frame[f][r][c];
        @(posedge clk);
        while (!in_ready) @(posedge clk);
      end
    @(negedge clk); in_valid = 1'b0;
  endtask

  initial begin
    int t0;
    rst_n = 1'b0; in_valid = 1'b0; in_pixel = '0; stall_mode = 1'b0;
    for (int f = 0; f < 2; f++) for (int r = 0; r < D; r++) for (int c = 0; c < D; c++) frame[f][r][c] = C'($urandom);
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    // frame 0, no stalls: (D+2)^2 grid steps until the last window is taken
    t0 = cyc;
    fork
      send_frame(0, 1'b0);
      begin wait (nwin == D*D); end
    join
    checks++;
    if (cyc - t0 > W*W + 2 || cyc - t0 < W*W - 2) begin failures++; $display("frame took %0d cycles, expected about %0d", cyc - t0, W*W); end
    // finish the padded grid of frame 0 (last row and column of padding)
    repeat (W + 2) @(negedge clk);
    stall_mode = 1'b1;
    fork
      send_frame(1, 1'b1);
      begin wait (nwin == 2*D*D); end
    join
    checks++;
    if (nwin != 2*D*D) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired after %0d windows", nwin);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
