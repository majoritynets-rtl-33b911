// tb_maxpool2x2: 2x2 OR-pooling of binary maps with handshake stalls.
//
// Three 6x6x5 maps are streamed with random input gaps and random output
// backpressure; each pooled pixel must equal the OR of its 2x2 block, in
// raster order, and exactly 9 pixels must come out per map.
module tb_maxpool2x2;
  localparam int unsigned D = 6, C = 5, NF = 3;
  logic clk = 1'b0, rst_n, in_valid, in_ready, out_valid, out_ready;
  logic [C-1:0] in_pixel, out_pixel;
  logic [C-1:0] map [NF][D][D];
  int unsigned checks = 0, failures = 0, nout = 0;

  maxpool2x2 #(.D(D), .C(C)) u_dut (.*);

  always #5 clk = ~clk;
  always @(negedge clk) out_ready = ($urandom_range(2) != 0);

  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    automatic int f = int'(nout) / ((D/2)*(D/2));
    automatic int r = (int'(nout) % ((D/2)*(D/2))) / (D/2);
    automatic int c = int'(nout) % (D/2);
    automatic logic [C-1:0] e = map[f][2*r][2*c] | map[f][2*r][2*c+1] | map[f][2*r+1][2*c] | map[f][2*r+1][2*c+1];
    checks++;
    if (out_pixel !== e) begin failures++; $display("pool %0d: %b expected %b", nout, out_pixel, e); end
    nout++;
  end

  initial begin
    rst_n = 1'b0; in_valid = 1'b0; in_pixel = '0;
    for (int f = 0; f < NF; f++) for (int r = 0; r < D; r++) for (int c = 0; c < D; c++)
      map[f][r][c] = ($urandom_range(2) == 0) ? C'($urandom) : '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int f = 0; f < NF; f++)
      for (int r = 0; r < D; r++)
        for (int c = 0; c < D; c++) begin
          @(negedge clk);
          while ($urandom_range(3) == 0) begin in_valid = 1'b0; @(negedge clk); end
          in_valid = 1'b1; in_pixel = map[f][r][c];
          @(posedge clk);
          while (!in_ready) @(posedge clk);
        end
    @(negedge clk); in_valid = 1'b0;
    repeat (10) @(negedge clk);
    checks++;
    if (nout != NF*(D/2)*(D/2)) begin failures++; $display("%0d pooled pixels", nout); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
