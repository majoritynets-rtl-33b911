// tb_fc_collector: pixel stream to parallel vector.
//
// Four vectors of 6 pixels x 7 bits are streamed with random gaps and random
// backpressure on the vector side; each vector must hold pixel p at bits
// [p*7 +: 7], and no pixel may be lost while a vector waits.
module tb_fc_collector;
  localparam int unsigned NPIX = 6, C = 7, NV = 4;
  logic clk = 1'b0, rst_n, in_valid, in_ready, out_valid, out_ready;
  logic [C-1:0] in_pixel;
  logic [NPIX*C-1:0] out_vec;
  logic [NPIX*C-1:0] vecs [NV];
  int unsigned checks = 0, failures = 0, nout = 0;

  fc_collector #(.NPIX(NPIX), .C(C)) u_dut (.*);

  always #5 clk = ~clk;
  always @(negedge clk) out_ready = ($urandom_range(3) == 0);

  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    checks++;
    if (out_vec !== vecs[nout]) begin failures++; $display("vector %0d: %h expected %h", nout, out_vec, vecs[nout]); end
    nout++;
  end

  initial begin
    rst_n = 1'b0; in_valid = 1'b0; in_pixel = '0;
    for (int v = 0; v < NV; v++) vecs[v] = {$urandom, $urandom} >> (64 - NPIX*C);
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int v = 0; v < NV; v++)
      for (int p = 0; p < NPIX; p++) begin
        @(negedge clk);
        while ($urandom_range(3) == 0) begin in_valid = 1'b0; @(negedge clk); end
        in_valid = 1'b1; in_pixel = vecs[v][p*C +: C];
        @(posedge clk);
        while (!in_ready) @(posedge clk);
      end
    @(negedge clk); in_valid = 1'b0;
    wait (nout == NV);
    checks++;
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
