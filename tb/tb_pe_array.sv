// tb_pe_array: folded PE row with its parameter buffers.
//
// K = 27 inputs, COUT = 8 channels on 2 PEs folded FF = 4 times. Random
// weights and thresholds are loaded for every channel, then 20 random input
// vectors are processed, the first 10 back to back with the output always
// ready, the rest with random output backpressure. Every output bit and count
// is compared with an integer model; in the back-to-back phase a vector must
// be accepted every FF cycles (the folding rate).
module tb_pe_array;
  import majnet_pkg::*;
  localparam int unsigned K = 27, COUT = 8, FF = 4, CW = cnt_width(K), CHW = 3, NV = 20;
  logic clk = 1'b0, rst_n, cfg_we, in_valid, in_ready, out_valid, out_ready;
  logic [CHW-1:0] cfg_ch;
  logic [K-1:0] cfg_w, in_vec;
  logic [CW-1:0] cfg_thr;
  logic [COUT-1:0] out_bits;
  logic [CW-1:0] out_count [COUT];
  logic [K-1:0] wt [COUT];
  int thr [COUT];
  logic [K-1:0] vecs [NV];
  int unsigned checks = 0, failures = 0, nout = 0, cyc = 0, acc_cyc [NV];
  bit bp;

  pe_array #(.K(K), .COUT(COUT), .FF(FF)) u_dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;
  always @(negedge clk) out_ready = bp ? ($urandom_range(2) == 0) : 1'b1;

  function automatic int model_count(input logic [K-1:0] x, input logic [K-1:0] w);
    int n = 0;
    for (int q = 0; q < int'(K/3); q++) begin
      automatic int agree = 0;
      for (int m = 0; m < 3; m++) agree += (x[q + m*(K/3)] == w[q + m*(K/3)]) ? 1 : 0;
      if (agree >= 2) n++;
    end
    return n;
  endfunction

  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    for (int ch = 0; ch < int'(COUT); ch++) begin
      automatic int e = model_count(vecs[nout], wt[ch]);
      checks++;
      if (int'(out_count[ch]) != e || out_bits[ch] != (e >= thr[ch])) begin
        failures++;
        $display("vector %0d ch %0d: count %0d bit %b, expected %0d %b", nout, ch, out_count[ch], out_bits[ch], e, e >= thr[ch]);
      end
    end
    nout++;
  end

  initial begin
    rst_n = 1'b0; cfg_we = 1'b0; cfg_ch = '0; cfg_w = '0; cfg_thr = '0; in_valid = 1'b0; in_vec = '0; bp = 1'b0;
    for (int ch = 0; ch < int'(COUT); ch++) begin wt[ch] = K'($urandom); thr[ch] = int'($urandom_range(2, 7)); end
    for (int v = 0; v < int'(NV); v++) vecs[v] = K'($urandom);
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int ch = 0; ch < int'(COUT); ch++) begin
      @(negedge clk); cfg_we = 1'b1; cfg_ch = CHW'(ch); cfg_w = wt[ch]; cfg_thr = CW'(thr[ch]);
    end
    @(negedge clk); cfg_we = 1'b0;
    for (int v = 0; v < int'(NV); v++) begin
      if (v == 10) bp = 1'b1;
      in_valid = 1'b1; in_vec = vecs[v];
      @(posedge clk);
      while (!in_ready) @(posedge clk);
      acc_cyc[v] = cyc;
      @(negedge clk);
    end
    in_valid = 1'b0;
    for (int v = 1; v < 10; v++) begin
      checks++;
      if (acc_cyc[v] - acc_cyc[v-1] != FF) begin failures++; $display("vector %0d accepted %0d cycles after the previous", v, acc_cyc[v] - acc_cyc[v-1]); end
    end
    wait (nout == NV);
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
