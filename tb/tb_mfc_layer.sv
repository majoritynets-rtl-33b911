// tb_mfc_layer: majority fully-connected layer with input padding.
//
// NIN = 20 inputs (padded to 21, so one group holds a pad input), COUT = 6
// channels on 2 PEs folded 3 times. Random weights, thresholds and input
// vectors; bits and counts are compared with a model that evaluates the +/-1
// dot product of each group, clips it and counts the +1 groups.
module tb_mfc_layer;
  import majnet_pkg::*;
  localparam int unsigned NIN = 20, K = 21, COUT = 6, FF = 3, CW = cnt_width(K), CHW = 3, NV = 12;
  logic clk = 1'b0, rst_n, cfg_we, in_valid, in_ready, out_valid, out_ready;
  logic [CHW-1:0] cfg_ch;
  logic [K-1:0] cfg_w;
  logic [NIN-1:0] in_vec;
  logic [CW-1:0] cfg_thr;
  logic [COUT-1:0] out_bits;
  logic [CW-1:0] out_count [COUT];
  logic [K-1:0] wt [COUT];
  int thr [COUT];
  logic [NIN-1:0] vecs [NV];
  int unsigned checks = 0, failures = 0, nout = 0;

  mfc_layer #(.NIN(NIN), .COUT(COUT), .FF(FF)) u_dut (.*);

  always #5 clk = ~clk;
  always @(negedge clk) out_ready = ($urandom_range(2) != 0);

  function automatic int model_count(input logic [NIN-1:0] x, input logic [K-1:0] w);
    int n = 0;
    for (int q = 0; q < int'(K/3); q++) begin
      automatic int td = 0;
      for (int m = 0; m < 3; m++) begin
        automatic int idx = q + m*int'(K/3);
        automatic logic xa = (idx < int'(NIN)) ? x[idx] : 1'b0;
        td += (xa == w[idx]) ? 1 : -1;
      end
      if (td > 0) n++;
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
    rst_n = 1'b0; cfg_we = 1'b0; cfg_ch = '0; cfg_w = '0; cfg_thr = '0; in_valid = 1'b0; in_vec = '0;
    for (int ch = 0; ch < int'(COUT); ch++) begin wt[ch] = K'($urandom); thr[ch] = int'($urandom_range(2, 5)); end
    for (int v = 0; v < int'(NV); v++) vecs[v] = NIN'($urandom);
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int ch = 0; ch < int'(COUT); ch++) begin
      @(negedge clk); cfg_we = 1'b1; cfg_ch = CHW'(ch); cfg_w = wt[ch]; cfg_thr = CW'(thr[ch]);
    end
    @(negedge clk); cfg_we = 1'b0;
    for (int v = 0; v < int'(NV); v++) begin
      in_valid = 1'b1; in_vec = vecs[v];
      @(posedge clk);
      while (!in_ready) @(posedge clk);
      @(negedge clk);
    end
    in_valid = 1'b0;
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
