// tb_maj_popcount: XNorMaj-3 popcount against an integer model.
//
// Random and corner vectors (all equal, all different) for a 27-pair and a
// 576-pair instance. The model counts, for each group g (pairs g, g+K/3,
// g+2K/3), whether at least two of the three products are +1.
module tb_maj_popcount;
  import majnet_pkg::*;
  localparam int unsigned KA = 27, KB = 576;
  logic [KA-1:0] xa, wa;
  logic [KB-1:0] xb, wb;
  logic [cnt_width(KA)-1:0] ca;
  logic [cnt_width(KB)-1:0] cb;
  int unsigned checks = 0, failures = 0;

  maj_popcount #(.K(KA)) u_a (.x(xa), .w(wa), .count(ca));
  maj_popcount #(.K(KB)) u_b (.x(xb), .w(wb), .count(cb));

  function automatic int model(input logic [KB-1:0] x, input logic [KB-1:0] w, input int k);
    int g = k / 3, n = 0;
    for (int q = 0; q < g; q++) begin
      int agree = 0;
      for (int m = 0; m < 3; m++) agree += (x[q + m*g] == w[q + m*g]) ? 1 : 0;
      if (agree >= 2) n++;
    end
    return n;
  endfunction

  initial begin
    for (int t = 0; t < 300; t++) begin
      for (int k = 0; k < int'(KB); k += 32) begin xb[k +: 32] = $urandom; wb[k +: 32] = $urandom; end
      if (t == 0) begin xb = '0; wb = '0; end
      if (t == 1) begin xb = '0; wb = '1; end
      xa = xb[KA-1:0];
      wa = wb[KA-1:0];
      if (t == 2) begin xa = 27'b101_101_101_101_101_101_101_101_101; wa = ~xa; wa[8:0] = xa[8:0]; end
      #1;
      checks += 2;
      if (int'(ca) != model(KB'(xa), KB'(wa), KA)) begin failures++; $display("K=27: %0d vs %0d", ca, model(KB'(xa), KB'(wa), KA)); end
      if (int'(cb) != model(xb, wb, KB))          begin failures++; $display("K=576: %0d vs %0d", cb, model(xb, wb, KB)); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
