// tb_xnor_maj3: exhaustive test of the XNorMaj-3 unit array.
//
// A 2-unit array is driven with every combination of its 12 input bits
// (4096 vectors). Each unit's output is compared with the sign of the
// 3-term +/-1 dot product, computed here with integers.
module tb_xnor_maj3;
  localparam int unsigned N = 2;
  logic [2:0][N-1:0] x, w;
  logic [N-1:0] y;
  int unsigned checks = 0, failures = 0;

  xnor_maj3 #(.N(N)) u_dut (.x(x), .w(w), .y(y));

  initial begin
    for (int v = 0; v < (1 << (6*N)); v++) begin
      {x, w} = 12'(v);
      #1;
      for (int g = 0; g < N; g++) begin
        automatic int dot = 0;
        for (int m = 0; m < 3; m++) dot += (x[m][g] ? 1 : -1) * (w[m][g] ? 1 : -1);
        checks++;
        if (y[g] != (dot > 0)) begin
          failures++;
          if (failures < 10) $display("x=%b w=%b unit %0d: y=%b dot=%0d", x, w, g, y[g], dot);
        end
      end
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
