// tb_majority_pe: popcount and threshold compare of one PE.
//
// K = 36 pairs (12 majority groups). Random vectors and thresholds, including
// the count exactly at the threshold and one below it; the output bit must be
// 1 exactly when count >= threshold, and the count must match an integer
// model of the majority groups.
module tb_majority_pe;
  import majnet_pkg::*;
  localparam int unsigned K = 36, CW = cnt_width(K);
  logic [K-1:0] x, w;
  logic [CW-1:0] thr, count;
  logic y;
  int unsigned checks = 0, failures = 0;

  majority_pe #(.K(K)) u_dut (.x(x), .w(w), .thr(thr), .count(count), .y(y));

  function automatic int model();
    int n = 0;
    for (int q = 0; q < int'(K/3); q++) begin
      int agree = 0;
      for (int m = 0; m < 3; m++) agree += (x[q + m*(K/3)] == w[q + m*(K/3)]) ? 1 : 0;
      if (agree >= 2) n++;
    end
    return n;
  endfunction

  initial begin
    for (int t = 0; t < 500; t++) begin
      x = {$urandom, $urandom} >> (64 - K);
      w = {$urandom, $urandom} >> (64 - K);
      #1;
      case (t % 3)
        0: thr = CW'(model());
        1: thr = CW'(model() + 1);
        default: thr = CW'($urandom_range(K/3));
      endcase
      #1;
      checks += 2;
      if (int'(count) != model()) begin failures++; $display("count %0d, expected %0d", count, model()); end
      if (y != (model() >= int'(thr))) begin failures++; $display("y %b, count %0d thr %0d", y, model(), thr); end
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
