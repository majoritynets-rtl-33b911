// tb_param_mem: write-then-read test of the parameter buffer.
//
// A 40-bit x 6-word instance is filled with random words, partly rewritten,
// and read back at every address; the read port is asynchronous, so the word
// must be there in the cycle after its write.
module tb_param_mem;
  localparam int unsigned WIDTH = 40, DEPTH = 6, AW = 3;
  logic clk = 1'b0, we;
  logic [AW-1:0] waddr, raddr;
  logic [WIDTH-1:0] wdata, rdata;
  logic [WIDTH-1:0] model [DEPTH];
  int unsigned checks = 0, failures = 0;

  param_mem #(.WIDTH(WIDTH), .DEPTH(DEPTH)) u_dut (.*);

  always #5 clk = ~clk;

  task automatic write(input int a, input logic [WIDTH-1:0] d);
    @(negedge clk); we = 1'b1; waddr = AW'(a); wdata = d;
    @(negedge clk); we = 1'b0;
    model[a] = d;
  endtask

  initial begin
    we = 1'b0; waddr = '0; raddr = '0; wdata = '0;
    for (int a = 0; a < int'(DEPTH); a++) write(a, {$urandom, $urandom});
    for (int t = 0; t < 20; t++) write(int'($urandom_range(DEPTH-1)), {$urandom, $urandom});
    for (int pass = 0; pass < 2; pass++)
      for (int a = 0; a < int'(DEPTH); a++) begin
        raddr = AW'(a);
        #1;
        checks++;
        if (rdata !== model[a]) begin failures++; $display("addr %0d: %h vs %h", a, rdata, model[a]); end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
