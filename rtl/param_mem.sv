// param_mem: weight / threshold buffer of one PE.
//
// A PE that is folded FF times serves FF output channels in turn, so it
// keeps FF weight words (one K-bit kernel each) and FF thresholds. This is a
// plain register array with one synchronous write port, used to load the
// trained parameters, and one asynchronous read port addressed by the fold
// counter, so the selected word is available in the same cycle.
//
// Ports: clk; we, waddr, wdata (write, at the clock edge); raddr, rdata.
//
// The paper names weight buffers and a threshold memory per PE; their
// organisation (register array, async read, load port) is this design's.
module param_mem #(
  parameter int unsigned WIDTH = 576,
  parameter int unsigned DEPTH = 4,
  parameter int unsigned AW    = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] rdata
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

  always_comb rdata = mem[raddr];
endmodule
