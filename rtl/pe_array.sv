// pe_array: the folded row of processing units of one majority layer.
//
// COUT output channels are computed by P = COUT/FF PEs, each folded FF times:
// PE p serves channels p*FF .. p*FF+FF-1, one per cycle, reading that
// channel's weights and threshold from its own param_mem with the fold counter
// f as address. Folding the number of PEs, not their input width, keeps every
// PE a full-width majority popcount, so no partial sums have to be stored.
// The FF partial results are gathered and the complete output (COUT bits and
// COUT popcounts) is registered after the last fold.
//
// Configuration: cfg_we writes weight word cfg_w and threshold cfg_thr of
// channel cfg_ch. Handshake: in_valid/in_ready (the input vector must stay
// stable until in_ready), out_valid/out_ready. Timing: FF cycles per input
// vector, output registered one cycle after the last fold; a new vector can
// start while the previous output waits, but its last fold waits for it.
//
// Folding the number of PEs by FF follows the paper; the channel-to-PE
// mapping, one fold per cycle and the handshake are this design's choices.
module pe_array
  import majnet_pkg::*;
#(
  parameter int unsigned K    = 576,   // inputs per neuron, multiple of 3
  parameter int unsigned COUT = 64,
  parameter int unsigned FF   = 1,     // folding factor
  parameter int unsigned CW   = cnt_width(K),
  parameter int unsigned CHW  = (COUT > 1) ? $clog2(COUT) : 1
) (
  input  logic                clk,
  input  logic                rst_n,
  // configuration
  input  logic                cfg_we,
  input  logic [CHW-1:0]      cfg_ch,
  input  logic [K-1:0]        cfg_w,
  input  logic [CW-1:0]       cfg_thr,
  // input vector
  input  logic                in_valid,
  output logic                in_ready,
  input  logic [K-1:0]        in_vec,
  // result
  output logic                out_valid,
  input  logic                out_ready,
  output logic [COUT-1:0]     out_bits,
  output logic [CW-1:0]       out_count [COUT]
);
  localparam int unsigned P  = COUT / FF;
  localparam int unsigned FW = (FF > 1) ? $clog2(FF) : 1;

  logic [FW-1:0]   f;
  logic            last, step;
  logic [P-1:0]    y;
  logic [CW-1:0]   cnt [P];
  logic [COUT-1:0] acc_bits, next_bits;
  logic [CW-1:0]   acc_cnt [COUT];
  logic [CW-1:0]   next_cnt [COUT];
  logic [FW-1:0]   wr_fold;
  logic [CHW-1:0]  wr_pe;

  always_comb begin
    last     = (f == FW'(FF - 1));
    step     = in_valid && (!last || !out_valid || out_ready);
    in_ready = step && last;
    wr_pe    = CHW'(cfg_ch / CHW'(FF));
    wr_fold  = FW'(cfg_ch % CHW'(FF));
  end

  for (genvar p = 0; p < P; p++) begin : g_pe
    logic [K-1:0]  w;
    logic [CW-1:0] thr;
    logic          we;

    always_comb we = cfg_we && (wr_pe == CHW'(p));

    param_mem #(.WIDTH(K),  .DEPTH(FF), .AW(FW)) u_wmem
      (.clk(clk), .we(we), .waddr(wr_fold), .wdata(cfg_w),   .raddr(f), .rdata(w));
    param_mem #(.WIDTH(CW), .DEPTH(FF), .AW(FW)) u_tmem
      (.clk(clk), .we(we), .waddr(wr_fold), .wdata(cfg_thr), .raddr(f), .rdata(thr));
    majority_pe #(.K(K), .CW(CW)) u_pe
      (.x(in_vec), .w(w), .thr(thr), .count(cnt[p]), .y(y[p]));
  end

  // the current fold's results merged into the partial output
  always_comb begin
    next_bits = acc_bits;
    next_cnt  = acc_cnt;
    for (int unsigned p = 0; p < P; p++) begin
      next_bits[p*FF + 32'(f)] = y[p];
      next_cnt[p*FF + 32'(f)] = cnt[p];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      f         <= '0;
      out_valid <= 1'b0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (step) begin
        f <= last ? '0 : f + 1'b1;
        if (last) out_valid <= 1'b1;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (step) begin
      acc_bits <= next_bits;
      acc_cnt  <= next_cnt;
      if (last) begin
        out_bits  <= next_bits;
        out_count <= next_cnt;
      end
    end
  end

  initial assert (COUT % FF == 0) else $error("pe_array: COUT=%0d not a multiple of FF=%0d", COUT, FF);
  initial assert (K % 3 == 0) else $error("pe_array: K=%0d not a multiple of 3", K);
endmodule
