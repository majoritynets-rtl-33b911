// fc_collector: gathers a pixel stream into the parallel input of an FC layer.
//
// The fully-connected layers take their whole input vector at once. This
// block receives NPIX pixels of C bits in raster order and places pixel p at
// bits [p*C +: C] of the vector (pixel-major, channel-minor), then offers the
// vector. While the vector waits to be taken no new pixel is accepted.
//
// Handshake: in_valid/in_ready per pixel, out_valid/out_ready per vector.
// NPIX cycles to fill, one cycle to hand over.
//
// The paper assumes FC inputs arrive in parallel; how they are gathered,
// and the flattening order, are this design's choices.
module fc_collector #(
  parameter int unsigned NPIX = 16,   // 4 x 4 pixels after the last pool
  parameter int unsigned C    = 256
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  output logic                 in_ready,
  input  logic [C-1:0]         in_pixel,
  output logic                 out_valid,
  input  logic                 out_ready,
  output logic [NPIX*C-1:0]    out_vec
);
  localparam int unsigned PW = (NPIX > 1) ? $clog2(NPIX) : 1;

  logic [PW-1:0] idx;

  always_comb in_ready = !out_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      idx       <= '0;
      out_valid <= 1'b0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (in_valid && in_ready) begin
        if (idx == PW'(NPIX - 1)) begin
          idx       <= '0;
          out_valid <= 1'b1;
        end else begin
          idx <= idx + 1'b1;
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid && in_ready) out_vec[idx*C +: C] <= in_pixel;
  end
endmodule
