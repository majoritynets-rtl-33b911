// maxpool2x2: 2x2 max pooling of a binary feature-map stream.
//
// For binary activations (logic 1 = +1) the maximum of four values is their
// OR. Pixels of a D x D map arrive in raster order with all C channels in
// parallel. On even rows the OR of each horizontal pair is kept in a row
// buffer of D/2 entries; on odd rows the pair OR is combined with the stored
// value of the same column pair and one pooled pixel is emitted, giving a
// (D/2) x (D/2) map in raster order.
//
// Handshake: in_valid/in_ready, out_valid/out_ready; the output is a
// register, and input is accepted whenever that register is free or being
// read. One input pixel per cycle; an output every fourth pixel on average.
//
// Pooling on the layer's output stream follows the paper; the OR form of a
// binary max and the row-buffer organisation are this design's.
module maxpool2x2 #(
  parameter int unsigned D = 32,
  parameter int unsigned C = 64
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  output logic          in_ready,
  input  logic [C-1:0]  in_pixel,
  output logic          out_valid,
  input  logic          out_ready,
  output logic [C-1:0]  out_pixel
);
  localparam int unsigned PW = $clog2(D);
  localparam int unsigned H  = D / 2;

  logic [C-1:0]  rowbuf [H];
  logic [C-1:0]  hold;                  // left pixel of the current pair
  logic [PW-1:0] row, col;
  logic          fire;

  always_comb begin
    in_ready = !out_valid || out_ready;
    fire     = in_valid && in_ready;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      row       <= '0;
      col       <= '0;
      out_valid <= 1'b0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (fire) begin
        if (row[0] && col[0]) out_valid <= 1'b1;
        if (col == PW'(D - 1)) begin
          col <= '0;
          row <= (row == PW'(D - 1)) ? '0 : row + 1'b1;
        end else begin
          col <= col + 1'b1;
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (fire) begin
      if (!col[0]) hold <= in_pixel;
      else if (!row[0]) rowbuf[col[PW-1:1]] <= hold | in_pixel;
      else out_pixel <= rowbuf[col[PW-1:1]] | hold | in_pixel;
    end
  end

  initial assert (D % 2 == 0) else $error("maxpool2x2: D must be even");
endmodule
