// window_buffer: input buffers of a majority convolution layer.
//
// Pixels of a D x D feature map arrive in raster order, one pixel (all C
// channels in parallel) per handshake. The buffer walks the padded
// (D+2) x (D+2) grid: on border positions it shifts in a padding pixel
// (PAD_BIT in every channel) without consuming input, elsewhere it consumes
// one input pixel. A shift register of two padded rows plus three pixels
// (the line buffers of every channel) then holds a complete 3x3xC window
// whenever the grid position is at least (2,2), and the window for output
// pixel (r-2, c-2) is offered downstream.
//
// Window layout: bit (j*3*C + i*C + ch) is row i, column j (0 = top/left),
// channel ch. Column j forms slice j of 3*C bits, so majority group
// g = i*C + ch (one kernel row of one channel) takes its three members from
// the same position g of the three slices.
//
// Handshake: in_valid/in_ready and win_valid/win_ready (valid/ready, data
// moves on a cycle where both are high). win_valid is registered; the window
// taps are read straight from the shift register, which does not move while a
// window waits. One grid step per cycle when nothing stalls, so a frame takes
// (D+2)^2 cycles at least.
//
// Line buffers feeding 3x3xC windows follow the paper; the padding value,
// in-buffer padding insertion and the bit layout are this design's choices.
module window_buffer #(
  parameter int unsigned D       = 32,   // feature map width/height (Conv2 of CNV-P)
  parameter int unsigned C       = 64,   // channels
  parameter bit          PAD_BIT = 1'b0  // padding value (logic 0 = -1)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [C-1:0]     in_pixel,
  output logic             win_valid,
  input  logic             win_ready,
  output logic [9*C-1:0]   window
);
  localparam int unsigned W  = D + 2;        // padded width
  localparam int unsigned L  = 2 * W + 3;    // shift register length
  localparam int unsigned PW = $clog2(W);

  logic [C-1:0]  sr [L];                     // sr[0] is the newest pixel
  logic [PW-1:0] row, col;                   // grid position of the next shift
  logic          pad, advance;

  always_comb begin
    pad      = (row == 0) || (row == PW'(W - 1)) || (col == 0) || (col == PW'(W - 1));
    // step when the window slot is free and, for a real pixel, one is there
    advance  = (!win_valid || win_ready) && (pad || in_valid);
    in_ready = (!win_valid || win_ready) && !pad;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      row       <= '0;
      col       <= '0;
      win_valid <= 1'b0;
    end else begin
      if (win_valid && win_ready) win_valid <= 1'b0;
      if (advance) begin
        win_valid <= (row >= 2) && (col >= 2);
        if (col == PW'(W - 1)) begin
          col <= '0;
          row <= (row == PW'(W - 1)) ? '0 : row + 1'b1;
        end else begin
          col <= col + 1'b1;
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (advance) begin
      sr[0] <= pad ? {C{PAD_BIT}} : in_pixel;
      for (int unsigned k = 1; k < L; k++) sr[k] <= sr[k-1];
    end
  end

  // tap (i, j): row i from the top, column j from the left
  always_comb begin
    for (int unsigned i = 0; i < 3; i++)
      for (int unsigned j = 0; j < 3; j++)
        window[(j*3 + i)*C +: C] = sr[(2-i)*W + (2-j)];
  end

endmodule
