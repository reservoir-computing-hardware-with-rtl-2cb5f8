// ca_reservoir: the cellular-automaton reservoir of a B-bit, H x W grayscale image.
//
// The image is cut into B bit planes. Every row of every plane gets its own rule-90 unit
// (B*H units of W cells) and every column of every plane gets one too (B*W units of H cells);
// the planes never exchange data. Rows and columns are iterated independently from the same
// image, and the state of pixel (r, c) in plane l after k steps is the XOR of bit c of row
// unit (l, r) and bit r of column unit (l, c): B*H*W XOR gates, 6272 for MNIST. The B planes
// of a pixel are then read together as an unsigned B-bit number, plane l having weight 2^l.
//
// Slice 0 is the image itself. Row and column units both start from the image, so their
// XOR would be zero at k = 0; for slice 0 (first = 1) the row units' state, which then equals
// the image, is passed out instead. This follows the paper's statement that the original
// image is pooled and read out too; the multiplexer doing it is this design's choice.
//
// Interface and timing: load copies image into all units on the next clock edge; step
// advances all of them by one rule-90 step. pixels is combinational from the unit registers.
module ca_reservoir #(
  parameter int unsigned W = reca_pkg::IMG_W,
  parameter int unsigned H = reca_pkg::IMG_H,
  parameter int unsigned B = reca_pkg::BITS
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         load,              // load the image into every unit
  input  logic         step,              // one rule-90 step for every unit
  input  logic         first,             // slice 0: pass the image, not row XOR column
  input  logic [B-1:0] image  [H][W],     // image[r][c], bit l = plane l
  output logic [B-1:0] pixels [H][W]      // reservoir state read as B-bit pixels
);

  logic [W-1:0] row_init  [B][H];
  logic [W-1:0] row_state [B][H];
  logic [H-1:0] col_init  [B][W];
  logic [H-1:0] col_state [B][W];

  for (genvar l = 0; l < int'(B); l++) begin : g_plane
    // Cut the image into bit planes, once along rows and once along columns, and XOR the
    // row and column iterations at each pixel.
    for (genvar r = 0; r < int'(H); r++) begin : g_pix_r
      for (genvar c = 0; c < int'(W); c++) begin : g_pix_c
        assign row_init[l][r][c] = image[r][c][l];
        assign col_init[l][c][r] = image[r][c][l];
        assign pixels[r][c][l]   = first ? row_state[l][r][c]
                                         : (row_state[l][r][c] ^ col_state[l][c][r]);
      end
    end
    for (genvar r = 0; r < int'(H); r++) begin : g_row
      r90pu #(.R(W)) u_row (
        .clk        (clk),
        .rst_n      (rst_n),
        .load       (load),
        .step       (step),
        .init_state (row_init[l][r]),
        .state      (row_state[l][r])
      );
    end
    for (genvar c = 0; c < int'(W); c++) begin : g_col
      r90pu #(.R(H)) u_col (
        .clk        (clk),
        .rst_n      (rst_n),
        .load       (load),
        .step       (step),
        .init_state (col_init[l][c]),
        .state      (col_state[l][c])
      );
    end
  end

endmodule
