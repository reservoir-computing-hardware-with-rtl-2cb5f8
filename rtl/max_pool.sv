// max_pool: 2x2 max pooling with stride 2 over an H x W image of unsigned B-bit pixels.
//
// Each output pixel is the largest of the four input pixels of its window; windows do not
// overlap. The result, (H/2) x (W/2) pixels, is the reduced state vector of the read-out,
// flattened row-major: pooled[pr*(W/2) + pc] comes from rows 2pr, 2pr+1 and columns 2pc, 2pc+1.
//
// Window size, stride and the unsigned pixel values follow the paper (which also states zero
// padding; with even H and W no padding is ever used). The row-major order of the vector is
// this design's choice; the weights must be stored in the same order.
//
// Timing: purely combinational.
module max_pool #(
  parameter int unsigned W = reca_pkg::IMG_W,
  parameter int unsigned H = reca_pkg::IMG_H,
  parameter int unsigned B = reca_pkg::BITS,
  localparam int unsigned PW = W / reca_pkg::POOL,
  localparam int unsigned PH = H / reca_pkg::POOL
) (
  input  logic [B-1:0] pixels [H][W],
  output logic [B-1:0] pooled [PH*PW]
);

  function automatic logic [B-1:0] max2(logic [B-1:0] a, logic [B-1:0] b);
    return (a > b) ? a : b;
  endfunction

  for (genvar pr = 0; pr < int'(PH); pr++) begin : g_pr
    for (genvar pc = 0; pc < int'(PW); pc++) begin : g_pc
      assign pooled[pr*PW + pc] = max2(max2(pixels[2*pr][2*pc],   pixels[2*pr][2*pc+1]),
                                       max2(pixels[2*pr+1][2*pc], pixels[2*pr+1][2*pc+1]));
    end
  end

  initial begin
    assert (W % 2 == 0 && H % 2 == 0) else $error("max_pool needs an even image size");
  end

endmodule
