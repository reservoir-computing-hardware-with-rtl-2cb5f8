// tb_ca_reservoir: self-checking test of the bit-plane reservoir at the MNIST size
// (28 x 28 pixels, 8 planes).
//
// A random image is loaded and stepped 16 times. The reference is computed here pixel by
// pixel, straight from the definition: for every plane, every row and every column is run
// through rule 90 with fixed end cells k times, and pixel (r, c) of plane l is the XOR of
// the row result at c and the column result at r. Slice 0 must be the image itself.
module tb_ca_reservoir;
  localparam int W = 28, H = 28, B = 8, STEPS = 16;

  logic         clk = 1'b0;
  logic         rst_n, load, step, first;
  logic [B-1:0] image  [H][W];
  logic [B-1:0] pixels [H][W];
  int           checks = 0, failures = 0;

  // reference state per plane, row- and column-wise
  logic         rref [B][H][W];   // rows iterated
  logic         cref [B][H][W];   // columns iterated

  ca_reservoir #(.W(W), .H(H), .B(B)) dut (.*);

  always #5 clk = ~clk;

  task automatic ref_step();
    logic nr [B][H][W];
    logic nc [B][H][W];
    for (int l = 0; l < B; l++)
      for (int r = 0; r < H; r++)
        for (int c = 0; c < W; c++) begin
          nr[l][r][c] = (c == 0 || c == W-1) ? rref[l][r][c] : rref[l][r][c-1] ^ rref[l][r][c+1];
          nc[l][r][c] = (r == 0 || r == H-1) ? cref[l][r][c] : cref[l][r-1][c] ^ cref[l][r+1][c];
        end
    rref = nr;
    cref = nc;
  endtask

  task automatic compare(string what, bit slice0);
    int bad = 0;
    for (int r = 0; r < H; r++)
      for (int c = 0; c < W; c++) begin
        logic [B-1:0] exp;
        for (int l = 0; l < B; l++) exp[l] = slice0 ? rref[l][r][c] : rref[l][r][c] ^ cref[l][r][c];
        if (pixels[r][c] !== exp) begin
          if (bad < 3) $display("FAIL %s pixel(%0d,%0d)=%h expected %h", what, r, c, pixels[r][c], exp);
          bad++;
        end
      end
    checks++;
    if (bad != 0) failures++;
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 1'b0; load = 1'b0; step = 1'b0; first = 1'b1;
    for (int r = 0; r < H; r++) for (int c = 0; c < W; c++) image[r][c] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int img = 0; img < 3; img++) begin
      for (int r = 0; r < H; r++)
        for (int c = 0; c < W; c++) begin
          // a digit-like blob for the first image, noise for the others
          image[r][c] = (img == 0) ? (((r-14)*(r-14) + (c-14)*(c-14) < 60) ? 8'(200 + r) : 8'h00)
                                   : 8'($urandom);
          for (int l = 0; l < B; l++) begin
            rref[l][r][c] = image[r][c][l];
            cref[l][r][c] = image[r][c][l];
          end
        end
      @(negedge clk); load = 1'b1;
      @(negedge clk); load = 1'b0;
      first = 1'b1; #1 compare("slice 0", 1'b1);
      first = 1'b0; #1 compare("k=0 row^col is zero", 1'b0);
      for (int k = 1; k <= STEPS; k++) begin
        step = 1'b1;
        @(negedge clk); step = 1'b0;
        ref_step();
        #1 compare($sformatf("image %0d step %0d", img, k), 1'b0);
        // hold: no step, no change
        @(negedge clk);
        #1 compare("hold", 1'b0);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
