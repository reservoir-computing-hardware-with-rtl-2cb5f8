// tb_max_pool: self-checking test of 2x2 stride-2 max pooling on a 28 x 28 8-bit image.
//
// Random images, plus images where the maximum is planted at each of the four window
// positions in turn, are compared with a reference that scans each window here.
module tb_max_pool;
  localparam int W = 28, H = 28, B = 8, PW = W / 2, PH = H / 2;

  logic [B-1:0] pixels [H][W];
  logic [B-1:0] pooled [PH*PW];
  int           checks = 0, failures = 0;

  max_pool #(.W(W), .H(H), .B(B)) dut (.*);

  task automatic compare(string what);
    for (int pr = 0; pr < PH; pr++)
      for (int pc = 0; pc < PW; pc++) begin
        logic [B-1:0] m = '0;
        for (int dr = 0; dr < 2; dr++)
          for (int dc = 0; dc < 2; dc++)
            if (pixels[2*pr+dr][2*pc+dc] > m) m = pixels[2*pr+dr][2*pc+dc];
        checks++;
        if (pooled[pr*PW+pc] !== m) begin
          failures++;
          if (failures < 5) $display("FAIL %s (%0d,%0d): %h expected %h", what, pr, pc, pooled[pr*PW+pc], m);
        end
      end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 10; t++) begin
      for (int r = 0; r < H; r++) for (int c = 0; c < W; c++) pixels[r][c] = 8'($urandom);
      #1 compare("random");
    end
    // planted maximum at each corner of every window, including the top bit
    for (int pos = 0; pos < 4; pos++) begin
      for (int r = 0; r < H; r++)
        for (int c = 0; c < W; c++)
          pixels[r][c] = ((r % 2) * 2 + (c % 2) == pos) ? 8'(8'h80 | 8'($urandom)) : 8'($urandom % 128);
      #1 compare($sformatf("planted %0d", pos));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
