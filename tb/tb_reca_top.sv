// tb_reca_top: end-to-end test of the whole classifier at its default size
// (28 x 28 x 8-bit image, 16 iterations = 17 slices, 10 classes, 4 multipliers per class).
//
// The testbench writes all 833 weight words, generated from a hash of (slice, pixel,
// class), then classifies several images and compares the logits and the class with a
// reference model written here from the algorithm's definition: bit planes, rule 90 on
// rows and on columns with fixed end cells, slice k = row XOR column (slice 0 = the image),
// 2x2 max pooling, and the sum of pooled pixel times weight over all slices. It checks that
// done comes exactly 1 + 17*49 = 834 cycles after start, within the 1000 cycles that 20 us
// at 50 MHz allow, and counts the mechanisms it exercised: image load, automaton steps,
// slice-0 pass-through, weight-set switches, logit clear between images, and a start
// ignored while busy. Each must have happened at least once.
module tb_reca_top;
  import reca_pkg::*;
  localparam int W = IMG_W, H = IMG_H, NS = M_ITER + 1, NPIX = (W/2) * (H/2);
  localparam int GR = (NPIX + DSP - 1) / DSP;
  localparam int LATENCY = 1 + NS * GR;
  localparam int NIMG = 4;

  logic                              clk = 1'b0;
  logic                              rst_n;
  logic                              w_we;
  logic [9:0]                        w_addr;
  logic [Q-1:0][DSP-1:0][WBITS-1:0]  w_data;
  logic                              start;
  logic [BITS-1:0]                   image [H][W];
  logic                              busy, done;
  logic signed [LOGIT_W-1:0]         logits [Q];
  logic [3:0]                        class_idx;

  int checks = 0, failures = 0;
  int n_load = 0, n_step = 0, n_slice0 = 0, n_wswitch = 0, n_clear = 0, n_ignored = 0, n_done = 0;

  reca_top dut (.*);

  always #10 clk = ~clk;   // 50 MHz

  function automatic logic signed [7:0] wgen(int k, int p, int q);
    int unsigned h;
    h = (32'((k * NPIX + p) * Q + q) + 32'd12345) * 32'd2654435761;
    return h[31:24];
  endfunction

  // ---------------- reference model ----------------
  logic   rr [BITS][H][W];
  logic   cc [BITS][H][W];
  longint model [Q];

  task automatic model_run();
    logic nr [BITS][H][W];
    logic nc [BITS][H][W];
    for (int q = 0; q < Q; q++) model[q] = 0;
    for (int l = 0; l < BITS; l++)
      for (int r = 0; r < H; r++)
        for (int c = 0; c < W; c++) begin
          rr[l][r][c] = image[r][c][l];
          cc[l][r][c] = image[r][c][l];
        end
    for (int k = 0; k < NS; k++) begin
      for (int pr = 0; pr < H/2; pr++)
        for (int pc = 0; pc < W/2; pc++) begin
          int m = 0;
          for (int dr = 0; dr < 2; dr++)
            for (int dc = 0; dc < 2; dc++) begin
              int v = 0;
              for (int l = 0; l < BITS; l++)
                if (k == 0 ? rr[l][2*pr+dr][2*pc+dc]
                           : (rr[l][2*pr+dr][2*pc+dc] ^ cc[l][2*pr+dr][2*pc+dc])) v += (1 << l);
              if (v > m) m = v;
            end
          for (int q = 0; q < Q; q++) model[q] += longint'(m) * longint'(wgen(k, pr*(W/2)+pc, q));
        end
      for (int l = 0; l < BITS; l++)
        for (int r = 0; r < H; r++)
          for (int c = 0; c < W; c++) begin
            nr[l][r][c] = (c == 0 || c == W-1) ? rr[l][r][c] : rr[l][r][c-1] ^ rr[l][r][c+1];
            nc[l][r][c] = (r == 0 || r == H-1) ? cc[l][r][c] : cc[l][r-1][c] ^ cc[l][r+1][c];
          end
      rr = nr;
      cc = nc;
    end
  endtask

  // ---------------- mechanism counters ----------------
  logic [4:0] last_slice_seen;
  always @(posedge clk) begin
    if (rst_n) begin
      if (dut.load) n_load++;
      if (dut.step) n_step++;
      if (dut.first && dut.acc_en) n_slice0++;
      if (dut.acc_en && dut.slice == last_slice_seen + 5'd1) n_wswitch++;
      if (dut.clear && dut.logits[0] != 0) n_clear++;
      if (start && busy) n_ignored++;
      if (done) n_done++;
      last_slice_seen <= dut.slice;
    end
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_true(string what, bit cond);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  initial begin
    rst_n = 1'b0; w_we = 1'b0; w_addr = '0; w_data = '0; start = 1'b0;
    last_slice_seen = '0;
    for (int r = 0; r < H; r++) for (int c = 0; c < W; c++) image[r][c] = '0;
    repeat (3) @(posedge clk);
    @(negedge clk); rst_n = 1'b1;

    // load the weights: word k*GR + g holds pixel g*DSP + d for every class
    for (int k = 0; k < NS; k++)
      for (int g = 0; g < GR; g++) begin
        w_we = 1'b1; w_addr = 10'(k * GR + g);
        for (int q = 0; q < Q; q++)
          for (int d = 0; d < DSP; d++)
            w_data[q][d] = (g * DSP + d < NPIX) ? wgen(k, g * DSP + d, q) : 8'sd0;
        @(negedge clk);
      end
    w_we = 1'b0;

    for (int img = 0; img < NIMG; img++) begin
      int cycles, best;
      for (int r = 0; r < H; r++)
        for (int c = 0; c < W; c++)
          case (img)
            0: image[r][c] = (((r-14)*(r-14) + (c-14)*(c-14) < 70) && ((r-14)*(r-14) + (c-14)*(c-14) > 20)) ? 8'hf0 : 8'h00;
            1: image[r][c] = (c >= 12 && c <= 15 && r >= 4 && r <= 24) ? 8'(160 + 4 * r) : 8'h00;
            2: image[r][c] = 8'($urandom);
            default: image[r][c] = '0;
          endcase
      model_run();
      @(negedge clk); start = 1'b1;
      @(negedge clk); start = 1'b0;
      cycles = 1;
      while (!done) begin
        // try a second start while busy on image 1
        start = (img == 1 && cycles == 100);
        // scramble the image input: it must only be sampled at start
        if (cycles == 50) image[0][0] = ~image[0][0];
        @(negedge clk);
        cycles++;
      end
      start = 1'b0;
      expect_true($sformatf("image %0d latency %0d == %0d", img, cycles, LATENCY), cycles == LATENCY);
      expect_true($sformatf("image %0d latency within 20 us at 50 MHz", img), cycles <= 1000);
      best = 0;
      for (int q = 0; q < Q; q++) begin
        expect_true($sformatf("image %0d logit %0d = %0d, expected %0d", img, q, logits[q], model[q]),
                    longint'(logits[q]) == model[q]);
        if (model[q] > model[best]) best = q;
      end
      expect_true($sformatf("image %0d class %0d, expected %0d", img, class_idx, best), int'(class_idx) == best);
      $display("image %0d: class %0d after %0d cycles", img, class_idx, cycles);
      repeat (3) @(negedge clk);
      expect_true("logits held after done", longint'(logits[best]) == model[best]);
    end

    $display("mechanisms: load=%0d step=%0d slice0=%0d weight_switch=%0d clear=%0d start_ignored=%0d done=%0d",
             n_load, n_step, n_slice0, n_wswitch, n_clear, n_ignored, n_done);
    expect_true("image load happened",        n_load == NIMG);
    expect_true("automaton steps happened",   n_step == NIMG * (NS - 1));
    expect_true("slice 0 pass-through used",  n_slice0 == NIMG * GR);
    expect_true("weight set switched",        n_wswitch == NIMG * (NS - 1));
    expect_true("logits cleared",             n_clear > 0);
    expect_true("start while busy ignored",   n_ignored > 0);
    expect_true("done seen",                  n_done == NIMG);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
