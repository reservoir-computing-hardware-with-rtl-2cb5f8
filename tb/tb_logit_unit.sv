// tb_logit_unit: self-checking test of the fully connected read-out at the default size
// (196 pooled pixels, 10 classes, 4 multipliers per class, 49 groups).
//
// For several slices a random pooled vector and random signed weights are applied group by
// group; the reference logits, sum over pixels of pixel * weight, are accumulated here in
// 64-bit integers. Also checks that the logits hold while acc_en = 0 and that clear zeroes
// them, including extreme pixel (255) and weight (-128, 127) values.
module tb_logit_unit;
  localparam int NP = 196, B = 8, G = 49, Q = 10, DSP = 4, WB = 8, LW = 32;

  logic                           clk = 1'b0;
  logic                           rst_n, clear, acc_en;
  logic [5:0]                     group;
  logic [B-1:0]                   pooled [NP];
  logic [Q-1:0][DSP-1:0][WB-1:0]  weights;
  logic signed [LW-1:0]           logits [Q];
  longint                         model  [Q];
  logic signed [WB-1:0]           wtab   [G][Q][DSP];
  int                             checks = 0, failures = 0;

  logit_unit #(.NP(NP), .B(B), .G(G), .Q(Q), .DSP(DSP), .WBITS(WB), .LOGIT_W(LW)) dut (.*);

  always #5 clk = ~clk;

  task automatic compare(string what);
    for (int q = 0; q < Q; q++) begin
      checks++;
      if (longint'(logits[q]) != model[q]) begin
        failures++;
        if (failures < 6) $display("FAIL %s class %0d: %0d expected %0d", what, q, logits[q], model[q]);
      end
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 1'b0; clear = 1'b0; acc_en = 1'b0; group = '0; weights = '0;
    for (int p = 0; p < NP; p++) pooled[p] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int img = 0; img < 4; img++) begin
      @(negedge clk); clear = 1'b1;
      @(negedge clk); clear = 1'b0;
      for (int q = 0; q < Q; q++) model[q] = 0;
      compare("clear");
      for (int slice = 0; slice < 5; slice++) begin
        for (int p = 0; p < NP; p++)
          pooled[p] = (img == 3) ? 8'hff : 8'($urandom);
        for (int g = 0; g < G; g++)
          for (int q = 0; q < Q; q++)
            for (int d = 0; d < DSP; d++)
              wtab[g][q][d] = (img == 3) ? ((q % 2 == 0) ? -8'sd128 : 8'sd127) : 8'($urandom);
        for (int g = 0; g < G; g++) begin
          group = 6'(g); acc_en = 1'b1;
          for (int q = 0; q < Q; q++) for (int d = 0; d < DSP; d++) weights[q][d] = wtab[g][q][d];
          @(negedge clk);
          for (int q = 0; q < Q; q++)
            for (int d = 0; d < DSP; d++)
              model[q] += longint'(pooled[g*DSP+d]) * longint'(wtab[g][q][d]);
        end
        acc_en = 1'b0;
        compare($sformatf("image %0d slice %0d", img, slice));
        @(negedge clk);
        compare("hold");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
