// tb_argmax_unit: self-checking test of the class selection over 10 signed 32-bit logits.
//
// Random logits (both signs, large and small), all-equal logits (tie: index 0) and a
// planted maximum at every position are compared with a linear scan done here.
module tb_argmax_unit;
  localparam int Q = 10, LW = 32;

  logic signed [LW-1:0] logits [Q];
  logic [3:0]           class_idx;
  int                   checks = 0, failures = 0;

  argmax_unit #(.Q(Q), .LOGIT_W(LW)) dut (.*);

  task automatic compare(string what);
    int best = 0;
    for (int q = 1; q < Q; q++) if (logits[q] > logits[best]) best = q;
    checks++;
    if (class_idx !== 4'(best)) begin
      failures++;
      $display("FAIL %s: class %0d expected %0d", what, class_idx, best);
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
    for (int t = 0; t < 200; t++) begin
      for (int q = 0; q < Q; q++) logits[q] = (t % 2 == 0) ? $signed($urandom) : 32'(int'($urandom % 2001) - 1000);
      #1 compare("random");
    end
    for (int q = 0; q < Q; q++) logits[q] = -32'sd5;
    #1 compare("all equal");
    for (int p = 0; p < Q; p++) begin
      for (int q = 0; q < Q; q++) logits[q] = -32'sd100000 + 32'(q);
      logits[p] = 32'sd7;
      #1 compare($sformatf("planted %0d", p));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
