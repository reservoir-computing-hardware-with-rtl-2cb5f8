// tb_reca_ctrl: self-checking test of the classification sequencer at the default schedule
// (17 slices x 49 groups).
//
// After a start the testbench follows the controller cycle by cycle against its own count:
// load and clear only with the start, accumulate in every run cycle with the expected
// (slice, group), first only in slice 0, one step at the end of every slice but the last,
// done exactly 1 + 17*49 cycles after the start, and a start while busy has no effect.
module tb_reca_ctrl;
  localparam int NSLICE = 17, G = 49;

  logic       clk = 1'b0;
  logic       rst_n, start;
  logic       load, step, first, clear, acc_en, busy, done;
  logic [4:0] slice;
  logic [5:0] group;
  int         checks = 0, failures = 0;
  int         steps_seen;

  reca_ctrl #(.NSLICE(NSLICE), .G(G)) dut (.*);

  always #5 clk = ~clk;

  task automatic expect_eq(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s: %0d expected %0d", what, got, exp);
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
    rst_n = 1'b0; start = 1'b0;
    repeat (2) @(posedge clk);
    @(negedge clk); rst_n = 1'b1;
    expect_eq("idle busy", int'(busy), 0);
    expect_eq("idle load", int'(load), 0);
    for (int run = 0; run < 3; run++) begin
      // a few idle cycles first
      repeat (run + 1) @(negedge clk);
      start = 1'b1; #1;
      expect_eq("load with start", int'(load), 1);
      expect_eq("clear with start", int'(clear), 1);
      expect_eq("no acc in idle", int'(acc_en), 0);
      @(negedge clk); start = 1'b0;
      steps_seen = 0;
      for (int k = 0; k < NSLICE; k++)
        for (int g = 0; g < G; g++) begin
          // a start while busy must be ignored
          start = (run == 1 && g == 5);
          #1;
          expect_eq("busy", int'(busy), 1);
          expect_eq("acc_en", int'(acc_en), 1);
          expect_eq("slice", int'(slice), k);
          expect_eq("group", int'(group), g);
          expect_eq("first", int'(first), int'(k == 0));
          expect_eq("step", int'(step), int'(g == G - 1 && k != NSLICE - 1));
          expect_eq("load", int'(load), 0);
          expect_eq("clear", int'(clear), 0);
          expect_eq("done", int'(done), 0);
          steps_seen += int'(step);
          @(negedge clk);
        end
      start = 1'b0; #1;
      expect_eq("done after 1+NSLICE*G cycles", int'(done), 1);
      expect_eq("no acc in done", int'(acc_en), 0);
      expect_eq("steps per run", steps_seen, NSLICE - 1);
      @(negedge clk);
      expect_eq("idle after done", int'(busy), 0);
      expect_eq("done one cycle", int'(done), 0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
