// tb_weight_memory: self-checking test of the per-iteration weight registers at the default
// size (17 slices x 49 groups, words of 10 x 4 x 8 bits).
//
// Every word is written with data derived from its address and a seed, then read back by
// (slice, group) in random order and compared; a second pass overwrites part of the words.
module tb_weight_memory;
  localparam int NSLICE = 17, G = 49, Q = 10, DSP = 4, WB = 8, DEPTH = NSLICE * G;

  logic                           clk = 1'b0;
  logic                           we;
  logic [9:0]                     waddr;
  logic [Q-1:0][DSP-1:0][WB-1:0]  wdata, rdata;
  logic [4:0]                     slice;
  logic [5:0]                     group;
  int                             checks = 0, failures = 0;

  weight_memory #(.NSLICE(NSLICE), .G(G), .Q(Q), .DSP(DSP), .WBITS(WB)) dut (.*);

  always #5 clk = ~clk;

  function automatic logic [Q-1:0][DSP-1:0][WB-1:0] pattern(int addr, int seed);
    logic [Q-1:0][DSP-1:0][WB-1:0] p;
    for (int q = 0; q < Q; q++)
      for (int d = 0; d < DSP; d++) p[q][d] = 8'(addr * 7 + q * 31 + d * 13 + seed);
    return p;
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 1'b0; waddr = '0; wdata = '0; slice = '0; group = '0;
    for (int pass = 0; pass < 2; pass++) begin
      for (int a = 0; a < DEPTH; a++) begin
        if (pass == 0 || a % 3 == 0) begin
          @(negedge clk); we = 1'b1; waddr = 10'(a); wdata = pattern(a, pass);
        end
      end
      @(negedge clk); we = 1'b0;
      for (int t = 0; t < 2000; t++) begin
        int k, g, a;
        k = $urandom % NSLICE; g = $urandom % G; a = k * G + g;
        slice = 5'(k); group = 6'(g);
        #1;
        checks++;
        if (rdata !== pattern(a, (pass == 1 && a % 3 == 0) ? 1 : 0)) begin
          failures++;
          if (failures < 5) $display("FAIL read k=%0d g=%0d", k, g);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
