// tb_r90pu: self-checking test of one rule-90 processing unit at R = 28.
//
// Loads random initial states and iterates them, comparing every cycle with a reference
// written here from the rule itself: inner cell i becomes cell i-1 XOR cell i+1, the two
// end cells never change. Also checks that the register holds when neither load nor step
// is asserted, that load wins over step, and that reset clears the register.
module tb_r90pu;
  localparam int unsigned R = 28;

  logic         clk = 1'b0;
  logic         rst_n, load, step;
  logic [R-1:0] init_state, state, model;
  int           checks = 0, failures = 0;

  r90pu #(.R(R)) dut (.*);

  always #5 clk = ~clk;

  function automatic logic [R-1:0] rule90(logic [R-1:0] s);
    logic [R-1:0] n;
    n = s;
    for (int i = 1; i < R - 1; i++) n[i] = s[i-1] ^ s[i+1];
    return n;
  endfunction

  task automatic check(string what);
    checks++;
    if (state !== model) begin
      failures++;
      $display("FAIL %s: state=%h expected=%h", what, state, model);
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
    rst_n = 1'b0; load = 1'b0; step = 1'b0; init_state = '0;
    repeat (2) @(posedge clk);
    #1 model = '0; check("reset");
    rst_n = 1'b1;
    // a single set cell produces the Sierpinski pattern; known value after 1 step
    @(negedge clk); load = 1'b1; init_state = R'(1) << 10;
    @(negedge clk); load = 1'b0; step = 1'b1; model = R'(1) << 10; check("load single");
    @(negedge clk); model = (R'(1) << 9) | (R'(1) << 11); check("single step 1");
    for (int t = 0; t < 200; t++) begin
      if (t % 40 == 0) begin
        load = 1'b1; init_state = {$urandom, $urandom}; step = ($urandom % 2 == 0);
        @(negedge clk); model = init_state; load = 1'b0; check("load");
      end
      step = ($urandom % 4 != 0);
      @(negedge clk);
      if (step) model = rule90(model);
      check(step ? "step" : "hold");
    end
    // boundary cells fixed: start with only cell 1 and cell R set
    load = 1'b1; init_state = {1'b1, {(R-2){1'b0}}, 1'b1};
    @(negedge clk); load = 1'b0; step = 1'b1; model = init_state;
    repeat (5) begin
      @(negedge clk); model = rule90(model); check("boundary");
      checks++;
      if (!(state[0] && state[R-1])) begin failures++; $display("FAIL boundary cell changed"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
