// r90pu: rule-90 processing unit, one row or one column of one bit plane.
//
// A register of R cells holds the automaton. The next state of every inner cell i is the
// XOR of its two neighbours i-1 and i+1 (rule 90: the cell's own value plays no part). The
// first and the last cell keep their value from step to step (fixed boundary). A two-way
// multiplexer in front of the register chooses between this next state and an external
// initial state, so the same register is loaded with the image and then iterated.
//
// Following the paper: the R-cell state register, the XOR of nearest neighbours, the fixed
// first and last cells, and the initial-state / next-state multiplexer with a select line.
// Choices of this design: a clock enable (the register has to hold its state while the
// read-out works through one slice), an active-low synchronous reset to all zeros, and the
// output taken from the register rather than from the multiplexer.
//
// Interface and timing: on a rising clock edge with load = 1 the register takes init_state;
// with load = 0 and step = 1 it takes the rule-90 next state; otherwise it holds. state is
// the register content, so a load or a step is visible one cycle later. Bit 0 is cell 1.
module r90pu #(
  parameter int unsigned R = 28  // cells in the unit (image width or height)
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         load,        // multiplexer select: take init_state
  input  logic         step,        // advance one rule-90 step
  input  logic [R-1:0] init_state,
  output logic [R-1:0] state
);

  logic [R-1:0] next_state;
  logic [R-1:0] mux_out;

  // Rule 90 with fixed boundary cells.
  always_comb begin
    next_state[0]   = state[0];
    next_state[R-1] = state[R-1];
    for (int i = 1; i < int'(R) - 1; i++) begin
      next_state[i] = state[i-1] ^ state[i+1];
    end
  end

  assign mux_out = load ? init_state : next_state;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state <= '0;
    end else if (load || step) begin
      state <= mux_out;
    end
  end

  initial begin
    assert (R >= 3) else $error("r90pu needs at least three cells");
  end

endmodule
