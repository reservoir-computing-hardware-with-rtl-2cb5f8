// reca_ctrl: sequencer of one classification.
//
// A start in IDLE loads the image into the reservoir and clears the logits in the same
// cycle. In RUN the controller walks the pooled-pixel groups g = 0 .. G-1 of slice k, one
// group per cycle, with the logit accumulators enabled; slice 0 is the image itself. On the
// last group of a slice it also advances the automata by one rule-90 step, so the next
// cycle already sees slice k+1 and the weight memory, addressed by k, switches to that
// iteration's weights. After the last group of slice NSLICE-1 the controller spends one
// cycle in DONE, where done = 1 and the logits are final, and returns to IDLE.
//
// Following the paper: iteration after iteration the contribution to the logits is
// accumulated until the final iteration, with the weights chosen by the iteration number.
// Choices of this design: the three-state machine, overlapping the automaton step with the
// last accumulate cycle of a slice, and ignoring start while busy.
//
// Timing: with a start at cycle 0, done is high in cycle 1 + NSLICE*G (834 cycles for the
// default sizes, 16.7 us at 50 MHz).
module reca_ctrl #(
  parameter int unsigned NSLICE = reca_pkg::M_ITER + 1,
  parameter int unsigned G      = reca_pkg::groups_per_slice(reca_pkg::IMG_W, reca_pkg::IMG_H,
                                                             reca_pkg::DSP),
  localparam int unsigned SW    = (NSLICE > 1) ? $clog2(NSLICE) : 1,
  localparam int unsigned GW    = (G > 1) ? $clog2(G) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  output logic          load,    // reservoir: take the image
  output logic          step,    // reservoir: one rule-90 step
  output logic          first,   // reservoir: slice 0, read the image itself
  output logic          clear,   // logits: clear
  output logic          acc_en,  // logits: accumulate one group
  output logic [SW-1:0] slice,   // current slice (iteration) k
  output logic [GW-1:0] group,   // current pooled-pixel group g
  output logic          busy,
  output logic          done
);

  import reca_pkg::*;

  ctrl_state_e state_q;
  logic        last_group, last_slice;

  assign last_group = (group == GW'(G - 1));
  assign last_slice = (slice == SW'(NSLICE - 1));

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state_q <= ST_IDLE;
      slice   <= '0;
      group   <= '0;
    end else begin
      unique case (state_q)
        ST_IDLE: begin
          if (start) begin
            state_q <= ST_RUN;
            slice   <= '0;
            group   <= '0;
          end
        end
        ST_RUN: begin
          if (last_group) begin
            group <= '0;
            if (last_slice) begin
              state_q <= ST_DONE;
            end else begin
              slice <= slice + 1'b1;
            end
          end else begin
            group <= group + 1'b1;
          end
        end
        ST_DONE: state_q <= ST_IDLE;
        default: state_q <= ST_IDLE;
      endcase
    end
  end

  always_comb begin
    load   = (state_q == ST_IDLE) && start;
    clear  = load;
    acc_en = (state_q == ST_RUN);
    first  = (state_q == ST_RUN) && (slice == '0);
    step   = (state_q == ST_RUN) && last_group && !last_slice;
    busy   = (state_q != ST_IDLE);
    done   = (state_q == ST_DONE);
  end

  // The automata never step while being loaded, and the logits are only cleared when idle.
  a_no_load_step: assert property (@(posedge clk) disable iff (!rst_n) !(load && step));
  a_clear_idle:   assert property (@(posedge clk) disable iff (!rst_n) clear |-> !busy);

endmodule
