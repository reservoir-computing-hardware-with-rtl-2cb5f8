// logit_unit: the fully connected read-out and the logit accumulators.
//
// In every cycle with acc_en = 1 each of the Q classes takes DSP pooled pixels, those of
// group g (pooled[g*DSP + d], d = 0 .. DSP-1), multiplies each by its weight and adds the DSP
// products to its logit register. Walking g over all groups of a slice adds that slice's
// contribution to the logits; walking all slices gives y_q = sum_k sum_p x_f[k][p] * w[k][p][q].
// Pixels are unsigned B-bit values, weights signed, products and logits signed. A pooled
// index past the end of the vector (the last group when DSP does not divide the vector
// length) counts as zero.
//
// Following the paper: 4 multipliers per class and per cycle (its DSP blocks), Q = 10
// logit registers, and sequential accumulation of each iteration's contribution. Choices of
// this design: the logit width (32 bits, enough for 17 slices x 196 pixels x 255 x 128) and
// the synchronous clear.
//
// Timing: clear zeroes all logits on the next rising edge; otherwise acc_en adds one group's
// contribution on the next rising edge. logits is the register content.
module logit_unit #(
  parameter int unsigned NP      = reca_pkg::pooled_count(reca_pkg::IMG_W, reca_pkg::IMG_H),
  parameter int unsigned B       = reca_pkg::BITS,
  parameter int unsigned G       = reca_pkg::groups_per_slice(reca_pkg::IMG_W, reca_pkg::IMG_H,
                                                              reca_pkg::DSP),
  parameter int unsigned Q       = reca_pkg::Q,
  parameter int unsigned DSP     = reca_pkg::DSP,
  parameter int unsigned WBITS   = reca_pkg::WBITS,
  parameter int unsigned LOGIT_W = reca_pkg::LOGIT_W,
  localparam int unsigned GW     = (G > 1) ? $clog2(G) : 1
) (
  input  logic                                 clk,
  input  logic                                 rst_n,
  input  logic                                 clear,
  input  logic                                 acc_en,
  input  logic [GW-1:0]                        group,
  input  logic [B-1:0]                         pooled  [NP],
  input  logic [Q-1:0][DSP-1:0][WBITS-1:0]     weights,
  output logic signed [LOGIT_W-1:0]            logits  [Q]
);

  localparam int unsigned PROD_W = B + WBITS + 1;

  logic [B-1:0]                 feat    [DSP];
  logic signed [LOGIT_W-1:0]    contrib [Q];

  // Pick the DSP pooled pixels of this group.
  always_comb begin
    for (int d = 0; d < int'(DSP); d++) begin
      int unsigned idx;
      idx = int'(group) * DSP + d;
      feat[d] = (idx < NP) ? pooled[idx] : '0;
    end
  end

  // DSP multiply-adds per class.
  always_comb begin
    for (int q = 0; q < int'(Q); q++) begin
      contrib[q] = '0;
      for (int d = 0; d < int'(DSP); d++) begin
        logic signed [PROD_W-1:0] prod;
        prod = $signed({1'b0, feat[d]}) * $signed(weights[q][d]);
        contrib[q] = contrib[q] + LOGIT_W'(prod);
      end
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n || clear) begin
      for (int q = 0; q < int'(Q); q++) logits[q] <= '0;
    end else if (acc_en) begin
      for (int q = 0; q < int'(Q); q++) logits[q] <= logits[q] + contrib[q];
    end
  end

endmodule
