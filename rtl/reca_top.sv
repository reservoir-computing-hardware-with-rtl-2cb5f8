// reca_top: reservoir-computing classifier built on rule-90 cellular automata.
//
// An H x W image of B-bit pixels is loaded in one cycle into 2*B*H (for a square image) rule-90
// units, one per row and one per column of each bit plane (ca_reservoir). For each slice
// k = 0 .. M the reservoir state (the image for k = 0, row XOR column afterwards) is read
// back as B-bit pixels, max-pooled 2x2 (max_pool) and multiplied by slice k's weights
// (weight_memory), DSP pooled pixels per class and per cycle, into Q logit accumulators
// (logit_unit). Between slices the automata advance one step. reca_ctrl sequences it all and
// argmax_unit names the winning class.
//
// The structure follows the paper's FPGA classifier: 448 R90PUs of 28 cells, 6272 XOR gates,
// 2x2 max pooling, per-iteration weight registers, 4 multipliers for each of 10 classes, 10
// logit registers, M = 16 iterations. The weight-load port, the handshake (start / busy /
// done), the class output and the cycle-level schedule are this design's own.
//
// Interface: write every weight word (we, waddr, wdata; see weight_memory for the layout)
// before classifying. Hold image stable and pulse start while busy = 0; the image is sampled
// on that clock edge. done is high for one cycle 1 + (M+1)*G cycles after start
// (G = ceil(H*W/4/DSP) = 49 by default, 834 cycles in all); logits and class_idx are valid
// from then until the next start.
module reca_top #(
  parameter int unsigned W       = reca_pkg::IMG_W,
  parameter int unsigned H       = reca_pkg::IMG_H,
  parameter int unsigned B       = reca_pkg::BITS,
  parameter int unsigned M       = reca_pkg::M_ITER,
  parameter int unsigned Q       = reca_pkg::Q,
  parameter int unsigned DSP     = reca_pkg::DSP,
  parameter int unsigned WBITS   = reca_pkg::WBITS,
  parameter int unsigned LOGIT_W = reca_pkg::LOGIT_W,
  localparam int unsigned NSLICE = M + 1,
  localparam int unsigned NP     = reca_pkg::pooled_count(W, H),
  localparam int unsigned G      = reca_pkg::groups_per_slice(W, H, DSP),
  localparam int unsigned AW     = $clog2(NSLICE * G),
  localparam int unsigned IW     = (Q > 1) ? $clog2(Q) : 1
) (
  input  logic                              clk,
  input  logic                              rst_n,
  // weight load
  input  logic                              w_we,
  input  logic [AW-1:0]                     w_addr,
  input  logic [Q-1:0][DSP-1:0][WBITS-1:0]  w_data,
  // classification
  input  logic                              start,
  input  logic [B-1:0]                      image [H][W],
  output logic                              busy,
  output logic                              done,
  output logic signed [LOGIT_W-1:0]         logits [Q],
  output logic [IW-1:0]                     class_idx
);

  localparam int unsigned SW = (NSLICE > 1) ? $clog2(NSLICE) : 1;
  localparam int unsigned GW = (G > 1) ? $clog2(G) : 1;

  logic                             load, step, first, clear, acc_en;
  logic [SW-1:0]                    slice;
  logic [GW-1:0]                    group;
  logic [B-1:0]                     pixels [H][W];
  logic [B-1:0]                     pooled [NP];
  logic [Q-1:0][DSP-1:0][WBITS-1:0] weights;

  reca_ctrl #(.NSLICE(NSLICE), .G(G)) u_ctrl (
    .clk, .rst_n, .start,
    .load, .step, .first, .clear, .acc_en,
    .slice, .group, .busy, .done
  );

  ca_reservoir #(.W(W), .H(H), .B(B)) u_reservoir (
    .clk, .rst_n, .load, .step, .first,
    .image, .pixels
  );

  max_pool #(.W(W), .H(H), .B(B)) u_pool (
    .pixels, .pooled
  );

  weight_memory #(.NSLICE(NSLICE), .G(G), .Q(Q), .DSP(DSP), .WBITS(WBITS)) u_weights (
    .clk,
    .we    (w_we),
    .waddr (w_addr),
    .wdata (w_data),
    .slice,
    .group,
    .rdata (weights)
  );

  logit_unit #(.NP(NP), .B(B), .G(G), .Q(Q), .DSP(DSP), .WBITS(WBITS), .LOGIT_W(LOGIT_W))
  u_logits (
    .clk, .rst_n, .clear, .acc_en, .group, .pooled, .weights, .logits
  );

  argmax_unit #(.Q(Q), .LOGIT_W(LOGIT_W)) u_argmax (
    .logits, .class_idx
  );

endmodule
