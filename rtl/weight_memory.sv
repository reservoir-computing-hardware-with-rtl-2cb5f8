// weight_memory: the read-out weights, one set per reservoir slice, held in registers.
//
// The weights are trained offline and written in through a simple write port before any
// image is classified. One word holds, for every class q and every multiplier d, the weight
// that multiplier d of class q needs in one multiply-accumulate cycle. The word for slice k
// (iteration k, k = 0 .. NSLICE-1) and pooled-pixel group g sits at address k*G + g, so the
// slice number acts as the select of the paper's per-iteration weight multiplexer and the
// group number walks through that iteration's weights. Within a word, wdata[q][d] is the
// weight of pooled pixel g*DSP + d for class q.
//
// Following the paper: weights stored per iteration in a register file and chosen by the
// iteration number, 8-bit weights, Q = 10 classes, 4 multipliers per class. Choices of this
// design: the word layout, the write port, two's-complement weights, and no reset of the
// array (weights are written before use).
//
// Timing: a write lands on the rising clock edge when we = 1; the read is combinational
// from slice and group, as in a register file.
module weight_memory #(
  parameter int unsigned NSLICE = reca_pkg::M_ITER + 1,
  parameter int unsigned G      = reca_pkg::groups_per_slice(reca_pkg::IMG_W, reca_pkg::IMG_H,
                                                             reca_pkg::DSP),
  parameter int unsigned Q      = reca_pkg::Q,
  parameter int unsigned DSP    = reca_pkg::DSP,
  parameter int unsigned WBITS  = reca_pkg::WBITS,
  localparam int unsigned DEPTH = NSLICE * G,
  localparam int unsigned AW    = $clog2(DEPTH),
  localparam int unsigned SW    = (NSLICE > 1) ? $clog2(NSLICE) : 1,
  localparam int unsigned GW    = (G > 1) ? $clog2(G) : 1
) (
  input  logic                                  clk,
  // write port
  input  logic                                  we,
  input  logic [AW-1:0]                         waddr,
  input  logic [Q-1:0][DSP-1:0][WBITS-1:0]      wdata,
  // read port
  input  logic [SW-1:0]                         slice,
  input  logic [GW-1:0]                         group,
  output logic [Q-1:0][DSP-1:0][WBITS-1:0]      rdata
);

  logic [Q-1:0][DSP-1:0][WBITS-1:0] mem [DEPTH];
  logic [AW:0]                      raddr;

  always_ff @(posedge clk) begin
    if (we) begin
      mem[waddr] <= wdata;
    end
  end

  always_comb begin
    raddr = (AW+1)'(slice) * (AW+1)'(G) + (AW+1)'(group);
    rdata = (raddr < (AW+1)'(DEPTH)) ? mem[raddr[AW-1:0]] : '0;
  end

endmodule
