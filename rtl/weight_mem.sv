// weight_mem -- weights_i, the weight buffer of one MAC-16 unit.
//
// The accelerator keeps a whole layer's weights on chip so that every output
// pixel can be computed without fetching parameters again. Unit i holds the
// weights of output channels m with m mod N_MAC = i. Each word is 16 weights,
// one per input channel of a 16-channel group, so one read per clock feeds the
// 16 multipliers of the unit.
//
// Write side: one 8-bit weight per clock into lane wlane of word waddr, as the
// weights arrive over the 8-bit layer-parameter bus. Read side: synchronous,
// rdata is valid one clock after re (block-RAM behaviour). Word layout
// (address = output_group*K*K*G + (ky*K+kx)*G + g, lane = channel mod 16) is
// set by the control logic. The default depth, 4096 words, holds the largest
// SqueezeNet v1.1 layer (conv10: 125 channel groups x 32 words per unit); it
// is this design's sizing, not a published figure.
module weight_mem
  import sqj_pkg::*;
#(
  parameter int unsigned DEPTH = 4096,
  localparam int unsigned AW = $clog2(DEPTH)
) (
  input  logic                      clk,
  input  logic                      we,
  input  logic [AW-1:0]             waddr,
  input  logic [$clog2(LANES)-1:0]  wlane,
  input  wgt_t                      wdata,
  input  logic                      re,
  input  logic [AW-1:0]             raddr,
  output wgt_vec_t                  rdata
);

  wgt_vec_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr][wlane] <= wdata;
    if (re) rdata <= mem[raddr];
  end

endmodule
