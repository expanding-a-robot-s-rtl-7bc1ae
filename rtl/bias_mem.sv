// bias_mem -- bias_i, the bias buffer of one MAC-16 unit.
//
// Holds one 8-bit signed bias for each output channel the unit computes
// (channel m is at address m / N_MAC in unit m mod N_MAC). Written one bias
// per clock from the 8-bit layer-parameter bus; read synchronously, rdata one
// clock after re. Depth 128 covers 1000 output channels over 8 units; the
// depth is this design's sizing.
module bias_mem
  import sqj_pkg::*;
#(
  parameter int unsigned DEPTH = 128,
  localparam int unsigned AW = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  bias_t         wdata,
  input  logic          re,
  input  logic [AW-1:0] raddr,
  output bias_t         rdata
);

  bias_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end

endmodule
