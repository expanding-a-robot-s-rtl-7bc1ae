// fmap_out_mem -- fmap_o_i, the output buffer of one MAC-16 unit.
//
// Collects the 16-bit results of the output channels the unit computed for
// the current pixel (channel m at address m / N_MAC in unit m mod N_MAC)
// until the control logic streams the pixel out over the 16-bit output fmap
// bus. Writes are clocked; the read is combinational (a small distributed-RAM
// buffer), so the output stream can follow a ready/valid handshake without a
// read-ahead register. Depth 128 covers 1000 channels over 8 units; this
// sizing and the read style are this design's choices.
module fmap_out_mem
  import sqj_pkg::*;
#(
  parameter int unsigned DEPTH = 128,
  localparam int unsigned AW = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  fmap_t         wdata,
  input  logic [AW-1:0] raddr,
  output fmap_t         rdata
);

  fmap_t mem [DEPTH];

  always_ff @(posedge clk)
    if (we) mem[waddr] <= wdata;

  assign rdata = mem[raddr];

endmodule
