// itwb -- ITWB_i, the input fmap tile buffer window of one MAC-16 unit.
//
// Holds the K x K x C input window of the output pixel being computed, one
// 16-channel group per word, so the unit can read one operand word per clock
// while the window is reused for every output channel of the pixel. Each
// MAC-16 unit has its own copy (all copies receive the same writes), so the
// units read their operands in parallel without sharing a port.
//
// The control logic addresses it as a ring of three columns
// (address = column_slot*3*G + ky*G + g) so that moving one pixel to the right
// reloads only the new column. Synchronous read: rdata one clock after re.
// Depth 36 = 3*3*64/16, the largest 3x3 window of SqueezeNet v1.1; a 1x1
// layer needs at most 512/16 = 32 words. The depth is this design's sizing.
module itwb
  import sqj_pkg::*;
#(
  parameter int unsigned DEPTH = 36,
  localparam int unsigned AW = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  fmap_vec_t     wdata,
  input  logic          re,
  input  logic [AW-1:0] raddr,
  output fmap_vec_t     rdata
);

  fmap_vec_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end

endmodule
