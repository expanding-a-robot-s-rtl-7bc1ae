// itb -- ITB, the input fmap tile buffer.
//
// The input fmap arrives as a stream of 16-bit values, pixel by pixel in
// raster order with the channels of a pixel consecutive. The ITB packs each
// run of 16 channels into one 256-bit word and stores it at the word address
// the control logic supplies (waddr is sampled with the 16th value of the
// group). word_done pulses in the clock the word is written.
//
// For a 3x3 layer the control logic uses the buffer as a ring of three input
// rows (address = (row mod 3)*W*G + x*G + g), which is all the rows a 3x3
// window needs; for a 1x1 layer it holds one pixel (address = g). Reads are
// synchronous: rdata one clock after re. The ring organisation and the
// default row capacity (56 words: width x channel groups of the SqueezeNet
// v1.1 3x3 layers) are this design's choices.
module itb
  import sqj_pkg::*;
#(
  parameter int unsigned ROW_WORDS = 56,
  parameter int unsigned ROWS      = 3,
  localparam int unsigned DEPTH = ROW_WORDS * ROWS,
  localparam int unsigned AW = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  input  fmap_t         in_data,
  input  logic [AW-1:0] waddr,
  output logic          word_done,
  input  logic          re,
  input  logic [AW-1:0] raddr,
  output fmap_vec_t     rdata
);

  fmap_vec_t mem [DEPTH];
  fmap_vec_t pack;
  logic [$clog2(LANES)-1:0] lane;
  fmap_vec_t full_word;

  always_comb begin
    full_word = pack;
    full_word[lane] = in_data;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      lane      <= '0;
      word_done <= 1'b0;
    end else begin
      word_done <= 1'b0;
      if (in_valid) begin
        pack[lane] <= in_data;
        lane       <= lane + 1'b1;
        if (lane == $clog2(LANES)'(LANES - 1)) begin
          mem[waddr] <= full_word;
          word_done  <= 1'b1;
        end
      end
    end
  end

  always_ff @(posedge clk)
    if (re) rdata <= mem[raddr];

endmodule
