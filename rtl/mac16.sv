// mac16 -- the MAC-16 unit: 16 multiply-accumulates per clock.
//
// Each clock it may take one operand pair: 16 signed 16-bit fmap values (one
// 16-channel group of an input pixel) and the 16 signed 8-bit weights that
// belong to them. The unit is pipelined in three stages:
//   1. 16 multipliers, products registered;
//   2. adder tree, the 16 products summed and registered;
//   3. accumulator: restarted by the pair marked in_first, and on the pair
//      marked in_last the finished sum appears on out_acc with out_valid.
// out_valid therefore rises LATENCY = 3 clocks after the in_last pair was
// presented, and a new channel's in_first pair may follow the previous
// channel's in_last pair on the very next clock, so the unit never idles
// between output channels. The 16-lane width is the accelerator's own
// (the greatest common divisor of the supported layers' input channel
// counts); the pipeline split and the accumulator width are this design's
// choice.
module mac16
  import sqj_pkg::*;
#(
  parameter int unsigned LATENCY = 3  // fixed by the structure; documents it
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      in_valid,
  input  logic      in_first,
  input  logic      in_last,
  input  fmap_vec_t fmap,
  input  wgt_vec_t  wgt,
  output logic      out_valid,
  output acc_t      out_acc
);

  localparam int unsigned P_W = F_W + W_W;  // product width

  // stage 1: products
  logic signed [P_W-1:0] prod [LANES];
  logic s1_valid, s1_first, s1_last;

  always_ff @(posedge clk) begin
    for (int i = 0; i < LANES; i++)
      prod[i] <= P_W'(fmap[i]) * P_W'(wgt[i]);
  end

  // stage 2: adder tree
  acc_t sum_c, s2_sum;
  logic s2_valid, s2_first, s2_last;

  always_comb begin
    sum_c = '0;
    for (int i = 0; i < LANES; i++) sum_c += ACC_W'(prod[i]);
  end

  always_ff @(posedge clk) s2_sum <= sum_c;

  // stage 3: accumulate
  acc_t acc;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      {s1_valid, s1_first, s1_last} <= '0;
      {s2_valid, s2_first, s2_last} <= '0;
      out_valid <= 1'b0;
      acc       <= '0;
      out_acc   <= '0;
    end else begin
      s1_valid <= in_valid;
      s1_first <= in_valid & in_first;
      s1_last  <= in_valid & in_last;
      s2_valid <= s1_valid;
      s2_first <= s1_first;
      s2_last  <= s1_last;
      out_valid <= s2_valid & s2_last;
      if (s2_valid) begin
        acc <= (s2_first ? acc_t'(0) : acc) + s2_sum;
        if (s2_last) out_acc <= (s2_first ? acc_t'(0) : acc) + s2_sum;
      end
    end
  end

  initial assert (LATENCY == 3) else $error("mac16: pipeline depth is 3");

endmodule
