// sqj_top -- SqueezeJet-style convolution accelerator for SqueezeNet layers.
//
// Computes one stride-1 convolution layer (1x1, or 3x3 with zero padding 1)
// with 8-bit signed weights and biases and 16-bit signed feature maps. The
// parallelism is over channels: each of the N_MAC = 8 MAC-16 units multiplies
// 16 input channels per clock, and the 8 units work on 8 output channels at
// once, so the accelerator performs 128 multiply-accumulates per clock.
//
// Structure (one line per block):
//   sqj_ctrl      control logic, sequences the layer (see its header)
//   weight_mem    weights_i, one per unit: the whole layer's weights on chip
//   bias_mem      bias_i, one per unit
//   itb           ITB, shared: the input rows a window still needs
//   itwb          ITWB_i, one per unit: the current K x K x C input window
//   mac16         MAC-16, one per unit
//   fmap_out_mem  fmap_o_i, one per unit: the current pixel's results
// A layer runs as: load parameters over the 8-bit prm stream, then pixel by
// pixel take input values over the 16-bit in stream and give the pixel's
// out_ch results over the 16-bit out stream, channel 0 first. Input pixels
// come in raster order with channels innermost; output pixels leave in the
// same order. All three streams are valid/ready.
//
// Each MAC-16 sum is requantised to 16 bits here:
//   out = sat16((acc + (bias <<< bias_shift)) >>> out_shift), ReLU optional,
// which is how dynamic fixed-point (per-layer fraction lengths) maps onto
// integers. The unit count, lane count and precisions follow the published
// accelerator; buffer depths, stream order, padding and requantisation
// details are this design's choices.
module sqj_top
  import sqj_pkg::*;
#(
  parameter int unsigned NMAC          = N_MAC,
  parameter int unsigned WDEPTH        = 4096,
  parameter int unsigned BDEPTH        = 128,
  parameter int unsigned ITB_ROW_WORDS = 56,
  parameter int unsigned ITWB_DEPTH    = 36
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       start,
  input  layer_cfg_t cfg,
  output logic       busy,
  output logic       done,
  input  logic       prm_valid,
  input  logic [7:0] prm_data,
  output logic       prm_ready,
  input  logic       in_valid,
  input  fmap_t      in_data,
  output logic       in_ready,
  output logic       out_valid,
  output fmap_t      out_data,
  input  logic       out_ready
);

  localparam int unsigned ITB_DEPTH = 3 * ITB_ROW_WORDS;
  localparam int unsigned UW  = (NMAC > 1) ? $clog2(NMAC) : 1;
  localparam int unsigned WAW = $clog2(WDEPTH);
  localparam int unsigned BAW = $clog2(BDEPTH);
  localparam int unsigned IAW = $clog2(ITB_DEPTH);
  localparam int unsigned XAW = $clog2(ITWB_DEPTH);

  layer_cfg_t cfg_q;

  logic                     w_we, b_we;
  logic [UW-1:0]            w_unit, b_unit, o_unit;
  logic [WAW-1:0]           w_waddr, w_raddr;
  logic [$clog2(LANES)-1:0] w_lane;
  logic [BAW-1:0]           b_waddr, res_addr, o_waddr, o_raddr;
  logic [IAW-1:0]           itb_waddr, itb_raddr;
  logic                     itb_re;
  logic                     itwb_we, itwb_zero, op_re;
  logic [XAW-1:0]           itwb_waddr, itwb_raddr;
  logic                     mac_valid, mac_first, mac_last;
  logic                     res_re, o_we;
  logic [NMAC-1:0]          mac_out_valid;

  fmap_vec_t itb_rdata, itwb_wdata;
  fmap_t     o_rdata [NMAC];

  sqj_ctrl #(
    .NMAC(NMAC), .WDEPTH(WDEPTH), .BDEPTH(BDEPTH),
    .ITB_DEPTH(ITB_DEPTH), .ITWB_DEPTH(ITWB_DEPTH)
  ) u_ctrl (
    .clk, .rst_n, .start, .cfg, .busy, .done, .cfg_q,
    .prm_valid, .prm_ready,
    .w_we, .w_unit, .w_waddr, .w_lane, .b_we, .b_unit, .b_waddr,
    .in_valid, .in_ready, .itb_waddr,
    .itb_re, .itb_raddr, .itwb_we, .itwb_waddr, .itwb_zero,
    .op_re, .itwb_raddr, .w_raddr,
    .mac_valid, .mac_first, .mac_last, .mac_out_valid(mac_out_valid[0]),
    .res_re, .res_addr, .o_we, .o_waddr,
    .out_valid, .out_ready, .o_unit, .o_raddr
  );

  itb #(.ROW_WORDS(ITB_ROW_WORDS), .ROWS(3)) u_itb (
    .clk, .rst_n,
    .in_valid(in_valid && in_ready), .in_data,
    .waddr(itb_waddr), .word_done(),
    .re(itb_re), .raddr(itb_raddr), .rdata(itb_rdata)
  );

  assign itwb_wdata = itwb_zero ? '0 : itb_rdata;

  for (genvar u = 0; u < NMAC; u++) begin : g_unit
    wgt_vec_t  w_rdata;
    fmap_vec_t x_rdata;
    bias_t     b_rdata;
    acc_t      acc, acc_q;

    weight_mem #(.DEPTH(WDEPTH)) u_weights (
      .clk,
      .we(w_we && w_unit == UW'(u)), .waddr(w_waddr), .wlane(w_lane),
      .wdata(wgt_t'(prm_data)),
      .re(op_re), .raddr(w_raddr), .rdata(w_rdata)
    );

    bias_mem #(.DEPTH(BDEPTH)) u_bias (
      .clk,
      .we(b_we && b_unit == UW'(u)), .waddr(b_waddr), .wdata(bias_t'(prm_data)),
      .re(res_re), .raddr(res_addr), .rdata(b_rdata)
    );

    itwb #(.DEPTH(ITWB_DEPTH)) u_itwb (
      .clk,
      .we(itwb_we), .waddr(itwb_waddr), .wdata(itwb_wdata),
      .re(op_re), .raddr(itwb_raddr), .rdata(x_rdata)
    );

    mac16 u_mac (
      .clk, .rst_n,
      .in_valid(mac_valid), .in_first(mac_first), .in_last(mac_last),
      .fmap(x_rdata), .wgt(w_rdata),
      .out_valid(mac_out_valid[u]), .out_acc(acc)
    );

    // requantisation register: holds the sum while the bias is read
    always_ff @(posedge clk)
      if (mac_out_valid[u]) acc_q <= acc;

    fmap_out_mem #(.DEPTH(BDEPTH)) u_fmap_o (
      .clk,
      .we(o_we),
      .waddr(o_waddr),
      .wdata(requant(acc_q, b_rdata, cfg_q.bias_shift, cfg_q.out_shift, cfg_q.relu)),
      .raddr(o_raddr), .rdata(o_rdata[u])
    );
  end

  assign out_data = o_rdata[o_unit];

  // the unit count is a power of two, at least 4 (2^n, n = 2, 3, ...)
  initial assert (NMAC >= 4 && (NMAC & (NMAC - 1)) == 0)
    else $error("sqj_top: NMAC must be a power of two, at least 4");

  // all units run in lock step
  always_ff @(posedge clk)
    if (rst_n) assert (mac_out_valid == '0 || mac_out_valid == '1)
      else $error("sqj_top: MAC-16 units out of step");

  // stream rules: once valid, data holds until accepted
  logic  out_stall;
  fmap_t out_hold;
  always_ff @(posedge clk) begin
    out_stall <= rst_n && out_valid && !out_ready;
    out_hold  <= out_data;
  end
  always_ff @(posedge clk)
    if (rst_n && out_stall) assert (out_valid && out_data == out_hold)
      else $error("sqj_top: output changed while stalled");

endmodule
