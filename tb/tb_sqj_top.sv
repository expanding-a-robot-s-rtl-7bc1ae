// tb_sqj_top -- end-to-end test of the convolution accelerator at its
// default sizes.
//
// Runs a series of layers through sqj_top: random weights, biases and input
// fmaps are streamed in with random gaps, the output stream is taken with
// random back-pressure, and every output value is compared with a reference
// convolution computed here with plain integer arithmetic (zero padding for
// 3x3, bias aligned by bias_shift, arithmetic right shift by out_shift,
// saturation to 16 bits, optional ReLU). The layers cover 1x1 and 3x3
// kernels, a full ITWB (3x3x64) and a full ITB (3 rows of 14 pixels x 64
// channels), 512 input channels, saturation and ReLU.
//
// It also checks the compute rate: the operand stream must take exactly
// out_ch/8 * K*K * in_ch/16 clocks per output pixel (16 x 8 MACs per clock),
// and counts how often each mechanism happened (padding, column reuse when
// the window slides, ITB row-ring wrap, input starvation, output
// back-pressure, parameter-stream gaps, saturation, ReLU clamping, both
// kernel sizes); a mechanism that never happened counts as a failure.
module tb_sqj_top;
  import sqj_pkg::*;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic       start = 1'b0;
  layer_cfg_t cfg;
  logic       busy, done;
  logic       prm_valid = 1'b0, prm_ready;
  logic [7:0] prm_data = '0;
  logic       in_valid = 1'b0, in_ready;
  fmap_t      in_data = '0;
  logic       out_valid, out_ready = 1'b0;
  fmap_t      out_data;

  sqj_top dut (
    .clk, .rst_n, .start, .cfg, .busy, .done,
    .prm_valid, .prm_data, .prm_ready,
    .in_valid, .in_data, .in_ready,
    .out_valid, .out_data, .out_ready
  );

  int checks = 0, failures = 0;

  // mechanism counters
  int n_pad = 0, n_slide = 0, n_wrap = 0, n_in_starve = 0, n_out_bp = 0;
  int n_prm_gap = 0, n_sat = 0, n_relu = 0, n_k1 = 0, n_k3 = 0;
  longint n_op = 0;

  always @(posedge clk) if (rst_n) begin
    if (dut.itwb_we && dut.itwb_zero) n_pad++;
    if (dut.u_ctrl.state == S_FETCH && dut.u_ctrl.ld_words >= dut.u_ctrl.need_words &&
        dut.cfg_q.k3 && dut.u_ctrl.px != 0) n_slide++;
    if (in_valid && in_ready && dut.u_ctrl.ld_lane == 4'd15 && dut.cfg_q.k3 &&
        dut.u_ctrl.ld_addr == '0 && dut.u_ctrl.ld_words != 0) n_wrap++;
    if (in_ready && !in_valid) n_in_starve++;
    if (out_valid && !out_ready) n_out_bp++;
    if (prm_ready && !prm_valid && dut.u_ctrl.state == S_PRM_W) n_prm_gap++;
    if (dut.op_re) n_op++;
  end

  // watchdog
  initial begin
    repeat (3_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // reference data of the current layer
  int xin[];     // [(y*W + x)*C + c]
  int wt[];      // [((m*KK) + ky*K + kx)*C + c]
  int bs[];      // [m]

  function automatic int ref_out(int W, int H, int C, int M, bit k3, int bsh, int osh, bit relu,
                                 int y, int x, int m, output bit sat, output bit clamped);
    longint acc = 0;
    int K = k3 ? 3 : 1;
    int off = k3 ? 1 : 0;
    longint r;
    for (int ky = 0; ky < K; ky++)
      for (int kx = 0; kx < K; kx++) begin
        int iy = y + ky - off, ix = x + kx - off;
        if (iy < 0 || ix < 0 || iy >= H || ix >= W) continue;
        for (int c = 0; c < C; c++)
          acc += longint'(xin[(iy*W + ix)*C + c]) * longint'(wt[((m*K*K) + ky*K + kx)*C + c]);
      end
    acc += longint'(bs[m]) * (longint'(1) << bsh);
    r = acc >>> osh;
    sat = 0; clamped = 0;
    if (r > 32767) begin r = 32767; sat = 1; end
    if (r < -32768) begin r = -32768; sat = 1; end
    if (relu && r < 0) begin r = 0; clamped = 1; end
    return int'(r);
  endfunction

  task automatic run_layer(int W, int H, int C, int M, bit k3, int bsh, int osh, bit relu,
                           int xrange, int p_gap, int p_bp);
    int K = k3 ? 3 : 1;
    int nw = M*K*K*C;
    longint op0 = n_op;
    int got = 0;
    xin = new[W*H*C];
    wt  = new[nw];
    bs  = new[M];
    foreach (xin[i]) xin[i] = int'($urandom_range(2*xrange)) - xrange;
    foreach (wt[i])  wt[i]  = int'($urandom_range(255)) - 128;
    foreach (bs[i])  bs[i]  = int'($urandom_range(255)) - 128;
    if (k3) n_k3++; else n_k1++;

    cfg = '0;
    cfg.width = 8'(W); cfg.height = 8'(H); cfg.in_ch = 10'(C); cfg.out_ch = 10'(M);
    cfg.k3 = k3; cfg.bias_shift = 5'(bsh); cfg.out_shift = 5'(osh); cfg.relu = relu;
    @(negedge clk) start = 1'b1;
    @(negedge clk) start = 1'b0;

    fork
      begin : drive_params
        int i = 0;
        while (i < nw + M) begin
          if ($urandom_range(99) < p_gap) begin
            prm_valid = 1'b0;
          end else begin
            prm_valid = 1'b1;
            prm_data  = (i < nw) ? 8'(wt[i]) : 8'(bs[i - nw]);
          end
          @(posedge clk);
          if (prm_valid && prm_ready) i++;
          #1;
        end
        prm_valid = 1'b0;
      end
      begin : drive_input
        int i = 0;
        while (i < W*H*C) begin
          if ($urandom_range(99) < p_gap) begin
            in_valid = 1'b0;
          end else begin
            in_valid = 1'b1;
            in_data  = fmap_t'(xin[i]);
          end
          @(posedge clk);
          if (in_valid && in_ready) i++;
          #1;
        end
        in_valid = 1'b0;
      end
      begin : take_output
        while (got < W*H*M) begin
          out_ready = ($urandom_range(99) >= p_bp);
          @(posedge clk);
          if (out_valid && out_ready) begin
            int pix = got / M, m = got % M;
            bit sat, cl;
            int e = ref_out(W, H, C, M, k3, bsh, osh, relu, pix / W, pix % W, m, sat, cl);
            checks++;
            if (sat) n_sat++;
            if (cl) n_relu++;
            if (int'(out_data) != e) begin
              failures++;
              if (failures < 10)
                $display("mismatch layer %0dx%0dx%0d->%0d k3=%0d pixel (%0d,%0d) ch %0d: got %0d exp %0d",
                         W, H, C, M, k3, pix / W, pix % W, m, out_data, e);
            end
            got++;
          end
          #1;
        end
        out_ready = 1'b0;
      end
    join

    // done must follow the last output
    fork
      begin : wait_done
        while (!done) @(posedge clk);
      end
      begin : limit
        repeat (20) @(posedge clk);
      end
    join_any
    disable fork;
    checks++;
    if (!done) begin failures++; $display("done not seen"); end
    @(posedge clk);
    checks++;
    if (busy) begin failures++; $display("still busy after done"); end

    // compute rate: 8 output channels x 16 input channels per clock
    checks++;
    if (n_op - op0 != longint'(W*H) * (M/8) * K*K * (C/16)) begin
      failures++;
      $display("operand clocks %0d, expected %0d", n_op - op0, W*H*(M/8)*K*K*(C/16));
    end
  endtask

  initial begin
    repeat (4) @(posedge clk);
    #1 rst_n = 1'b1;
    repeat (2) @(posedge clk);
    #1;
    // 3x3, small, ReLU
    run_layer(5, 4, 32, 16, 1'b1, 6, 8, 1'b1, 300, 20, 30);
    // 1x1, saturation
    run_layer(3, 3, 48, 24, 1'b0, 4, 2, 1'b0, 30000, 30, 20);
    // 3x3 with a full ITWB (3x3x64) and a full ITB row ring (3 x 14 x 4 words)
    run_layer(14, 3, 64, 16, 1'b1, 8, 10, 1'b1, 2000, 5, 10);
    // 1x1 with 512 input channels (SqueezeNet conv10 depth)
    run_layer(2, 2, 512, 16, 1'b0, 8, 10, 1'b0, 2000, 5, 10);
    // 3x3 one pixel wide: every window position is padded on both sides
    run_layer(1, 3, 16, 8, 1'b1, 0, 4, 1'b0, 500, 10, 10);

    checks++; if (n_pad == 0)       begin failures++; $display("padding never happened"); end
    checks++; if (n_slide == 0)     begin failures++; $display("window slide never happened"); end
    checks++; if (n_wrap == 0)      begin failures++; $display("ITB ring wrap never happened"); end
    checks++; if (n_in_starve == 0) begin failures++; $display("input starvation never happened"); end
    checks++; if (n_out_bp == 0)    begin failures++; $display("output back-pressure never happened"); end
    checks++; if (n_prm_gap == 0)   begin failures++; $display("parameter gap never happened"); end
    checks++; if (n_sat == 0)       begin failures++; $display("saturation never happened"); end
    checks++; if (n_relu == 0)      begin failures++; $display("ReLU clamp never happened"); end
    checks++; if (n_k1 == 0 || n_k3 == 0) begin failures++; $display("kernel size missing"); end
    $display("mechanisms: pad=%0d slide=%0d wrap=%0d in_starve=%0d out_bp=%0d prm_gap=%0d sat=%0d relu=%0d k1=%0d k3=%0d",
             n_pad, n_slide, n_wrap, n_in_starve, n_out_bp, n_prm_gap, n_sat, n_relu, n_k1, n_k3);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
