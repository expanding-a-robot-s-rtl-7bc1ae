// tb_sqj_ctrl -- self-checking test of the control logic on its own.
//
// The buffers are replaced by tag models: every 16-channel input word gets a
// tag (pixel index, channel group) when the control logic has it written to
// the ITB, the tag travels to the ITWB with each window write (or becomes a
// padding tag when the control logic asks for zeros), and at every operand
// read the testbench compares the tag the control logic points at, and the
// weight address it reads, with the sequence a 3x3 / 1x1 convolution needs:
// for output-channel group mg, ky, kx, group g -> input pixel (y+ky-1,
// x+kx-1) group g, weight word mg*K*K*G + (ky*K+kx)*G + g. It also checks the
// parameter demultiplexing (unit, word, lane of every weight; unit, address
// of every bias), the MAC-16 first/last marks, the number of window writes
// (all three columns at x = 0, one column after), the output channel order,
// the handshake counts and the done pulse. The MAC-16 is modelled as a
// 3-clock delay of the last mark.
module tb_sqj_ctrl;
  import sqj_pkg::*;

  localparam int unsigned NM = 8;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic start = 1'b0;
  layer_cfg_t cfg;
  logic busy, done;
  layer_cfg_t cfg_q;
  logic prm_valid = 1'b0, prm_ready;
  logic w_we, b_we;
  logic [2:0] w_unit, b_unit, o_unit;
  logic [11:0] w_waddr, w_raddr;
  logic [3:0] w_lane;
  logic [6:0] b_waddr, res_addr, o_waddr, o_raddr;
  logic in_valid = 1'b0, in_ready;
  logic [7:0] itb_waddr, itb_raddr;
  logic itb_re, itwb_we, itwb_zero, op_re;
  logic [5:0] itwb_waddr, itwb_raddr;
  logic mac_valid, mac_first, mac_last;
  logic mac_out_valid;
  logic res_re, o_we;
  logic out_valid, out_ready = 1'b0;

  sqj_ctrl dut (.*);

  // MAC-16 model: result 3 clocks after the last operand
  logic [2:0] mac_pipe = '0;
  always @(posedge clk) mac_pipe <= rst_n ? {mac_pipe[1:0], mac_valid & mac_last} : 3'b0;
  assign mac_out_valid = mac_pipe[2];

  int checks = 0, failures = 0;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam int PAD = -1;

  // layer under test
  int W, H, C, M, K, G, MG;
  int itb_tag [256];
  int itwb_tag [64];
  int in_cnt, out_cnt, prm_cnt;
  int op_idx;           // operand index within the current pixel
  int win_writes;       // window writes of the current pixel
  int pix;              // current output pixel index
  int n_first = 0, n_last = 0, n_res = 0, n_pad_seen = 0;
  logic itb_re_q = 1'b0;
  logic [7:0] itb_raddr_q;

  task automatic err(string s);
    failures++;
    if (failures < 20) $display("%s", s);
  endtask

  always @(posedge clk) if (rst_n) begin
    // parameter demultiplexing
    if (prm_valid && prm_ready) begin
      automatic int nw = M*K*K*C;
      checks++;
      if (prm_cnt < nw) begin
        automatic int m = prm_cnt / (K*K*C);
        automatic int kk = (prm_cnt / C) % (K*K);
        automatic int c = prm_cnt % C;
        if (!w_we || b_we || int'(w_unit) != m % NM ||
            int'(w_waddr) != (m / NM)*K*K*G + kk*G + c/16 || int'(w_lane) != c % 16)
          err($sformatf("weight %0d routed to unit %0d word %0d lane %0d", prm_cnt, w_unit, w_waddr, w_lane));
      end else begin
        automatic int m = prm_cnt - nw;
        if (!b_we || w_we || int'(b_unit) != m % NM || int'(b_waddr) != m / NM)
          err($sformatf("bias %0d routed to unit %0d addr %0d", m, b_unit, b_waddr));
      end
      prm_cnt++;
    end
    // input words into the ITB
    if (in_valid && in_ready) begin
      if (in_cnt % 16 == 15) itb_tag[itb_waddr] = in_cnt / 16;   // = pixel*G + g
      in_cnt++;
    end
    // window writes
    itb_re_q    <= itb_re;
    itb_raddr_q <= itb_raddr;
    if (itwb_we) begin
      itwb_tag[itwb_waddr] = itwb_zero ? PAD : itb_tag[itb_raddr_q];
      if (itwb_zero) n_pad_seen++;
      win_writes++;
    end
    checks++;
    if (itwb_we != itb_re_q) err("ITWB write not one clock after ITB read");
    // operands
    if (op_re) begin
      automatic int y = pix / W;
      automatic int x = pix % W;
      automatic int per = K*K*G;
      automatic int mg = op_idx / per;
      automatic int r = op_idx % per;
      automatic int kk = r / G, g = r % G;
      automatic int ky = kk / K, kx = kk % K;
      automatic int off = (K == 3) ? 1 : 0;
      automatic int iy = y + ky - off;
      automatic int ix = x + kx - off;
      automatic int exp_tag = (iy < 0 || ix < 0 || iy >= H || ix >= W) ? PAD : (iy*W + ix)*G + g;
      checks++;
      if (itwb_tag[itwb_raddr] != exp_tag)
        err($sformatf("pixel %0d op %0d: window tag %0d, expected %0d", pix, op_idx, itwb_tag[itwb_raddr], exp_tag));
      checks++;
      if (int'(w_raddr) != mg*per + r)
        err($sformatf("pixel %0d op %0d: weight word %0d, expected %0d", pix, op_idx, w_raddr, mg*per + r));
      if (op_idx == 0) begin
        // window writes for this pixel: K=1: G; K=3: 9G at x=0, else 3G
        automatic int ew = (K == 1) ? G : ((x == 0) ? 9*G : 3*G);
        checks++;
        if (win_writes != ew) err($sformatf("pixel %0d: %0d window writes, expected %0d", pix, win_writes, ew));
      end
      op_idx++;
    end
    if (mac_valid && mac_first) n_first++;
    if (mac_valid && mac_last) n_last++;
    if (o_we) begin
      checks++;
      if (int'(o_waddr) != n_res) err($sformatf("result %0d written to %0d", n_res, o_waddr));
      n_res++;
    end
    // output stream
    if (out_valid && out_ready) begin
      automatic int m = out_cnt % M;
      checks++;
      if (int'(o_unit) != m % NM || int'(o_raddr) != m / NM)
        err($sformatf("output ch %0d read from unit %0d addr %0d", m, o_unit, o_raddr));
      if (m == 0) begin
        checks++;
        if (op_idx != MG*K*K*G || n_first != MG || n_last != MG || n_res != MG)
          err($sformatf("pixel %0d: %0d operands, %0d first, %0d last, %0d results", pix,
                        op_idx, n_first, n_last, n_res));
      end
      out_cnt++;
      if (m == M - 1) begin
        pix++;
        op_idx = 0; win_writes = 0; n_first = 0; n_last = 0; n_res = 0;
      end
    end
  end

  task automatic run(int w, int h, int c, int m, bit k3);
    W = w; H = h; C = c; M = m; K = k3 ? 3 : 1; G = c / 16; MG = m / NM;
    in_cnt = 0; out_cnt = 0; prm_cnt = 0; op_idx = 0; win_writes = 0; pix = 0;
    n_first = 0; n_last = 0; n_res = 0;
    cfg = '0;
    cfg.width = 8'(w); cfg.height = 8'(h); cfg.in_ch = 10'(c); cfg.out_ch = 10'(m); cfg.k3 = k3;
    @(negedge clk) start = 1'b1;
    @(negedge clk) start = 1'b0;
    fork
      while (prm_cnt < M*K*K*C + M) begin
        prm_valid = ($urandom_range(4) != 0);
        @(negedge clk);
      end
      while (in_cnt < W*H*C) begin
        in_valid = ($urandom_range(4) != 0);
        @(negedge clk);
      end
      while (out_cnt < W*H*M) begin
        out_ready = ($urandom_range(3) != 0);
        @(negedge clk);
      end
    join
    prm_valid = 1'b0; in_valid = 1'b0; out_ready = 1'b0;
    repeat (3) @(negedge clk);
    checks++;
    if (busy) err("busy after the layer");
    checks++;
    if (in_cnt != W*H*C || out_cnt != W*H*M) err("handshake counts");
  endtask

  int n_done = 0;
  always @(posedge clk) if (rst_n && done) n_done++;

  initial begin
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    run(4, 3, 32, 16, 1'b1);
    run(3, 2, 48, 24, 1'b0);
    run(1, 1, 16, 8, 1'b1);
    run(5, 4, 16, 8, 1'b1);
    checks++;
    if (n_done != 4) err($sformatf("done pulsed %0d times", n_done));
    checks++;
    if (n_pad_seen == 0) err("no padding writes");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
