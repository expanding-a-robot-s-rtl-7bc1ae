// sqj_ctrl -- control logic of the SqueezeJet-style convolution accelerator.
//
// Runs one stride-1 convolution layer (1x1, or 3x3 with zero padding 1) in
// these phases:
//
//   PRM    Accept the layer parameters, one byte per handshake on the 8-bit
//          parameter stream: first every weight (output channel m outermost,
//          then ky, kx, input channel c innermost), then one bias per output
//          channel. Weight (m, ky, kx, c) goes to unit m mod N_MAC, word
//          (m div N_MAC)*K*K*G + (ky*K+kx)*G + c div 16, lane c mod 16,
//          where G = in_ch/16 is the number of 16-channel groups.
//   Then, for every output pixel (y, x) in raster order:
//   FETCH  Accept input fmap values until the ITB holds every input pixel the
//          window needs: pixel (y, x) for 1x1, pixel (y+1, x+1) (clipped to
//          the map) for 3x3. Input is consumed pixel by pixel as output is
//          produced, so a 3x3 layer only ever needs three input rows on chip.
//   WIN    Copy the window from the ITB into the ITWB copies. For 3x3 the
//          window is kept as a ring of three columns: at x = 0 all three
//          columns are loaded, afterwards only the new right-hand column;
//          positions outside the map are written as zeros (padding).
//   COMP   Stream the operands: for each output-channel group mg (channels
//          mg*N_MAC .. mg*N_MAC+N_MAC-1, one per MAC-16 unit) and each window
//          word, read ITWB and weights in the same clock. One operand pair
//          per clock, no bubbles between groups.
//   DRAIN  Wait for the last MAC-16 results; each result is requantised in
//          the top level and written to fmap_o_i at address mg.
//   OUT    Stream the pixel's out_ch results in channel order, 16 bits per
//          handshake.
//
// Timing: PRM takes out_ch*(K*K*in_ch + 1) accepted bytes. Per pixel, COMP
// takes (out_ch/N_MAC)*K*K*G clocks, DRAIN 5 clocks (1 for the memory read,
// 3 for the MAC-16 pipeline, 1 for the requantisation register), WIN 3*G or
// 9*G clocks plus one (3x3) or G+1 (1x1), and OUT out_ch accepted handshakes.
// The phase order and the ring schemes are this design's own; the
// parallelism (16 input channels x 8 output channels per clock), the
// pixel-by-pixel processing and the 1x1/3x3 stride-1 scope follow the
// accelerator as published. All handshakes are valid/ready; a value moves in
// a clock where both are high.
module sqj_ctrl
  import sqj_pkg::*;
#(
  parameter int unsigned NMAC       = N_MAC,
  parameter int unsigned WDEPTH     = 4096,
  parameter int unsigned BDEPTH     = 128,
  parameter int unsigned ITB_DEPTH  = 168,
  parameter int unsigned ITWB_DEPTH = 36,
  localparam int unsigned UW  = (NMAC > 1) ? $clog2(NMAC) : 1,
  localparam int unsigned WAW = $clog2(WDEPTH),
  localparam int unsigned BAW = $clog2(BDEPTH),
  localparam int unsigned IAW = $clog2(ITB_DEPTH),
  localparam int unsigned XAW = $clog2(ITWB_DEPTH)
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        start,
  input  layer_cfg_t                  cfg,
  output logic                        busy,
  output logic                        done,
  output layer_cfg_t                  cfg_q,     // latched configuration
  // layer parameter stream
  input  logic                        prm_valid,
  output logic                        prm_ready,
  output logic                        w_we,
  output logic [UW-1:0]               w_unit,
  output logic [WAW-1:0]              w_waddr,
  output logic [$clog2(LANES)-1:0]    w_lane,
  output logic                        b_we,
  output logic [UW-1:0]               b_unit,
  output logic [BAW-1:0]              b_waddr,
  // input fmap stream -> ITB
  input  logic                        in_valid,
  output logic                        in_ready,
  output logic [IAW-1:0]              itb_waddr,
  // ITB -> ITWB
  output logic                        itb_re,
  output logic [IAW-1:0]              itb_raddr,
  output logic                        itwb_we,
  output logic [XAW-1:0]              itwb_waddr,
  output logic                        itwb_zero,  // write zeros (padding)
  // operand reads and MAC-16 control
  output logic                        op_re,
  output logic [XAW-1:0]              itwb_raddr,
  output logic [WAW-1:0]              w_raddr,
  output logic                        mac_valid,
  output logic                        mac_first,
  output logic                        mac_last,
  input  logic                        mac_out_valid,
  // result path: bias read with the MAC result, fmap_o write one clock later
  output logic                        res_re,
  output logic [BAW-1:0]              res_addr,
  output logic                        o_we,
  output logic [BAW-1:0]              o_waddr,
  // output fmap stream
  output logic                        out_valid,
  input  logic                        out_ready,
  output logic [UW-1:0]               o_unit,
  output logic [BAW-1:0]              o_raddr
);

  ctrl_state_t state;

  // ---------------------------------------------------------------------
  // derived layer sizes
  // ---------------------------------------------------------------------
  logic [6:0]  g_n;        // G, 16-channel input groups
  logic [7:0]  mg_n;       // output-channel groups (out_ch / NMAC)
  logic [3:0]  kk_n;       // K*K
  logic [9:0]  kkg_n;      // K*K*G words per window
  logic [15:0] wg_n;       // W*G, ITB words per row
  logic [21:0] pix_n;      // W*H

  assign g_n   = 7'(cfg_q.in_ch >> $clog2(LANES));
  assign mg_n  = 8'(cfg_q.out_ch / 10'(NMAC));
  assign kk_n  = cfg_q.k3 ? 4'd9 : 4'd1;
  assign kkg_n = 10'(kk_n * g_n);
  assign wg_n  = 16'(cfg_q.width * g_n);
  assign pix_n = 22'(cfg_q.width * cfg_q.height);

  // ---------------------------------------------------------------------
  // parameter loading counters
  // ---------------------------------------------------------------------
  logic [$clog2(LANES)-1:0] p_lane;
  logic [9:0]               p_idx;    // (ky*K+kx)*G + g
  logic [UW-1:0]            p_unit;
  logic [7:0]               p_mg;
  logic [WAW-1:0]           p_base;   // p_mg * K*K*G

  // ---------------------------------------------------------------------
  // pixel position and input loading
  // ---------------------------------------------------------------------
  logic [7:0]  px, py;            // output pixel being produced
  logic [27:0] ld_words;          // 16-channel words loaded into the ITB
  logic [$clog2(LANES)-1:0] ld_lane;
  logic [IAW-1:0] ld_addr;
  logic [27:0] need_words;
  logic [21:0] tgt_pix;

  always_comb begin
    if (!cfg_q.k3)
      tgt_pix = 22'(py * cfg_q.width) + 22'(px);
    else if (32'(py) + 1 < 32'(cfg_q.height))
      tgt_pix = (22'(py) + 22'd1) * 22'(cfg_q.width) +
                ((32'(px) + 1 < 32'(cfg_q.width)) ? 22'(px) + 22'd1 : 22'(px));
    else
      tgt_pix = pix_n - 22'd1;
    need_words = (28'(tgt_pix) + 28'd1) * 28'(g_n);
  end

  // ---------------------------------------------------------------------
  // window loading
  // ---------------------------------------------------------------------
  logic [1:0] colbase;           // ITWB slot of window column kx = 0
  logic [1:0] wkx, wky;
  logic [6:0] wg;
  logic       wr_pend, wr_zero;
  logic [XAW-1:0] wr_addr;

  function automatic logic [1:0] slot_of(logic [1:0] base, logic [1:0] kx);
    logic [2:0] s;
    s = 3'(base) + 3'(kx);
    return (s >= 3) ? 2'(s - 3) : 2'(s);
  endfunction

  // input coordinates of the window position being loaded (offset by 1)
  logic signed [9:0] ix, iy;
  logic              pad;
  logic [1:0]        row_slot;
  assign ix  = $signed({2'b0, px}) - 10'sd1 + $signed({8'b0, wkx});
  assign iy  = $signed({2'b0, py}) - 10'sd1 + $signed({8'b0, wky});
  assign pad = cfg_q.k3 && (ix < 0 || iy < 0 ||
                            ix >= $signed({2'b0, cfg_q.width}) ||
                            iy >= $signed({2'b0, cfg_q.height}));
  assign row_slot = 2'(10'(iy) % 10'd3);

  // ---------------------------------------------------------------------
  // compute counters
  // ---------------------------------------------------------------------
  logic [1:0]     ckx, cky;
  logic [6:0]     cg;
  logic [7:0]     cmg;
  logic [WAW-1:0] cw_addr;
  logic           c_first, c_last, c_end;
  logic [7:0]     res_cnt;
  logic           res_q;

  assign c_first = (ckx == 0) && (cky == 0) && (cg == 0);
  assign c_last  = (cg == g_n - 7'd1) &&
                   (cfg_q.k3 ? (ckx == 2'd2 && cky == 2'd2) : 1'b1);
  assign c_end   = c_last && (cmg == mg_n - 8'd1);

  // ---------------------------------------------------------------------
  // output counters
  // ---------------------------------------------------------------------
  logic [UW-1:0] ou;
  logic [7:0]    omg;

  // ---------------------------------------------------------------------
  // combinational outputs
  // ---------------------------------------------------------------------
  assign busy      = (state != S_IDLE);
  assign prm_ready = (state == S_PRM_W) || (state == S_PRM_B);
  assign w_we      = (state == S_PRM_W) && prm_valid;
  assign w_unit    = p_unit;
  assign w_waddr   = p_base + WAW'(p_idx);
  assign w_lane    = p_lane;
  assign b_we      = (state == S_PRM_B) && prm_valid;
  assign b_unit    = p_unit;
  assign b_waddr   = BAW'(p_mg);

  assign in_ready  = (state == S_FETCH) && (ld_words < need_words);
  assign itb_waddr = ld_addr;

  assign itb_re    = (state == S_WIN);
  assign itb_raddr = cfg_q.k3 ? IAW'(32'(row_slot) * 32'(wg_n) + 32'(ix) * 32'(g_n) + 32'(wg))
                              : IAW'(wg);

  assign itwb_we    = wr_pend;
  assign itwb_waddr = wr_addr;
  assign itwb_zero  = wr_zero;

  assign op_re      = (state == S_COMP);
  assign itwb_raddr = cfg_q.k3 ? XAW'(32'(slot_of(colbase, ckx)) * 3 * 32'(g_n) +
                                      32'(cky) * 32'(g_n) + 32'(cg))
                               : XAW'(cg);
  assign w_raddr    = cw_addr;

  assign res_re   = mac_out_valid;
  assign res_addr = BAW'(res_cnt);

  assign out_valid = (state == S_OUT);
  assign o_unit    = ou;
  assign o_raddr   = BAW'(omg);

  // ---------------------------------------------------------------------
  // sequencing
  // ---------------------------------------------------------------------
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      done     <= 1'b0;
      cfg_q    <= '0;
      p_lane   <= '0; p_idx <= '0; p_unit <= '0; p_mg <= '0; p_base <= '0;
      px       <= '0; py <= '0;
      ld_words <= '0; ld_lane <= '0; ld_addr <= '0;
      colbase  <= '0; wkx <= '0; wky <= '0; wg <= '0;
      wr_pend  <= 1'b0; wr_zero <= 1'b0; wr_addr <= '0;
      ckx <= '0; cky <= '0; cg <= '0; cmg <= '0; cw_addr <= '0;
      mac_valid <= 1'b0; mac_first <= 1'b0; mac_last <= 1'b0;
      res_cnt <= '0; res_q <= 1'b0;
      o_we <= 1'b0; o_waddr <= '0;
      ou <= '0; omg <= '0;
    end else begin
      done <= 1'b0;

      // operand issue -> MAC-16 control, aligned with the memory read data
      mac_valid <= op_re;
      mac_first <= op_re && c_first;
      mac_last  <= op_re && c_last;

      // result write one clock after the MAC-16 result (requantisation reg)
      o_we    <= mac_out_valid;
      o_waddr <= BAW'(res_cnt);
      if (mac_out_valid) res_cnt <= res_cnt + 8'd1;
      res_q <= mac_out_valid;

      // ITB -> ITWB write, one clock after the ITB read
      wr_pend <= itb_re;
      wr_zero <= pad;
      wr_addr <= cfg_q.k3 ? XAW'(32'(slot_of(colbase, wkx)) * 3 * 32'(g_n) +
                                 32'(wky) * 32'(g_n) + 32'(wg))
                          : XAW'(wg);

      // input stream into the ITB
      if (in_valid && in_ready) begin
        ld_lane <= ld_lane + 1'b1;
        if (ld_lane == $clog2(LANES)'(LANES - 1)) begin
          ld_words <= ld_words + 28'd1;
          if (32'(ld_addr) == (cfg_q.k3 ? 3 * 32'(wg_n) : 32'(g_n)) - 1)
            ld_addr <= '0;
          else
            ld_addr <= ld_addr + 1'b1;
        end
      end

      unique case (state)
        S_IDLE: begin
          if (start) begin
            cfg_q   <= cfg;
            state   <= S_PRM_W;
            p_lane  <= '0; p_idx <= '0; p_unit <= '0; p_mg <= '0; p_base <= '0;
            px      <= '0; py <= '0;
            ld_words <= '0; ld_lane <= '0; ld_addr <= '0;
            colbase <= '0;
          end
        end

        S_PRM_W: if (prm_valid) begin
          p_lane <= p_lane + 1'b1;
          if (p_lane == $clog2(LANES)'(LANES - 1)) begin
            p_idx <= p_idx + 10'd1;
            if (p_idx == kkg_n - 10'd1) begin
              p_idx  <= '0;
              p_unit <= p_unit + 1'b1;
              if (32'(p_unit) == NMAC - 1) begin
                p_unit <= '0;
                p_mg   <= p_mg + 8'd1;
                p_base <= p_base + WAW'(kkg_n);
                if (p_mg == mg_n - 8'd1) begin
                  p_mg  <= '0;
                  state <= S_PRM_B;
                end
              end
            end
          end
        end

        S_PRM_B: if (prm_valid) begin
          p_unit <= p_unit + 1'b1;
          if (32'(p_unit) == NMAC - 1) begin
            p_unit <= '0;
            p_mg   <= p_mg + 8'd1;
            if (p_mg == mg_n - 8'd1) state <= S_FETCH;
          end
        end

        S_FETCH: begin
          if (ld_words >= need_words) begin
            state <= S_WIN;
            wky   <= '0;
            wg    <= '0;
            if (!cfg_q.k3 || px == 0) begin
              wkx     <= '0;
              colbase <= '0;
            end else begin
              // slide right: the oldest column slot receives column kx = 2
              wkx     <= 2'd2;
              colbase <= slot_of(colbase, 2'd1);
            end
          end
        end

        S_WIN: begin
          wg <= wg + 7'd1;
          if (wg == g_n - 7'd1) begin
            wg  <= '0;
            wky <= wky + 2'd1;
            if (!cfg_q.k3 || wky == 2'd2) begin
              wky <= '0;
              wkx <= wkx + 2'd1;
              if (!cfg_q.k3 || wkx == 2'd2) state <= S_WIN_LAST;
            end
          end
        end

        S_WIN_LAST: begin  // last ITWB write lands this clock
          state   <= S_COMP;
          ckx <= '0; cky <= '0; cg <= '0; cmg <= '0; cw_addr <= '0;
          res_cnt <= '0;
        end

        S_COMP: begin
          cw_addr <= cw_addr + 1'b1;
          cg <= cg + 7'd1;
          if (cg == g_n - 7'd1) begin
            cg  <= '0;
            ckx <= ckx + 2'd1;
            if (!cfg_q.k3 || ckx == 2'd2) begin
              ckx <= '0;
              cky <= cky + 2'd1;
              if (!cfg_q.k3 || cky == 2'd2) begin
                cky <= '0;
                cmg <= cmg + 8'd1;
                if (c_end) state <= S_DRAIN;
              end
            end
          end
        end

        S_DRAIN: begin
          if (res_cnt == mg_n && !o_we && !res_q) begin
            state <= S_OUT;
            ou    <= '0;
            omg   <= '0;
          end
        end

        S_OUT: if (out_ready) begin
          ou <= ou + 1'b1;
          if (32'(ou) == NMAC - 1) begin
            ou  <= '0;
            omg <= omg + 8'd1;
            if (omg == mg_n - 8'd1) begin
              if (px == cfg_q.width - 8'd1) begin
                px <= '0;
                py <= py + 8'd1;
                if (py == cfg_q.height - 8'd1) state <= S_DONE;
                else                           state <= S_FETCH;
              end else begin
                px    <= px + 8'd1;
                state <= S_FETCH;
              end
            end
          end
        end

        S_DONE: begin
          done  <= 1'b1;
          state <= S_IDLE;
        end

        default: state <= S_IDLE;
      endcase
    end
  end

  // ---------------------------------------------------------------------
  // configuration rules
  // ---------------------------------------------------------------------
  always_ff @(posedge clk) begin
    if (rst_n && state == S_IDLE && start) begin
      assert (cfg.in_ch != 0 && 32'(cfg.in_ch) % LANES == 0)
        else $error("sqj_ctrl: in_ch must be a non-zero multiple of %0d", LANES);
      assert (cfg.out_ch != 0 && cfg.out_ch % 10'(NMAC) == 0)
        else $error("sqj_ctrl: out_ch must be a non-zero multiple of %0d", NMAC);
      assert (cfg.width != 0 && cfg.height != 0)
        else $error("sqj_ctrl: empty fmap");
      assert ((cfg.k3 ? 9 : 1) * 32'(cfg.in_ch) / LANES <= ITWB_DEPTH)
        else $error("sqj_ctrl: window does not fit the ITWB");
      assert ((cfg.k3 ? 3 * 32'(cfg.width) : 1) * 32'(cfg.in_ch) / LANES <= ITB_DEPTH)
        else $error("sqj_ctrl: rows do not fit the ITB");
      assert (32'(cfg.out_ch) / NMAC <= BDEPTH)
        else $error("sqj_ctrl: too many output channels");
      assert (32'(cfg.out_ch) / NMAC * (cfg.k3 ? 9 : 1) * 32'(cfg.in_ch) / LANES <= WDEPTH)
        else $error("sqj_ctrl: weights do not fit");
    end
  end

endmodule
