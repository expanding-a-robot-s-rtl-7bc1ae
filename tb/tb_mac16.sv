// tb_mac16 -- self-checking test of the MAC-16 unit.
//
// Feeds random groups of operand pairs (1 to 40 pairs per output channel,
// extreme values included) back to back, one pair per clock with no gaps
// between groups, and also with random idle clocks inside groups. Each
// finished sum is compared with a reference dot product, and the clock at
// which it appears is checked: exactly 3 clocks after the group's last pair.
module tb_mac16;
  import sqj_pkg::*;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic      in_valid = 1'b0, in_first = 1'b0, in_last = 1'b0;
  fmap_vec_t fmap = '0;
  wgt_vec_t  wgt = '0;
  logic      out_valid;
  acc_t      out_acc;

  mac16 dut (.*);

  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc++;

  // expected results: value and clock of arrival
  longint exp_q[$];
  longint exp_t[$];

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && out_valid) begin
    checks++;
    if (exp_q.size() == 0) begin
      failures++;
      $display("unexpected result");
    end else begin
      longint e, t;
      e = exp_q.pop_front();
      t = exp_t.pop_front();
      if (longint'(out_acc) != e || cyc != t) begin
        failures++;
        $display("result %0d at %0d, expected %0d at %0d", out_acc, cyc, e, t);
      end
    end
  end

  task automatic group(int n, bit gaps, bit extreme);
    longint sum = 0;
    for (int k = 0; k < n; k++) begin
      while (gaps && $urandom_range(3) == 0) begin
        @(negedge clk);
        in_valid = 1'b0;
      end
      @(negedge clk);
      in_valid = 1'b1;
      in_first = (k == 0);
      in_last  = (k == n - 1);
      for (int i = 0; i < LANES; i++) begin
        fmap[i] = extreme ? -16'sd32768 : fmap_t'($urandom);
        wgt[i]  = extreme ? -8'sd128 : wgt_t'($urandom);
        sum += longint'(fmap[i]) * longint'(wgt[i]);
      end
      if (k == n - 1) begin
        exp_q.push_back(sum);
        // sampled at the coming edge; visible LATENCY = 3 edges later
        exp_t.push_back(cyc + 1 + 3);
      end
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int g = 0; g < 60; g++) group(1 + $urandom_range(39), 1'b0, 1'b0);
    for (int g = 0; g < 20; g++) group(1 + $urandom_range(10), 1'b1, 1'b0);
    group(1, 1'b0, 1'b0);
    group(1, 1'b0, 1'b0);
    group(36, 1'b0, 1'b1);   // largest window, most negative values
    @(negedge clk) in_valid = 1'b0;
    repeat (10) @(posedge clk);
    checks++;
    if (exp_q.size() != 0) begin
      failures++;
      $display("%0d results missing", exp_q.size());
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
