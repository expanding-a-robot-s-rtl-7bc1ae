// tb_weight_mem -- self-checking test of the weight buffer (weights_i).
//
// Writes random 8-bit weights lane by lane into random words of a reduced
// depth buffer, keeping a reference copy, then reads words back and checks
// all 16 lanes one clock after the read request. Also checks that a read
// without re keeps the previous output and that writing one lane leaves the
// other 15 lanes of the word unchanged.
module tb_weight_mem;
  import sqj_pkg::*;

  localparam int unsigned DEPTH = 64;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic       we = 1'b0, re = 1'b0;
  logic [5:0] waddr = '0, raddr = '0;
  logic [3:0] wlane = '0;
  wgt_t       wdata = '0;
  wgt_vec_t   rdata;

  weight_mem #(.DEPTH(DEPTH)) dut (.*);

  int checks = 0, failures = 0;
  wgt_vec_t ref_mem [DEPTH];

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic write(int a, int l, wgt_t d);
    @(negedge clk);
    we = 1'b1; waddr = 6'(a); wlane = 4'(l); wdata = d;
    ref_mem[a][l] = d;
    @(negedge clk) we = 1'b0;
  endtask

  task automatic read_check(int a);
    @(negedge clk);
    re = 1'b1; raddr = 6'(a);
    @(negedge clk);
    re = 1'b0;
    checks++;
    if (rdata != ref_mem[a]) begin
      failures++;
      $display("word %0d: got %h exp %h", a, rdata, ref_mem[a]);
    end
  endtask

  initial begin
    // fill every word
    for (int a = 0; a < DEPTH; a++)
      for (int l = 0; l < LANES; l++) write(a, l, wgt_t'($urandom));
    for (int a = 0; a < DEPTH; a++) read_check(a);
    // single-lane updates
    for (int k = 0; k < 200; k++) begin
      automatic int a = $urandom_range(DEPTH - 1);
      write(a, $urandom_range(LANES - 1), wgt_t'($urandom));
      read_check(a);
    end
    // output holds while re is low
    read_check(5);
    @(negedge clk) raddr = 6'd9;
    @(negedge clk);
    checks++;
    if (rdata != ref_mem[5]) begin failures++; $display("output changed without re"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
