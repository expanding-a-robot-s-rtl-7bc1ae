// tb_bias_mem -- self-checking test of the bias buffer (bias_i).
//
// Fills the buffer with random biases, reads every address back (data one
// clock after re), overwrites random entries and checks them again, and
// checks that the output holds while re is low.
module tb_bias_mem;
  import sqj_pkg::*;

  localparam int unsigned DEPTH = 128;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic       we = 1'b0, re = 1'b0;
  logic [6:0] waddr = '0, raddr = '0;
  bias_t      wdata = '0;
  bias_t      rdata;

  bias_mem #(.DEPTH(DEPTH)) dut (.*);

  int checks = 0, failures = 0;
  bias_t ref_mem [DEPTH];

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic write(int a, bias_t d);
    @(negedge clk);
    we = 1'b1; waddr = 7'(a); wdata = d;
    ref_mem[a] = d;
    @(negedge clk) we = 1'b0;
  endtask

  task automatic read_check(int a);
    @(negedge clk);
    re = 1'b1; raddr = 7'(a);
    @(negedge clk);
    re = 1'b0;
    checks++;
    if (rdata != ref_mem[a]) begin
      failures++;
      $display("addr %0d: got %0d exp %0d", a, rdata, ref_mem[a]);
    end
  endtask

  initial begin
    for (int a = 0; a < DEPTH; a++) write(a, bias_t'($urandom));
    for (int a = 0; a < DEPTH; a++) read_check(a);
    for (int k = 0; k < 100; k++) begin
      automatic int a = $urandom_range(DEPTH - 1);
      write(a, bias_t'($urandom));
      read_check(a);
    end
    read_check(3);
    @(negedge clk) raddr = 7'd4;
    @(negedge clk);
    checks++;
    if (rdata != ref_mem[3]) begin failures++; $display("output changed without re"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
