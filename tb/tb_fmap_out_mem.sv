// tb_fmap_out_mem -- self-checking test of the output buffer (fmap_o_i).
//
// Writes random 16-bit results to every address and checks the
// combinational read port for every address, then overwrites random
// entries and checks that the new value is readable right after the write
// clock while the other entries keep their values.
module tb_fmap_out_mem;
  import sqj_pkg::*;

  localparam int unsigned DEPTH = 128;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic       we = 1'b0;
  logic [6:0] waddr = '0, raddr = '0;
  fmap_t      wdata = '0;
  fmap_t      rdata;

  fmap_out_mem #(.DEPTH(DEPTH)) dut (.*);

  int checks = 0, failures = 0;
  fmap_t ref_mem [DEPTH];

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(int a);
    raddr = 7'(a);
    #1;
    checks++;
    if (rdata != ref_mem[a]) begin
      failures++;
      $display("addr %0d: got %0d exp %0d", a, rdata, ref_mem[a]);
    end
  endtask

  initial begin
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk);
      we = 1'b1; waddr = 7'(a); wdata = fmap_t'($urandom);
      ref_mem[a] = wdata;
    end
    @(negedge clk) we = 1'b0;
    for (int a = 0; a < DEPTH; a++) check(a);
    for (int k = 0; k < 200; k++) begin
      automatic int a = $urandom_range(DEPTH - 1);
      @(negedge clk);
      we = 1'b1; waddr = 7'(a); wdata = fmap_t'($urandom);
      ref_mem[a] = wdata;
      @(negedge clk) we = 1'b0;
      check(a);
      check($urandom_range(DEPTH - 1));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
