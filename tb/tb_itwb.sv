// tb_itwb -- self-checking test of the window buffer (ITWB_i).
//
// Writes random 16-channel words to every address of a default-size (36
// word) buffer, reads them back one clock after re, then interleaves random
// writes and reads in the same clock (a read of the address being written
// returns the old word, as in a block RAM in read-first mode).
module tb_itwb;
  import sqj_pkg::*;

  localparam int unsigned DEPTH = 36;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic       we = 1'b0, re = 1'b0;
  logic [5:0] waddr = '0, raddr = '0;
  fmap_vec_t  wdata = '0;
  fmap_vec_t  rdata;

  itwb #(.DEPTH(DEPTH)) dut (.*);

  int checks = 0, failures = 0;
  fmap_vec_t ref_mem [DEPTH];

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic fmap_vec_t rnd();
    fmap_vec_t v;
    for (int i = 0; i < LANES; i++) v[i] = fmap_t'($urandom);
    return v;
  endfunction

  initial begin
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk);
      we = 1'b1; waddr = 6'(a); wdata = rnd();
      ref_mem[a] = wdata;
    end
    @(negedge clk) we = 1'b0;
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk); re = 1'b1; raddr = 6'(a);
      @(negedge clk); re = 1'b0;
      checks++;
      if (rdata != ref_mem[a]) begin failures++; $display("addr %0d mismatch", a); end
    end
    for (int k = 0; k < 300; k++) begin
      fmap_vec_t old;
      automatic int ra = $urandom_range(DEPTH - 1);
      automatic int wa = $urandom_range(DEPTH - 1);
      @(negedge clk);
      re = 1'b1; raddr = 6'(ra);
      we = 1'b1; waddr = 6'(wa); wdata = rnd();
      old = ref_mem[ra];
      ref_mem[wa] = wdata;
      @(negedge clk);
      re = 1'b0; we = 1'b0;
      checks++;
      if (rdata != old) begin failures++; $display("read %0d during write %0d mismatch", ra, wa); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
