// tb_itb -- self-checking test of the input tile buffer (ITB).
//
// Streams random 16-bit fmap values into the default-size ITB with random
// gaps, supplying a word address for each 16-value group (a scrambled
// order, so packing and addressing are both exercised). Checks that
// word_done pulses once per 16 values, then reads every written word back
// (data one clock after re) and compares the 16 packed channels.
module tb_itb;
  import sqj_pkg::*;

  localparam int unsigned DEPTH = 168;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic       in_valid = 1'b0, re = 1'b0;
  fmap_t      in_data = '0;
  logic [7:0] waddr = '0, raddr = '0;
  logic       word_done;
  fmap_vec_t  rdata;

  itb dut (.*);

  int checks = 0, failures = 0;
  fmap_vec_t ref_mem [DEPTH];
  int n_done = 0;

  always @(posedge clk) if (rst_n && word_done) n_done++;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int w = 0; w < DEPTH; w++) begin
      automatic int a = (w * 37) % DEPTH;   // 37 is coprime to 168: visits every word
      for (int l = 0; l < LANES; l++) begin
        @(negedge clk);
        while ($urandom_range(3) == 0) begin
          in_valid = 1'b0;
          @(negedge clk);
        end
        in_valid = 1'b1;
        in_data  = fmap_t'($urandom);
        waddr    = 8'(a);
        ref_mem[a][l] = in_data;
      end
    end
    @(negedge clk) in_valid = 1'b0;
    @(negedge clk);
    checks++;
    if (n_done != DEPTH) begin failures++; $display("word_done %0d times, expected %0d", n_done, DEPTH); end
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk); re = 1'b1; raddr = 8'(a);
      @(negedge clk); re = 1'b0;
      checks++;
      if (rdata != ref_mem[a]) begin failures++; $display("word %0d mismatch", a); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
