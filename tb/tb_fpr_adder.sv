// tb_fpr_adder: for random candidates z in -18..19 and floors of either
// sign up to 2^30, checks both doubles bit-exactly against the real-valued
// sum converted by the simulator, and the three-cycle latency from start to done.
//
// The result (floor(mu) + z as a double) is the published one; the
// three-cycle latency is this design's own.
module tb_fpr_adder;
  import bisz_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  logic signed [5:0] z_l, z_r;
  floor_t floor_l, floor_r;
  logic done;
  dbl_t res_l, res_r;
  int checks = 0, failures = 0;

  fpr_adder dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 2000; n++) begin
      int fl, fr, zl, zr, cyc;
      zl = int'($urandom % 38) - 18; zr = int'($urandom % 38) - 18;
      fl = int'($urandom) >>> ($urandom % 31);
      fr = int'($urandom) >>> ($urandom % 31);
      if (n == 0) begin fl = 0; zl = 0; fr = -1; zr = 1; end
      @(negedge clk);
      z_l = 6'(zl); z_r = 6'(zr); floor_l = fl; floor_r = fr; start = 1'b1;
      @(negedge clk);
      start = 1'b0;
      z_l = '0; z_r = '0; floor_l = '0; floor_r = '0;
      cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      checks++;
      if (cyc != 3) begin failures++; $display("FAIL latency %0d", cyc); end
      checks++;
      if (res_l != $realtobits(real'(fl) + real'(zl)) ||
          res_r != $realtobits(real'(fr) + real'(zr))) begin
        failures++;
        $display("FAIL %0d+%0d -> %h, %0d+%0d -> %h", fl, zl, res_l, fr, zr, res_r);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
