// tb_basesampler: compares the transition-detecting RCDT sampler with the
// plain definition z0 = sum_i [u < RCDT[i]] for random 72-bit words and for
// words on both sides of every table entry, on both paths, and checks the
// sign bit and the one-cycle register timing.
//
// The RCDT table is Falcon's; the expected values come from the plain
// sum definition, not from the transition-detection structure under test.
module tb_basesampler;
  import bisz_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0, en = 1'b0;
  logic [79:0] rnd_l, rnd_r;
  logic [4:0] z0_l, z0_r;
  logic b_l, b_r;
  int checks = 0, failures = 0;

  basesampler dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int ref_z0(input logic [71:0] u);
    int z = 0;
    for (int i = 0; i < RCDT_N; i++) z += (u < RCDT[i]) ? 1 : 0;
    return z;
  endfunction

  task automatic one(input logic [71:0] ul, input logic [71:0] ur, input bit bl, input bit br);
    @(negedge clk);
    rnd_l = {7'd0, bl, ul}; rnd_r = {7'd0, br, ur}; en = 1'b1;
    @(negedge clk);
    en = 1'b0;
    rnd_l = '0; rnd_r = '0;
    checks++;
    if (int'(z0_l) != ref_z0(ul) || int'(z0_r) != ref_z0(ur) || b_l != bl || b_r != br) begin
      failures++;
      $display("FAIL u_l=%h z0_l=%0d exp %0d, u_r=%h z0_r=%0d exp %0d", ul, z0_l, ref_z0(ul),
               ur, z0_r, ref_z0(ur));
    end
  endtask

  initial begin
    int hist [19];
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < RCDT_N; i++) begin
      one(RCDT[i], RCDT[i] - 72'd1, 1'b0, 1'b1);
      one(RCDT[i] + 72'd1, RCDT[i], 1'b1, 1'b0);
    end
    one('0, '1, 1'b1, 1'b1);
    for (int n = 0; n < 3000; n++) begin
      logic [71:0] a, b;
      a = {$urandom, $urandom, $urandom};
      b = {$urandom, $urandom, $urandom};
      // also small values, to reach the large z0
      if (n % 4 == 0) a = a >> ($urandom % 72);
      if (n % 4 == 1) b = b >> ($urandom % 72);
      one(a, b, 1'($urandom), 1'($urandom));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
