// tb_berexp_cmp: Bernoulli test. For random y and s, and random byte
// streams (some built to equal the threshold in their first bytes), checks
// the decision against the definition "64-bit uniform U, taken most
// significant byte first, is below t = (2y-1) >> s" and that exactly the
// bytes up to the first differing one (at most 8) are consumed, with the
// random source randomly stalling. Also checks the acceptance rate over
// many draws against t / 2^64.
//
// The decision rule is Falcon's BerExp; one byte per cycle is this design's
// own timing.
module tb_berexp_cmp;
  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  logic [63:0] y;
  logic [5:0] s6;
  logic rnd_valid = 1'b0;
  logic [7:0] rnd_byte;
  logic rnd_take, busy, done, accept;
  int checks = 0, failures = 0;

  berexp_cmp dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real acc_sum = 0, p_sum = 0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 4000; n++) begin
      logic [63:0] t, u;
      int used, exp_used, neq;
      bit exp_acc;
      y  = {1'b0, $urandom, $urandom} >> 1;
      s6 = 6'($urandom % 4);
      t  = ((y << 1) - 64'd1) >> s6;
      u  = {$urandom, $urandom};
      neq = $urandom % 9;                 // force the first bytes equal
      if (n % 4 == 0) for (int k = 0; k < neq; k++) u[63 - 8*k -: 8] = t[63 - 8*k -: 8];
      exp_acc = (u < t);
      exp_used = 8;
      for (int k = 0; k < 8; k++)
        if (u[63 - 8*k -: 8] != t[63 - 8*k -: 8]) begin exp_used = k + 1; break; end
      @(negedge clk);
      start = 1'b1;
      @(negedge clk);
      start = 1'b0;
      used = 0;
      while (!done) begin
        rnd_valid = ($urandom % 4 != 0);
        rnd_byte  = u[63 - 8*used -: 8];
        #1;
        if (rnd_take) used++;
        @(negedge clk);
        rnd_valid = 1'b0;
      end
      checks++;
      if (accept != exp_acc || used != exp_used) begin
        failures++;
        $display("FAIL y=%h s=%0d u=%h: accept %0d exp %0d, bytes %0d exp %0d",
                 y, s6, u, accept, exp_acc, used, exp_used);
      end
      if (n % 4 != 0) begin
        acc_sum += accept;
        p_sum += real'(t) / 2.0 ** 64;
      end
    end
    checks++;
    $display("accepted %f expected %f", acc_sum, p_sum);
    if ((acc_sum - p_sum) ** 2 > (4.0 * $sqrt(p_sum)) ** 2) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
