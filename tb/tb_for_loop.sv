// tb_for_loop: ApproxExp. For random r' in [0, ln2) and ccs in
// [0.6, 1], checks y exactly against a separately written Horner loop over
// the Falcon coefficients and to 1e-13 relative against
// 2^63 * ccs * exp(-r') from real arithmetic; checks the 14-cycle latency.
//
// Coefficients and formula are Falcon's ApproxExp; the 14-cycle latency is
// this design's own.
module tb_for_loop;
  import bisz_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  logic [62:0] z63;
  fx_t ccs;
  logic busy, done;
  logic [63:0] y;
  int checks = 0, failures = 0;

  for_loop dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [63:0] horner(input logic [63:0] z, input logic [63:0] c);
    logic [127:0] p;
    logic [63:0] v;
    v = EXP_C[0];
    for (int i = 1; i <= 12; i++) begin
      p = 128'(z) * 128'(v);
      v = EXP_C[i] - p[126:63];
    end
    p = 128'(c) * 128'(v);
    return p[126:63];
  endfunction

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 2000; n++) begin
      real rp, cc, e, d;
      int cyc;
      logic [63:0] c63;
      rp = 0.6931471805599453 * real'($urandom) / 4294967296.0;
      cc = 0.6 + 0.4 * real'($urandom) / 4294967296.0;
      if (n == 0) begin rp = 0.0; cc = 1.0; end
      @(negedge clk);
      z63 = 63'(longint'($floor(rp * 2.0 ** 52))) << 11;
      rp  = real'(z63 >> 11) / 2.0 ** 52;
      ccs = fx_t'(longint'($floor(cc * 2.0 ** 52))) << 20;
      cc  = real'(ccs >> 20) / 2.0 ** 52;
      c63 = ccs[72:9];
      start = 1'b1;
      @(negedge clk);
      start = 1'b0;
      cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      checks++;
      if (cyc != 14) begin failures++; $display("FAIL latency %0d", cyc); end
      checks++;
      if (y != horner({1'b0, z63}, c63)) begin failures++; $display("FAIL horner"); end
      e = 2.0 ** 63 * cc * $exp(-rp);
      d = (real'(y) - e) / e;
      checks++;
      if (d > 1e-13 || d < -1e-13) begin
        failures++;
        $display("FAIL y=%g exp %g", real'(y), e);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
