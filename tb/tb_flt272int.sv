// tb_flt272int: converts random doubles (centers of either sign over many
// magnitudes, and positive inverse sigmas) and checks floor, fraction and
// the unsigned fixed point value exactly against real arithmetic.
//
// The 9.72 fixed-point format is the published one; signed floor and
// fraction are this design's own additions.
module tb_flt272int;
  import bisz_pkg::*;
  dbl_t d;
  fx_t fx;
  floor_t flr;
  logic [71:0] frac;
  int checks = 0, failures = 0;

  flt272int dut (.*);

  function automatic real u2r(input logic [80:0] v);
    // exact for values with at most 53 significant bits
    return real'(v[80:40]) * 2.0 ** 40 + real'(v[39:0]);
  endfunction

  initial begin
    for (int n = 0; n < 4000; n++) begin
      real a, fl, fr;
      a = (real'($urandom) / 4294967296.0) * (2.0 ** ($urandom % 20)) ;
      if (n % 2) a = -a;
      if (n % 7 == 0) a = real'($urandom % 2000) - 1000.0;     // integers
      d = $realtobits(a);
      #1;
      fl = $floor(a); fr = a - fl;
      checks++;
      if (int'(flr) != int'(fl) || u2r({9'd0, frac}) / (2.0 ** 72) != fr) begin
        failures++;
        $display("FAIL d=%f floor %0d frac %h", a, flr, frac);
      end
      if (a > 0 && a < 512.0) begin   // fx holds 9 integer bits
        checks++;
        if (u2r(fx) / (2.0 ** 72) != a) begin
          failures++;
          $display("FAIL fx d=%f fx=%h", a, fx);
        end
      end
    end
    d = '0; #1;
    checks++;
    if (fx != 0 || flr != 0 || frac != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
