// tb_mul81: random operand pairs whose product stays below 2^9 are
// multiplied with four 41x40-bit partial products and the middle 81 bits
// compared with the multiplier's output.
//
// The middle-81-bit product is the published MUL81 definition.
module tb_mul81;
  import bisz_pkg::*;
  fx_t a, b, p;
  int checks = 0, failures = 0;

  mul81 dut (.*);

  function automatic fx_t ref_mul(input fx_t x, input fx_t y);
    logic [161:0] s;
    logic [40:0] xh, yh; logic [39:0] xl, yl;
    xh = x[80:40]; xl = x[39:0]; yh = y[80:40]; yl = y[39:0];
    s = (162'(xh * yh) << 80) + (162'(xh * yl) << 40) + (162'(xl * yh) << 40) + 162'(xl * yl);
    return s[152:72];
  endfunction

  initial begin
    for (int n = 0; n < 3000; n++) begin
      int ia, ib;
      ia = $urandom % 9; ib = $urandom % (9 - ia);
      a = {$urandom, $urandom, $urandom} >> (96 - 81 + 9 - ia);
      b = {$urandom, $urandom, $urandom} >> (96 - 81 + 9 - ib);
      #1;
      checks++;
      if (p != ref_mul(a, b)) begin
        failures++;
        $display("FAIL %h * %h = %h exp %h", a, b, p, ref_mul(a, b));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
