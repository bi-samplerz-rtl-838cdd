// berexp_cmp: Bernoulli acceptance test of one datapath (CMP).
//
// Accepts with probability about ccs * exp(-x) = 2^-s * y / 2^63: it forms
// the 64-bit threshold t = (2y - 1) >> s (64-bit wrap-around, as in
// Falcon's BerExp) and compares it, most significant byte first, with
// uniform random bytes: a byte that differs from the threshold byte decides
// (accept if the random byte is smaller), an equal byte moves to the next
// one, and the eighth byte decides in any case. This is a lazy comparison
// of a 64-bit uniform with t, so usually one random byte is consumed.
//
// Interface: `start` samples y and s6. Each cycle with `rnd_valid` high the
// unit uses `rnd_byte` and raises `rnd_take` (combinationally) so the
// random source drops that byte. `done` pulses with `accept` valid in the
// cycle after the deciding byte; `accept` holds until the next start.
//
// Origin: the threshold (2y - 1) >> s and the byte-serial, most-significant-
// first comparison with early exit follow Falcon's BerExp as used by the
// Bi-SamplerZ CMP unit. One byte per cycle and the registered decision are
// this design's own timing.
module berexp_cmp (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic [63:0] y,
  input  logic [5:0]  s6,
  input  logic        rnd_valid,
  input  logic [7:0]  rnd_byte,
  output logic        rnd_take,
  output logic        busy,
  output logic        done,
  output logic        accept
);
  logic [63:0] t_q;
  logic [2:0]  idx_q;     // byte index, 7 = most significant
  logic        run_q;
  logic [7:0]  tb;

  assign tb       = t_q[8*idx_q +: 8];
  assign rnd_take = run_q && rnd_valid;
  assign busy     = run_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      t_q <= '0; idx_q <= '0; run_q <= 1'b0; done <= 1'b0; accept <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start) begin
        t_q   <= ((y << 1) - 64'd1) >> s6;
        idx_q <= 3'd7;
        run_q <= 1'b1;
      end else if (run_q && rnd_valid) begin
        if (rnd_byte != tb || idx_q == 3'd0) begin
          accept <= (rnd_byte < tb);
          done   <= 1'b1;
          run_q  <= 1'b0;
        end else begin
          idx_q <= idx_q - 3'd1;
        end
      end
    end
  end
endmodule
