// chacha20: ChaCha20 block function, the pseudorandom generator that feeds
// both sampling datapaths.
//
// The architecture names ChaCha20 as its PRNG but does not describe its
// insides; this is the standard ChaCha20 block function (RFC 8439): a 4x4
// state of 32-bit words built from the constant "expand 32-byte k", a
// 256-bit key, a 32-bit block counter and a 96-bit nonce, 20 rounds
// alternating column and diagonal quarter-rounds, then the feed-forward
// addition of the input state. One round (four quarter-rounds in parallel)
// is done per clock, an own choice that trades area for 22 cycles per
// block (load, 20 rounds, feed-forward addition).
//
// Interface: pulse `start` while `busy` is low with `key`, `counter` and
// `nonce` valid; they are sampled on that edge. Twenty-two clock edges later
// `valid` is high for one cycle with the 512-bit `block`, word i of the
// output in block[32*i +: 32], so byte k of the keystream is block[8*k +: 8].
// Key word i is key[32*i +: 32] and nonce word i is nonce[32*i +: 32].
module chacha20 (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic [255:0] key,
  input  logic [31:0]  counter,
  input  logic [95:0]  nonce,
  output logic         busy,
  output logic         valid,
  output logic [511:0] block
);
  typedef logic [31:0] word_t;

  word_t init_q [16];
  word_t st_q   [16];
  logic [4:0] round_q;

  function automatic word_t rotl(input word_t x, input int n);
    return (x << n) | (x >> (32 - n));
  endfunction

  // One quarter-round on four words, in place.
  function automatic void qr(ref word_t s [16], input int a, input int b,
                             input int c, input int d);
    s[a] = s[a] + s[b]; s[d] = rotl(s[d] ^ s[a], 16);
    s[c] = s[c] + s[d]; s[b] = rotl(s[b] ^ s[c], 12);
    s[a] = s[a] + s[b]; s[d] = rotl(s[d] ^ s[a], 8);
    s[c] = s[c] + s[d]; s[b] = rotl(s[b] ^ s[c], 7);
  endfunction

  word_t nxt [16];
  always_comb begin
    nxt = st_q;
    if (!round_q[0]) begin        // even rounds: columns
      qr(nxt, 0, 4,  8, 12); qr(nxt, 1, 5,  9, 13);
      qr(nxt, 2, 6, 10, 14); qr(nxt, 3, 7, 11, 15);
    end else begin                // odd rounds: diagonals
      qr(nxt, 0, 5, 10, 15); qr(nxt, 1, 6, 11, 12);
      qr(nxt, 2, 7,  8, 13); qr(nxt, 3, 4,  9, 14);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy    <= 1'b0;
      valid   <= 1'b0;
      round_q <= '0;
      block   <= '0;
      for (int i = 0; i < 16; i++) begin
        init_q[i] <= '0;
        st_q[i]   <= '0;
      end
    end else begin
      valid <= 1'b0;
      if (!busy && start) begin
        init_q[0] <= 32'h61707865; init_q[1] <= 32'h3320646e;
        init_q[2] <= 32'h79622d32; init_q[3] <= 32'h6b206574;
        st_q[0]   <= 32'h61707865; st_q[1]   <= 32'h3320646e;
        st_q[2]   <= 32'h79622d32; st_q[3]   <= 32'h6b206574;
        for (int i = 0; i < 8; i++) begin
          init_q[4+i] <= key[32*i +: 32];
          st_q[4+i]   <= key[32*i +: 32];
        end
        init_q[12] <= counter; st_q[12] <= counter;
        for (int i = 0; i < 3; i++) begin
          init_q[13+i] <= nonce[32*i +: 32];
          st_q[13+i]   <= nonce[32*i +: 32];
        end
        round_q <= '0;
        busy    <= 1'b1;
      end else if (busy) begin
        if (round_q == 5'd20) begin
          for (int i = 0; i < 16; i++) block[32*i +: 32] <= st_q[i] + init_q[i];
          valid <= 1'b1;
          busy  <= 1'b0;
        end else begin
          st_q    <= nxt;
          round_q <= round_q + 5'd1;
        end
      end
    end
  end
endmodule
