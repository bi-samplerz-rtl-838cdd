// refill_control: random byte buffer of one sampling datapath.
//
// The architecture gives each datapath a refill_control unit that keeps a
// supply of ChaCha20 output ready for the BaseSampler, the sign bit and the
// byte-serial Bernoulli comparison; it names the unit and its read/rdm
// handshake but not its insides. This version is a byte FIFO kept as a
// shift register of BUF_BYTES bytes: the oldest byte is at the bottom,
// readers see the oldest RD_MAX bytes at once on `rdata` and remove `rd_n`
// of them per cycle, and a new 64-byte ChaCha20 block is appended above the
// remaining bytes. A refill is requested (`refill_req`) whenever at least
// 64 free bytes remain and no block is on its way; the request is held
// until `blk_valid` delivers the block. Keystream byte order is preserved.
//
// Interface: `level` is the number of valid bytes. With `rd` high, `rd_n`
// bytes (1..RD_MAX, at most `level`) are consumed at the clock edge; the
// bytes are rdata[7:0] (oldest) upwards. `blk_valid` with `blk` writes a
// block in the same cycle. `flush` empties the buffer (used on a reseed).
module refill_control #(
  parameter int BUF_BYTES = 128,
  parameter int RD_MAX    = 10
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  flush,
  input  logic                  rd,
  input  logic [3:0]            rd_n,
  output logic [8*RD_MAX-1:0]   rdata,
  output logic [7:0]            level,
  output logic                  refill_req,
  input  logic                  blk_valid,
  input  logic [511:0]          blk
);
  logic [8*BUF_BYTES-1:0] buf_q;
  logic [7:0]             level_q;
  logic                   pending_q;

  assign rdata      = buf_q[8*RD_MAX-1:0];
  assign level      = level_q;
  assign refill_req = pending_q;

  logic [8*BUF_BYTES-1:0] shifted;
  logic [7:0]             after_rd;
  always_comb begin
    shifted  = rd ? (buf_q >> (8 * rd_n)) : buf_q;
    after_rd = rd ? level_q - 8'(rd_n) : level_q;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      buf_q     <= '0;
      level_q   <= '0;
      pending_q <= 1'b0;
    end else if (flush) begin
      buf_q     <= '0;
      level_q   <= '0;
      pending_q <= 1'b0;
    end else begin
      if (blk_valid) begin
        buf_q   <= shifted | ({{(8*BUF_BYTES-512){1'b0}}, blk} << (8 * after_rd));
        level_q <= after_rd + 8'd64;
        pending_q <= 1'b0;
      end else begin
        buf_q   <= shifted;
        level_q <= after_rd;
        if (!pending_q && (int'(after_rd) + 64 <= BUF_BYTES)) pending_q <= 1'b1;
      end
    end
  end

  // A reader may not take more bytes than are held, and blocks only arrive
  // when they were asked for.
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n)
    rd |-> (rd_n != 0 && 8'(rd_n) <= level_q && int'(rd_n) <= RD_MAX));
  a_no_unasked_block: assert property (@(posedge clk) disable iff (!rst_n)
    blk_valid |-> pending_q);
endmodule
