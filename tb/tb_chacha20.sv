// tb_chacha20: checks the ChaCha20 block function against the RFC 8439
// block-function test vector (section 2.3.2), the all-zero-key keystream
// block, and a third key/counter whose expected block was computed with an
// independent software model of RFC 8439. Also checks that each block takes
// exactly 22 cycles from start to valid.
//
// The expected blocks are RFC 8439's; the 22-cycle timing is this design's
// own.
module tb_chacha20;
  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  logic [255:0] key;
  logic [31:0]  counter;
  logic [95:0]  nonce;
  logic busy, valid;
  logic [511:0] block;
  int checks = 0, failures = 0;

  chacha20 dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input logic [255:0] k, input logic [31:0] c, input logic [95:0] n,
                     input logic [31:0] exp_w [16], input string nm);
    int cyc;
    @(negedge clk);
    key = k; counter = c; nonce = n; start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    cyc = 1;
    while (!valid) begin @(negedge clk); cyc++; end
    checks++;
    if (cyc != 22) begin failures++; $display("FAIL %s latency %0d", nm, cyc); end
    for (int i = 0; i < 16; i++) begin
      checks++;
      if (block[32*i +: 32] !== exp_w[i]) begin
        failures++;
        $display("FAIL %s word %0d: %08x expected %08x", nm, i, block[32*i +: 32], exp_w[i]);
      end
    end
  endtask

  initial begin
    logic [255:0] k;
    logic [31:0] e1 [16] = '{32'he4e7f110, 32'h15593bd1, 32'h1fdd0f50, 32'hc47120a3,
                             32'hc7f4d1c7, 32'h0368c033, 32'h9aaa2204, 32'h4e6cd4c3,
                             32'h466482d2, 32'h09aa9f07, 32'h05d7c214, 32'ha2028bd9,
                             32'hd19c12b5, 32'hb94e16de, 32'he883d0cb, 32'h4e3c50a2};
    logic [31:0] e2 [16] = '{32'hade0b876, 32'h903df1a0, 32'he56a5d40, 32'h28bd8653,
                             32'hb819d2bd, 32'h1aed8da0, 32'hccef36a8, 32'hc70d778b,
                             32'h7c5941da, 32'h8d485751, 32'h3fe02477, 32'h374ad8b8,
                             32'hf4b8436a, 32'h1ca11815, 32'h69b687c3, 32'h8665eeb2};
    logic [31:0] e3 [16] = '{32'hdc619d66, 32'h70592bd0, 32'h4ea37692, 32'hbd9fdc74,
                             32'h8fe5f514, 32'h632aac4b, 32'h0bd24405, 32'h5a3d01d9,
                             32'h5ed7165e, 32'h5f9e7e1d, 32'h36eda2e8, 32'hfb87c1b9,
                             32'h8d15e570, 32'h149f0beb, 32'h8f0eda4b, 32'h9008a3c2};
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    // key bytes 00..1f, little-endian words
    for (int i = 0; i < 32; i++) k[8*i +: 8] = 8'(i);
    run(k, 32'd1, {32'h0, 32'h4a000000, 32'h09000000}, e1, "rfc8439");
    run('0, 32'd0, '0, e2, "zero key");
    for (int i = 0; i < 8; i++) k[32*i +: 32] = 32'h01234567 * (i + 1);
    run(k, 32'd5, '0, e3, "key3");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
