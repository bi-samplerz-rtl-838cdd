// tb_refill_control: random reads of 1..10 bytes against a byte-queue
// model, with ChaCha-like blocks (random 64-byte words) delivered a random
// time after each refill request. Checks the visible bytes, the fill level
// and that requests appear whenever 64 bytes of space are free, and a flush.
//
// The buffer organisation checked here is this design's own; the
// published design only names the refill logic.
module tb_refill_control;
  logic clk = 1'b0, rst_n = 1'b0;
  logic flush = 1'b0, rd = 1'b0, blk_valid = 1'b0;
  logic [3:0] rd_n = '0;
  logic [79:0] rdata;
  logic [7:0] level;
  logic refill_req;
  logic [511:0] blk;
  int checks = 0, failures = 0;
  byte unsigned q [$];

  refill_control dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string s);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", s); end
  endtask

  int delay = -1;
  initial begin
    int n_blk = 0;
    bit just_delivered = 1'b0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int cyc = 0; cyc < 5000; cyc++) begin
      @(negedge clk);
      // compare the visible state with the model
      chk(level == q.size(), $sformatf("level %0d vs %0d", level, q.size()));
      for (int i = 0; i < 10 && i < q.size(); i++)
        chk(rdata[8*i +: 8] == q[i], $sformatf("byte %0d", i));
      if (q.size() <= 64 && !just_delivered)
        chk(refill_req, "request when 64 bytes are free");
      if (cyc == 2500) begin
        flush = 1'b1; q.delete(); delay = -1;
        @(negedge clk);
        flush = 1'b0;
        chk(level == 0 && !refill_req, "flush empties");
        continue;
      end
      // drive a read
      rd = 1'b0; blk_valid = 1'b0;
      if (q.size() > 0 && ($urandom % 3 != 0)) begin
        rd_n = 4'(1 + $urandom % ((q.size() < 10) ? q.size() : 10));
        rd = 1'b1;
      end
      // block delivery
      if (refill_req && delay < 0) delay = $urandom % 30;
      if (delay == 0) begin
        for (int i = 0; i < 16; i++) blk[32*i +: 32] = $urandom;
        blk_valid = 1'b1; delay = -1; n_blk++;
      end else if (delay > 0) delay--;
      @(posedge clk);
      #1;
      if (rd) repeat (int'(rd_n)) void'(q.pop_front());
      if (blk_valid) for (int i = 0; i < 64; i++) q.push_back(blk[8*i +: 8]);
      just_delivered = blk_valid;
      rd = 1'b0; blk_valid = 1'b0;
    end
    chk(n_blk > 50, "blocks delivered");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
