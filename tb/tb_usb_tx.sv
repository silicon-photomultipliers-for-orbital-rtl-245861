// tb_usb_tx: random 64-bit words with random valid/ready on both sides;
// the byte stream must be the words, most significant byte first, and a
// word is accepted at most every 8 bytes.
module tb_usb_tx;
  logic clk = 0, rst_n = 0;
  logic [63:0] in_data = 0;
  logic in_valid = 0, in_ready;
  logic [7:0] byte_data;
  logic byte_valid, byte_ready = 0;
  logic [7:0] exp_q[$];
  int checks = 0, failures = 0, nwords = 0, nbytes = 0, streak = 0, maxstreak = 0;

  always #5 clk = ~clk;

  usb_tx #(.WORD_W(64)) dut (.*);

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 4000; i++) begin
      @(negedge clk);
      if (!in_valid || in_ready) begin
        in_valid = (i < 3000) && ($urandom % 3 != 0);
        in_data  = {$urandom, $urandom};
      end
      byte_ready = (i > 2000) ? 1'b1 : ($urandom % 4 != 0);
      @(posedge clk);
      if (byte_valid && byte_ready) begin
        check(exp_q.size() > 0 && byte_data == exp_q[0], "byte order");
        if (exp_q.size() > 0) void'(exp_q.pop_front());
        nbytes++;
        streak++;
        if (streak > maxstreak) maxstreak = streak;
      end else streak = 0;
      if (in_valid && in_ready) begin
        for (int b = 7; b >= 0; b--) exp_q.push_back(in_data[b*8 +: 8]);
        nwords++;
      end
    end
    check(exp_q.size() == 0, "all bytes sent");
    check(nbytes == 8 * nwords && nwords > 100, "byte count");
    check(maxstreak > 16, "back-to-back words at one byte per clock");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
