// tb_sync_fifo: random pushes and pops against a queue model; checks
// order, the full stall, the level and the maximum-fill register.
module tb_sync_fifo;
  localparam int W = 16, D = 8;
  logic clk = 0, rst_n = 0;
  logic [W-1:0] in_data = 0, out_data;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  logic [3:0] level, max_level;
  logic [W-1:0] q[$];
  int checks = 0, failures = 0, nfull = 0, npop = 0;

  always #5 clk = ~clk;

  sync_fifo #(.W(W), .DEPTH(D)) dut (.*);

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
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      check(int'(level) == q.size(), "level");
      check(in_ready == (q.size() < D), "in_ready");
      check(out_valid == (q.size() > 0), "out_valid");
      if (out_valid) check(out_data == q[0], "head word");
      if (!in_ready) nfull++;
      // phases: fill up, then drain, then random
      in_valid  = (i < 1000) ? ($urandom % 4 != 0) : (i < 2000) ? ($urandom % 4 == 0) : $urandom % 2;
      out_ready = (i < 1000) ? ($urandom % 4 == 0) : (i < 2000) ? ($urandom % 4 != 0) : $urandom % 2;
      in_data   = W'($urandom);
      @(posedge clk);
      if (out_valid && out_ready) begin void'(q.pop_front()); npop++; end
      if (in_valid && in_ready) q.push_back(in_data);
    end
    check(nfull > 0, "FIFO reached full");
    check(max_level == D, "max_level reached depth");
    check(npop > 300, "words popped");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
