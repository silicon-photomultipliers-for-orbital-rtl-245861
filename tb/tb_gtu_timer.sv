// tb_gtu_timer: checks GTU period, numbering, run gating, minimum length
// and PPS re-alignment of gtu_timer.
module tb_gtu_timer;
  logic clk = 0, rst_n = 0, run = 0, pps = 0;
  logic [15:0] gtu_len = 16'd50;
  logic gtu_tick, pps_seen;
  logic [31:0] gtu_num;
  int checks = 0, failures = 0;
  int cyc = 0, last_tick = -1;
  int intervals[$];

  always #5 clk = ~clk;

  gtu_timer #(.MIN_LEN(20)) dut (.*);

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (gtu_tick) begin
      if (last_tick >= 0) intervals.push_back(cyc - last_tick);
      last_tick <= cyc;
    end
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (10) @(posedge clk);
    check(gtu_num == 0 && intervals.size() == 0, "no ticks while run is low");
    @(negedge clk) run = 1;
    repeat (50 * 6 + 5) @(posedge clk);
    #1;
    check(intervals.size() >= 4, "ticks while running");
    foreach (intervals[i]) check(intervals[i] == 50, $sformatf("interval %0d = %0d", i, intervals[i]));
    check(gtu_num == 6, $sformatf("gtu_num after 6 GTU = %0d", gtu_num));
    // minimum length
    intervals.delete();
    @(negedge clk) gtu_len = 5;
    repeat (20 * 5) @(posedge clk);
    #1;
    for (int i = 1; i < intervals.size(); i++) check(intervals[i] == 20, $sformatf("min-length interval %0d", intervals[i]));
    // PPS re-alignment: pulse in the middle of a GTU
    @(negedge clk) gtu_len = 50;
    repeat (120) @(posedge clk);
    wait (gtu_tick); @(posedge clk);
    repeat (17) @(posedge clk);
    intervals.delete();
    @(negedge clk) pps = 1;
    repeat (4) @(negedge clk);
    pps = 0;
    repeat (50 * 3 + 10) @(posedge clk);
    #1;
    check(intervals.size() >= 3, "ticks after PPS");
    if (intervals.size() >= 3) begin
      check(intervals[0] >= 18 && intervals[0] <= 22, $sformatf("truncated GTU at PPS = %0d", intervals[0]));
      check(intervals[1] == 50 && intervals[2] == 50, "GTU length after PPS");
    end
    // stop
    @(negedge clk) run = 0;
    intervals.delete();
    repeat (200) @(posedge clk);
    #1;
    check(intervals.size() == 0, "no ticks after run cleared");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
