// tb_trigger_ctrl: GTU numbers and ring-buffer progress are modelled by the
// testbench; checks the readout window, its timing (request only once the
// last bin is stored), event numbering, temperature start, dropped
// triggers and the request hold under back-pressure.
module tb_trigger_ctrl;
  import sieca_pkg::*;
  localparam int L = 20;
  logic clk = 0, rst_n = 0, run = 1, trig_in = 0;
  logic [10:0] depth = 11'd16, latency = 11'd5;
  logic [31:0] gtu_num = 0, last_gtu = 0;
  logic last_valid = 0;
  readout_req_t req;
  logic req_valid, req_ready = 0, temp_start;
  logic [31:0] trig_accepted, trig_dropped;
  int checks = 0, failures = 0, phase = 0, ntemp = 0;

  always #5 clk = ~clk;

  trigger_ctrl dut (.*);

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // GTU of L cycles; the ring buffer reports a GTU stored 10 cycles after it ends
  always @(posedge clk) if (rst_n) begin
    phase <= (phase == L - 1) ? 0 : phase + 1;
    if (phase == L - 1) gtu_num <= gtu_num + 1;
    if (phase == 9 && gtu_num > 0) begin last_gtu <= gtu_num - 1; last_valid <= 1; end
    if (temp_start) ntemp <= ntemp + 1;
  end

  // a request must never come before its last bin is stored
  always @(posedge clk) if (rst_n && req_valid)
    check(last_valid && $signed(last_gtu - (req.trig_gtu + 32'(latency))) >= 0, "request after last bin stored");

  task automatic pulse_trig();
    @(negedge clk) trig_in = 1;
    repeat (3) @(negedge clk);
    trig_in = 0;
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int tg;
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (gtu_num == 30);
    repeat (5) @(posedge clk);
    tg = gtu_num;
    pulse_trig();
    repeat (3) @(negedge clk);
    check(ntemp == 1, "temperature start after trigger");
    check(trig_accepted == 1, "trigger accepted");
    // second trigger while waiting: dropped
    repeat (20) @(negedge clk);
    pulse_trig();
    check(trig_dropped == 1, "trigger during wait dropped");
    wait (req_valid);
    #1;
    check(gtu_num == tg + 5 + 1, $sformatf("request in GTU %0d (trigger GTU %0d)", gtu_num, tg));
    check(req.trig_gtu == tg, "trig_gtu");
    check(req.first_gtu == tg + 5 - 16 + 1, "first_gtu");
    check(req.depth == 16 && req.event_num == 0, "depth and event number");
    // hold for a while: request must stay
    repeat (30) @(negedge clk);
    check(req_valid && req.trig_gtu == tg, "request held while not ready");
    req_ready = 1;
    @(negedge clk);
    req_ready = 0;
    check(!req_valid, "request released after handshake");
    // second event with other settings
    depth = 11'd4; latency = 11'd0;
    repeat (7) @(negedge clk);
    tg = gtu_num;
    pulse_trig();
    req_ready = 1;
    wait (req_valid);
    #1;
    check(req.event_num == 1 && req.first_gtu == tg - 3 && req.depth == 4, "second event window");
    @(negedge clk);
    // run low: triggers ignored
    run = 0;
    pulse_trig();
    repeat (100) @(negedge clk);
    check(!req_valid && trig_accepted == 2, "no trigger while not running");
    check(ntemp == 2, "one temperature start per accepted trigger");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
