// tb_temp_monitor: a behavioural ADC answers each conversion after a random
// delay with a value that depends on channel and sweep; checks the start-up
// sweep, the per-array averages of neighbouring sensors, sweeps on start,
// and that a start during a sweep is not lost.
module tb_temp_monitor;
  import sieca_pkg::*;
  logic clk = 0, rst_n = 0, start = 0;
  logic adc_start, adc_done;
  logic [1:0] adc_ch;
  logic [11:0] adc_data;
  logic [3:0][11:0] raw;
  logic [3:0][15:0] temps;
  logic busy;
  logic [31:0] sweeps;
  int checks = 0, failures = 0, nconv = 0;

  always #5 clk = ~clk;

  temp_monitor dut (.*);
  adc_model u_adc (.clk, .rst_n, .start(adc_start), .ch(adc_ch), .done(adc_done), .data(adc_data));

  always @(posedge clk) if (rst_n && adc_start) nconv++;

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic check_sweep(int s);
    for (int k = 0; k < 4; k++)
      check(raw[k] == u_adc.value(k, s), $sformatf("raw sensor %0d sweep %0d", k, s));
    for (int i = 0; i < 4; i++)
      check(temps[i] == 16'((u_adc.value(i, s) + u_adc.value((i + 3) % 4, s)) / 2),
            $sformatf("array %0d average sweep %0d", i, s));
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
    wait (sweeps == 1);
    @(negedge clk);
    check(nconv == 4, "start-up sweep converts four channels");
    check_sweep(0);
    repeat (50) @(negedge clk);
    check(sweeps == 1 && !busy, "no sweep without start");
    start = 1; @(negedge clk); start = 0;
    repeat (3) @(negedge clk);
    start = 1; @(negedge clk); start = 0;   // arrives during the sweep
    wait (sweeps == 2);
    @(negedge clk);
    check_sweep(1);
    wait (sweeps == 3);
    @(negedge clk);
    check_sweep(2);
    repeat (200) @(negedge clk);
    check(sweeps == 3 && nconv == 12, "exactly one extra sweep for the pending start");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
