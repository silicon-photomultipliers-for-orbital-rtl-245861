// tb_pulse_counter: random pulses on 16 channels, 3-bit counters; each
// frame is compared with counts kept by the testbench, including
// saturation and counting in the tick cycle itself.
module tb_pulse_counter;
  localparam int NCH = 16, CW = 3, L = 40;
  logic clk = 0, rst_n = 0, run = 1, gtu_tick;
  logic [NCH-1:0] trig_in = '0;
  logic [NCH-1:0][CW-1:0] frame;
  logic frame_valid;
  int checks = 0, failures = 0;
  int phase = 0, gtu = 0, nframes = 0, nsat = 0;
  int model[200][NCH];
  int busy[NCH];

  always #5 clk = ~clk;
  assign gtu_tick = rst_n && (phase == L - 1);

  pulse_counter #(.N_CH(NCH), .CNT_W(CW)) dut (.*);

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    phase <= (phase == L - 1) ? 0 : phase + 1;
    if (phase == L - 1) gtu <= gtu + 1;
  end

  // drive pulses on the falling edge; a rising edge driven at phase p is
  // counted three clocks later, so start pulses only where that stays in
  // the same GTU. Channel 0 pulses as fast as it can in some GTUs.
  always @(negedge clk) if (rst_n && gtu < 150) begin
    for (int c = 0; c < NCH; c++) begin
      if (busy[c] > 0) begin
        busy[c]--;
        if (busy[c] == 1) trig_in[c] = 1'b0;
      end else if (phase >= 1 && phase <= L - 6 &&
                   (($urandom % 4 == 0) || (c == 0 && gtu % 3 == 0))) begin
        trig_in[c] = 1'b1;
        busy[c] = 3;
        model[gtu][c]++;
      end
    end
  end

  always @(posedge clk) if (frame_valid) begin
    // frame belongs to GTU gtu-1 (gtu already advanced)
    for (int c = 0; c < NCH; c++) begin
      int exp_c;
      exp_c = model[gtu - 1][c] > 7 ? 7 : model[gtu - 1][c];
      if (model[gtu - 1][c] > 7) nsat++;
      check(int'(frame[c]) == exp_c,
            $sformatf("gtu %0d ch %0d: got %0d want %0d", gtu - 1, c, frame[c], exp_c));
    end
    nframes++;
  end

  initial begin
    foreach (model[i, c]) model[i][c] = 0;
    foreach (busy[c]) busy[c] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (gtu == 152);
    @(posedge clk);
    check(nframes >= 150, "frames delivered");
    check(nsat > 0, "saturation exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
