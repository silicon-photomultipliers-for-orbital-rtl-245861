// tb_illum_scan: the single-pixel illumination measurement used to calibrate
// the camera, run on sieca_top with every parameter at its default.
//
// One pixel (channel 37) sees a light pulse every 1 us (1 MHz, 100 clocks),
// and every pixel fires dark pulses at random with a mean rate of 0.5 MHz
// (probability 1/200 per clock). Ten external triggers, 200 GTU apart, each
// read out a 128-GTU event over an always-ready USB link. Every byte of
// every packet is compared with the testbench's own per-GTU counts, which
// assign each pulse to the GTU in which the counter will see it (three
// clocks after the line rises). The rates are then checked against what the
// setup implies: 2.5 light pulses per 2.5 us GTU on the lit pixel, 1.25 dark
// pulses per GTU everywhere.
module tb_illum_scan;
  import sieca_pkg::*;
  localparam int NEV = 10, LIT = 37, GLEN = GTU_CYCLES, WPG = N_CH * CNT_W / WORD_W;
  localparam int MN = 4096;

  logic clk = 0, rst_n = 0;
  logic [N_CH-1:0] asic_trig = '0;
  logic ext_trig = 0, pps = 0;
  logic host_wr_en = 0;
  logic [9:0] host_wr_addr = 0;
  logic [31:0] host_wr_data = 0;
  logic [3:0] host_rd_addr = 0;
  logic [31:0] host_rd_data;
  logic [7:0] usb_data;
  logic usb_valid, usb_ready = 1;
  logic adc_start, adc_done;
  logic [1:0] adc_ch;
  logic [11:0] adc_data;
  logic sc_clk, sc_load, sc_busy;
  logic [N_ASIC-1:0] sc_din;
  logic gtu_tick;
  logic [31:0] gtu_num;

  always #5 clk = ~clk;

  sieca_top dut (.*);
  adc_model u_adc (.clk, .rst_n, .start(adc_start), .ch(adc_ch), .done(adc_done), .data(adc_data));

  int checks = 0, failures = 0;
  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 12) $display("FAIL: %s", msg); end
  endtask

  int unsigned model[MN][N_CH];
  int busy[N_CH];
  int phase = 0, cyc = 0;
  bit seen_tick = 0;

  always @(posedge clk) if (rst_n) begin
    cyc <= cyc + 1;
    if (gtu_tick) begin phase <= 0; seen_tick <= 1; end
    else phase <= phase + 1;
  end

  // a line driven high in a clock of GTU phase p is counted in this GTU if
  // p <= GLEN-3, otherwise in the next one
  always @(negedge clk) if (rst_n && seen_tick) begin
    for (int c = 0; c < N_CH; c++) begin
      if (busy[c] > 0) begin
        busy[c]--;
        if (busy[c] == 1) asic_trig[c] = 1'b0;
      end else if ((c == LIT && cyc % 100 == 0) || ($urandom % 200 == 0)) begin
        asic_trig[c] = 1'b1;
        busy[c] = 3;
        model[(phase <= GLEN - 3 ? gtu_num : gtu_num + 1) % MN][c]++;
      end
    end
  end

  logic [63:0] wq[$];
  logic [63:0] acc;
  int nb = 0;
  always @(posedge clk) if (rst_n && usb_valid && usb_ready) begin
    acc = {acc[55:0], usb_data};
    nb++;
    if (nb % 8 == 0) wq.push_back(acc);
  end

  longint sum_lit = 0, sum_dark = 0, n_gtu = 0;

  task automatic check_packet(int ev);
    logic [63:0] w;
    logic [31:0] fg;
    wait (wq.size() >= 3);
    w = wq.pop_front();
    check(w[63:48] == HDR_MAGIC && w[31:0] == 32'(ev) && w[42:32] == 11'(EVENT_GTUS), "header 0");
    w = wq.pop_front();
    fg = w[31:0];
    check(fg == w[63:32] + 32'(TRIG_LAT) - 32'(EVENT_GTUS) + 1, "window");
    w = wq.pop_front();
    for (int g = 0; g < EVENT_GTUS; g++) begin
      for (int k = 0; k < WPG; k++) begin
        wait (wq.size() >= 1);
        w = wq.pop_front();
        for (int b = 0; b < 8; b++) begin
          int c;
          int unsigned m;
          c = k * 8 + b;
          m = model[(fg + 32'(g)) % MN][c];
          check(w[b*8 +: 8] == 8'(m), $sformatf("ev %0d GTU %0d ch %0d: got %0d want %0d", ev, fg + 32'(g), c, w[b*8 +: 8], m));
          if (c == LIT) sum_lit += longint'(w[b*8 +: 8]);
          else sum_dark += longint'(w[b*8 +: 8]);
        end
      end
      n_gtu++;
    end
    wait (wq.size() >= 1);
    w = wq.pop_front();
    check(w[63:48] == FTR_MAGIC, "footer");
  endtask

  initial begin
    #(2000000000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real lit_rate, dark_rate;
    foreach (model[i, c]) model[i][c] = 0;
    foreach (busy[c]) busy[c] = 0;
    repeat (4) @(posedge clk);
    rst_n = 1;
    fork
      for (int e = 0; e < NEV; e++) check_packet(e);
      for (int e = 0; e < NEV; e++) begin
        wait (gtu_num == 32'(150 + 200 * e));
        repeat (20) @(negedge clk);
        ext_trig = 1;
        repeat (4) @(negedge clk);
        ext_trig = 0;
      end
    join
    lit_rate  = real'(sum_lit) / real'(n_gtu);
    dark_rate = real'(sum_dark) / real'(n_gtu) / real'(N_CH - 1);
    $display("illuminated pixel: %0.3f pulses/GTU, dark pixels: %0.3f pulses/GTU over %0d GTU", lit_rate, dark_rate, n_gtu);
    check(lit_rate > 3.45 && lit_rate < 4.05, "lit pixel: 2.5 light + 1.25 dark pulses per GTU");
    check(dark_rate > 1.15 && dark_rate < 1.35, "dark pixels: 1.25 pulses per GTU");
    check(n_gtu == NEV * EVENT_GTUS, "all GTUs of all events received");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
