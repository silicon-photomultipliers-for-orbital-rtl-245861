// tb_sieca_top: end-to-end test of sieca_top at reduced size (32 channels, 64-GTU ring,
// 16-word FIFO, 40-clock GTU, 8-GTU events).
//
// Random photon pulses are driven on every ASIC trigger line and counted per
// GTU by the testbench. The host programs the run settings and the ASIC
// slow control, a PPS pulse re-aligns the GTU, external triggers start
// events (one arrives while another is pending and must be dropped), and the
// USB side takes bytes with random back-pressure so the event FIFO fills.
// Every byte of every packet is checked against the testbench's own counts;
// the temperatures in each header against the ADC model; the slow-control
// stream against the written strings. Each mechanism must occur at least once.
module tb_sieca_top;
  import sieca_pkg::*;
  localparam int NCH   = 32;
  localparam int DG    = 64;
  localparam int FIFOW = 16;
  localparam int SCL   = 40;
  localparam int SCH   = 2;
  localparam int GLEN  = 40;
  localparam int DEP   = 8;
  localparam int LAT   = 3;
  localparam int WPG   = NCH * CNT_W / WORD_W;
  localparam int NW    = (SCL + 31) / 32;
  localparam int MN    = 4096;                 // model depth in GTU
  localparam int TRIG_GTU[3] = '{20, 90, 150};
  localparam int NEV   = 3;

  logic clk = 0, rst_n = 0;
  logic [NCH-1:0] asic_trig = '0;
  logic ext_trig = 0, pps = 0;
  logic host_wr_en = 0;
  logic [9:0] host_wr_addr = 0;
  logic [31:0] host_wr_data = 0;
  logic [3:0] host_rd_addr = 0;
  logic [31:0] host_rd_data;
  logic [7:0] usb_data;
  logic usb_valid, usb_ready = 0;
  logic adc_start, adc_done;
  logic [1:0] adc_ch;
  logic [11:0] adc_data;
  logic sc_clk, sc_load, sc_busy;
  logic [N_ASIC-1:0] sc_din;
  logic gtu_tick;
  logic [31:0] gtu_num;

  always #5 clk = ~clk;

  sieca_top #(.NCH(NCH), .DEPTH_GTU(DG), .FIFO_WDS(FIFOW), .SC_LEN(SCL), .SC_HALF(SCH)) dut (.*);
  adc_model u_adc (.clk, .rst_n, .start(adc_start), .ch(adc_ch), .done(adc_done), .data(adc_data));

  int checks = 0, failures = 0;
  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 12) $display("FAIL: %s", msg); end
  endtask

  // ---------------- photon pulses and the count model ----------------
  int unsigned model[MN][NCH];
  int busy[NCH];
  int phase = 0;
  bit seen_tick = 0, quiet = 0, pulses_on = 1;
  int cyc = 0, last_tick = -1, n_short_gtu = 0;

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && gtu_tick) begin
      phase <= 0;
      seen_tick <= 1;
      if (last_tick >= 0 && cyc - last_tick < GLEN) n_short_gtu++;
      last_tick <= cyc;
    end else phase <= phase + 1;
  end

  always @(negedge clk) if (rst_n) begin
    for (int c = 0; c < NCH; c++) begin
      if (busy[c] > 0) begin
        busy[c]--;
        if (busy[c] == 1) asic_trig[c] = 1'b0;
      end else if (seen_tick && !quiet && pulses_on && phase >= 1 && phase <= GLEN - 6 &&
                   ($urandom % 16 == 0)) begin
        asic_trig[c] = 1'b1;
        busy[c] = 3;
        model[gtu_num % MN][c]++;
      end
    end
  end

  // ---------------- USB byte sink and packet checker ----------------
  logic [63:0] wq[$];
  logic [63:0] acc;
  int nb = 0, n_usb_stall = 0, n_fifo_full = 0, n_packets = 0, n_wrap = 0;
  bit drain_fast = 0;

  always @(posedge clk) begin
    if (rst_n && usb_valid && usb_ready) begin
      acc = {acc[55:0], usb_data};
      nb++;
      if (nb % 8 == 0) wq.push_back(acc);
    end
    if (rst_n && usb_valid && !usb_ready) n_usb_stall++;
    if (rst_n && dut.pk_valid && !dut.pk_ready) n_fifo_full++;
  end
  always @(negedge clk) usb_ready = drain_fast ? 1'b1 : ($urandom % 2 == 0);

  task automatic check_packet(int ev);
    logic [63:0] w;
    logic [31:0] tg, fg, cs;
    int d;
    wait (wq.size() >= 3);
    w = wq.pop_front();
    check(w[63:48] == HDR_MAGIC, "header magic");
    check(w[31:0] == 32'(ev), $sformatf("event number %0d", w[31:0]));
    d = int'(w[42:32]);
    check(d == DEP, "event depth in header");
    w = wq.pop_front();
    tg = w[63:32]; fg = w[31:0];
    check(tg == 32'(TRIG_GTU[ev]) || tg == 32'(TRIG_GTU[ev] + 1), $sformatf("trigger GTU %0d", tg));
    check(fg == tg + 32'(LAT) - 32'(DEP) + 1, "first GTU of window");
    if (tg >= 32'(DG)) n_wrap++;
    w = wq.pop_front();
    for (int i = 0; i < 4; i++)
      check(w[i*16 +: 16] == 16'((u_adc.value(i, ev + 1) + u_adc.value((i + 3) % 4, ev + 1)) / 2),
            $sformatf("array %0d temperature", i));
    cs = 0;
    for (int g = 0; g < d; g++)
      for (int k = 0; k < WPG; k++) begin
        wait (wq.size() >= 1);
        w = wq.pop_front();
        cs ^= w[63:32] ^ w[31:0];
        for (int b = 0; b < 8; b++) begin
          int unsigned m;
          m = model[(fg + 32'(g)) % MN][k * 8 + b];
          if (m > 255) m = 255;
          check(w[b*8 +: 8] == 8'(m), $sformatf("ev %0d GTU %0d ch %0d: got %0d want %0d",
                ev, fg + 32'(g), k * 8 + b, w[b*8 +: 8], m));
        end
      end
    wait (wq.size() >= 1);
    w = wq.pop_front();
    check(w == {FTR_MAGIC, 16'h0, cs}, "footer and checksum");
    n_packets++;
  endtask

  // ---------------- slow-control capture ----------------
  logic [N_ASIC-1:0][NW*32-1:0] sc_img;
  logic [SCL-1:0] sc_rx[N_ASIC];
  int sc_bits = 0, n_sc_load = 0;
  logic sc_clk_d = 0, sc_load_d = 0;
  always @(posedge clk) begin
    sc_clk_d <= sc_clk;
    sc_load_d <= sc_load;
    if (rst_n && sc_clk && !sc_clk_d) begin
      for (int a = 0; a < N_ASIC; a++) if (sc_bits < SCL) sc_rx[a][sc_bits] = sc_din[a];
      sc_bits++;
    end
    if (rst_n && sc_load && !sc_load_d) n_sc_load++;
  end

  // ---------------- host access ----------------
  task automatic host_wr(int a, int d);
    @(negedge clk);
    host_wr_en = 1; host_wr_addr = 10'(a); host_wr_data = 32'(d);
    @(negedge clk);
    host_wr_en = 0;
  endtask
  task automatic host_rd(int a, output logic [31:0] v);
    @(negedge clk);
    host_rd_addr = 4'(a);
    #1 v = host_rd_data;
  endtask

  task automatic pulse_ext_trig();
    @(negedge clk) ext_trig = 1;
    repeat (4) @(negedge clk);
    ext_trig = 0;
  endtask

  initial begin
    #(5000000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] v;
    foreach (model[i, c]) model[i][c] = 0;
    foreach (busy[c]) busy[c] = 0;
    repeat (4) @(posedge clk);
    rst_n = 1;
    host_wr(1, GLEN);
    host_wr(2, DEP);
    host_wr(3, LAT);
    // slow control: random strings for all ASICs, then load
    for (int a = 0; a < N_ASIC; a++)
      for (int j = 0; j < NW; j++) begin
        sc_img[a][j*32 +: 32] = $urandom;
        host_wr(512 + a * NW + j, int'(sc_img[a][j*32 +: 32]));
      end
    host_wr(0, 3);
    // PPS re-alignment, with no pulses started around it
    wait (gtu_num == 6);
    quiet = 1;
    repeat (GLEN / 2) @(negedge clk);
    pps = 1;
    repeat (4) @(negedge clk);
    pps = 0;
    wait (gtu_num == 9);
    quiet = 0;
    // events
    fork
      for (int e = 0; e < NEV; e++) check_packet(e);
      for (int e = 0; e < NEV; e++) begin
        wait (gtu_num == TRIG_GTU[e]);
        repeat (5) @(negedge clk);
        pulse_ext_trig();
        if (e == 0) begin
          repeat (GLEN) @(negedge clk);
          pulse_ext_trig();                  // arrives while event 0 waits
        end
      end
    join
    @(negedge clk);
    check(wq.size() == 0, "no extra words after the packets");
    for (int a = 0; a < N_ASIC; a++) check(sc_rx[a] == sc_img[a][SCL-1:0], $sformatf("slow control ASIC %0d", a));
    host_rd(8, v);  check(v == NEV, "status: accepted triggers");
    host_rd(9, v);  check(v == 1, "status: dropped triggers");
    host_rd(10, v); check(v == NEV, "status: packets");
    host_rd(12, v); check(v == NEV + 1, "status: temperature sweeps");
    host_rd(11, v); check(v == FIFOW, "status: FIFO reached full");
    $display("mechanisms: packets=%0d dropped_trigger=1 pps_short_gtu=%0d fifo_full_cycles=%0d usb_stall_cycles=%0d ring_wrap_events=%0d sc_loads=%0d",
             n_packets, n_short_gtu, n_fifo_full, n_usb_stall, n_wrap, n_sc_load);
    check(n_packets == NEV, "all packets received");
    check(n_short_gtu == 1, "PPS re-aligned one GTU");
    check(n_fifo_full > 0, "FIFO full stall happened");
    check(n_usb_stall > 0, "USB back-pressure happened");
    check(n_wrap > 0, "an event read after the ring buffer wrapped");
    check(n_sc_load == 1, "ASIC slow control loaded");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
