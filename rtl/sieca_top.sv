// sieca_top: FPGA readout of the 256-channel SiPM camera.
//
// The camera images air-shower fluorescence with four 64-channel SiPM
// arrays read by eight 32-channel front-end ASICs. Each ASIC channel gives a
// digital trigger line pulsing once per detected photo-electron signal above
// threshold. This FPGA logic turns those 256 lines into photon-count images:
//
//   gtu_timer      GTU of GTU_LEN clocks (2.5 us), PPS re-alignment
//   pulse_counter  counts pulses per channel per GTU, no dead time
//   ring_buffer    keeps the last 1024 GTU frames, oldest overwritten
//   trigger_ctrl   external trigger -> wait `latency` GTUs -> readout request
//   packet_builder reads `depth` bins (128 by default), adds header/footer
//   sync_fifo      queues packet words for the host link
//   usb_tx         splits words into bytes for the USB interface chip
//   temp_monitor   reads the 4 temperature sensors at start-up and after
//                  each trigger, averages neighbours per array
//   config_regs    GTU length, depth, latency, run; status read-back
//   asic_sc_loader shifts slow-control settings into the 8 ASICs
//
// Host access: one write bus, `host_wr_addr[9]` = 0 selects config_regs
// (low 4 bits), 1 selects the ASIC slow-control store (low 9 bits). Reads
// (`host_rd_addr`) return config_regs words; status words 8..15 are
// accepted triggers, dropped triggers, packets sent, FIFO maximum fill,
// temperature sweeps, arrays 0/1 and 2/3 temperatures, current GTU number.
//
// The front-end ASICs, SiPMs, bias generators, temperature ADC and USB chip
// are outside the FPGA; their signals are ports. The block split follows the
// functions the camera description gives the FPGA (timing, counting,
// trigger processing, packet generation, initialisation, temperature);
// widths, encodings, handshakes and the packet layout are this design's.
module sieca_top
  import sieca_pkg::*;
#(
  parameter int unsigned NCH       = N_CH,
  parameter int unsigned DEPTH_GTU = RING_GTUS,
  parameter int unsigned FIFO_WDS  = 1024,
  parameter int unsigned SC_LEN    = SC_BITS,
  parameter int unsigned SC_HALF   = 5,
  localparam int unsigned WPG      = NCH * CNT_W / WORD_W
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // front-end ASIC trigger lines and external signals
  input  logic [NCH-1:0]          asic_trig,
  input  logic                    ext_trig,
  input  logic                    pps,
  // host register access
  input  logic                    host_wr_en,
  input  logic [9:0]              host_wr_addr,
  input  logic [31:0]             host_wr_data,
  input  logic [3:0]              host_rd_addr,
  output logic [31:0]             host_rd_data,
  // USB interface chip byte stream
  output logic [7:0]              usb_data,
  output logic                    usb_valid,
  input  logic                    usb_ready,
  // temperature ADC
  output logic                    adc_start,
  output logic [1:0]              adc_ch,
  input  logic                    adc_done,
  input  logic [TEMP_W-1:0]       adc_data,
  // ASIC slow control
  output logic                    sc_clk,
  output logic [N_ASIC-1:0]       sc_din,
  output logic                    sc_load,
  output logic                    sc_busy,
  // status
  output logic                    gtu_tick,
  output logic [31:0]             gtu_num
);

  cfg_t                        cfg;
  logic                        sc_start;
  logic [7:0][31:0]            status;
  logic [NCH-1:0][CNT_W-1:0]   frame;
  logic                        frame_valid;
  logic                        pps_seen;
  logic [31:0]                 last_gtu;
  logic                        last_valid;
  logic                        rd_en;
  logic [31:0]                 rd_gtu;
  logic [$clog2(WPG)-1:0]      rd_word;
  logic [WORD_W-1:0]           rd_data;
  logic                        rd_valid;
  readout_req_t                req;
  logic                        req_valid, req_ready;
  logic                        temp_start;
  logic [31:0]                 trig_accepted, trig_dropped, packets_done, sweeps;
  logic [N_ARRAY-1:0][15:0]    temps;
  logic [N_TSENS-1:0][TEMP_W-1:0] temps_raw;
  logic                        temp_busy;
  logic [WORD_W-1:0]           pk_data, fifo_data;
  logic                        pk_valid, pk_ready, fifo_valid, fifo_ready;
  logic [$clog2(FIFO_WDS):0]   fifo_level, fifo_max;
  logic                        sc_done;

  config_regs #(.MAX_DEPTH(DEPTH_GTU)) u_cfg (
    .clk, .rst_n,
    .wr_en   (host_wr_en && !host_wr_addr[9]),
    .wr_addr (host_wr_addr[3:0]),
    .wr_data (host_wr_data),
    .rd_addr (host_rd_addr),
    .rd_data (host_rd_data),
    .status,
    .cfg,
    .sc_start
  );

  assign status[0] = trig_accepted;
  assign status[1] = trig_dropped;
  assign status[2] = packets_done;
  assign status[3] = 32'(fifo_max);
  assign status[4] = sweeps;
  assign status[5] = {temps[1], temps[0]};
  assign status[6] = {temps[3], temps[2]};
  assign status[7] = gtu_num;

  gtu_timer #(.MIN_LEN(WPG + 8)) u_gtu (
    .clk, .rst_n,
    .run      (cfg.run),
    .gtu_len  (cfg.gtu_len),
    .pps,
    .gtu_tick,
    .gtu_num,
    .pps_seen
  );

  pulse_counter #(.N_CH(NCH), .CNT_W(CNT_W)) u_cnt (
    .clk, .rst_n,
    .run     (cfg.run),
    .trig_in (asic_trig),
    .gtu_tick,
    .frame,
    .frame_valid
  );

  // frame_valid comes one cycle after the tick, when gtu_num has advanced
  ring_buffer #(.N_CH(NCH), .CNT_W(CNT_W), .WORD_W(WORD_W), .DEPTH_GTU(DEPTH_GTU)) u_ring (
    .clk, .rst_n,
    .frame,
    .frame_valid,
    .frame_gtu (gtu_num - 32'd1),
    .last_gtu,
    .last_valid,
    .rd_en,
    .rd_gtu,
    .rd_word,
    .rd_data,
    .rd_valid
  );

  trigger_ctrl u_trig (
    .clk, .rst_n,
    .run      (cfg.run),
    .trig_in  (ext_trig),
    .depth    (cfg.depth),
    .latency  (cfg.latency),
    .gtu_num,
    .last_gtu,
    .last_valid,
    .req,
    .req_valid,
    .req_ready,
    .temp_start,
    .trig_accepted,
    .trig_dropped
  );

  packet_builder #(.DW(WORD_W), .WPG(WPG)) u_pkt (
    .clk, .rst_n,
    .req,
    .req_valid,
    .req_ready,
    .temps,
    .rd_en,
    .rd_gtu,
    .rd_word,
    .rd_data,
    .rd_valid,
    .out_data  (pk_data),
    .out_valid (pk_valid),
    .out_ready (pk_ready),
    .packets_done
  );

  sync_fifo #(.W(WORD_W), .DEPTH(FIFO_WDS)) u_fifo (
    .clk, .rst_n,
    .in_data   (pk_data),
    .in_valid  (pk_valid),
    .in_ready  (pk_ready),
    .out_data  (fifo_data),
    .out_valid (fifo_valid),
    .out_ready (fifo_ready),
    .level     (fifo_level),
    .max_level (fifo_max)
  );

  usb_tx #(.WORD_W(WORD_W)) u_usb (
    .clk, .rst_n,
    .in_data    (fifo_data),
    .in_valid   (fifo_valid),
    .in_ready   (fifo_ready),
    .byte_data  (usb_data),
    .byte_valid (usb_valid),
    .byte_ready (usb_ready)
  );

  temp_monitor u_temp (
    .clk, .rst_n,
    .start     (temp_start),
    .adc_start,
    .adc_ch,
    .adc_done,
    .adc_data,
    .raw       (temps_raw),
    .temps,
    .busy      (temp_busy),
    .sweeps
  );

  asic_sc_loader #(.NA(N_ASIC), .NBITS(SC_LEN), .HALF(SC_HALF)) u_sc (
    .clk, .rst_n,
    .wr_en   (host_wr_en && host_wr_addr[9]),
    .wr_addr (host_wr_addr[$clog2(N_ASIC * ((SC_LEN + 31) / 32))-1:0]),
    .wr_data (host_wr_data),
    .start   (sc_start),
    .sc_clk,
    .sc_din,
    .sc_load,
    .busy    (sc_busy),
    .done    (sc_done)
  );

endmodule
