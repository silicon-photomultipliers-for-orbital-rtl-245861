// config_regs: host-programmable operating parameters.
//
// The FPGA parameters of a run (GTU length, event depth, trigger latency)
// are set by the host. This register file holds them and exposes status
// counters for reading back.
//
// Write port: `wr_en`, `wr_addr`, `wr_data`, taking effect on the next
// clock. Read port: `rd_data` follows `rd_addr` combinationally.
//   0  CTRL     bit 0 run (counting and triggering enabled); writing bit 1
//               pulses `sc_start` (load the ASIC slow control)
//   1  GTU_LEN  clock cycles per GTU (250 = 2.5 us at 100 MHz)
//   2  DEPTH    GTU bins per event, clamped to 1 .. MAX_DEPTH
//   3  LATENCY  GTU bins after the trigger GTU, clamped to 0 .. MAX_DEPTH-1
//   8..15       read-only status words, `status[addr-8]`
// After reset the registers hold the camera's standard settings (2.5 us GTU,
// 128-GTU events, latency 64) and `run` is RUN_AT_RESET, so the ring buffer
// fills without any host access, as the camera restarts with the settings
// it ran with before.
//
// From the camera description: event depth, GTU length and trigger latency
// are set by flags. Own choices: the map, the clamping, latency default.
module config_regs
  import sieca_pkg::*;
#(
  parameter int unsigned MAX_DEPTH    = RING_GTUS,
  parameter bit          RUN_AT_RESET = 1'b1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              wr_en,
  input  logic [3:0]        wr_addr,
  input  logic [31:0]       wr_data,
  input  logic [3:0]        rd_addr,
  output logic [31:0]       rd_data,
  input  logic [7:0][31:0]  status,
  output cfg_t              cfg,
  output logic              sc_start
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cfg.run     <= RUN_AT_RESET;
      cfg.gtu_len <= 16'(GTU_CYCLES);
      cfg.depth   <= 11'(EVENT_GTUS);
      cfg.latency <= 11'(TRIG_LAT);
      sc_start    <= 1'b0;
    end else begin
      sc_start <= 1'b0;
      if (wr_en) begin
        unique case (wr_addr)
          4'd0: begin
            cfg.run  <= wr_data[0];
            sc_start <= wr_data[1];
          end
          4'd1: cfg.gtu_len <= wr_data[15:0];
          4'd2: cfg.depth   <= (wr_data == 32'd0)         ? 11'd1 :
                               (wr_data > 32'(MAX_DEPTH)) ? 11'(MAX_DEPTH) : 11'(wr_data);
          4'd3: cfg.latency <= (wr_data >= 32'(MAX_DEPTH)) ? 11'(MAX_DEPTH - 1) : 11'(wr_data);
          default: ;
        endcase
      end
    end
  end

  always_comb begin
    unique case (rd_addr)
      4'd0:    rd_data = {31'd0, cfg.run};
      4'd1:    rd_data = {16'd0, cfg.gtu_len};
      4'd2:    rd_data = {21'd0, cfg.depth};
      4'd3:    rd_data = {21'd0, cfg.latency};
      4'd8, 4'd9, 4'd10, 4'd11, 4'd12, 4'd13, 4'd14, 4'd15:
               rd_data = status[rd_addr[2:0]];
      default: rd_data = 32'd0;
    endcase
  end

endmodule
