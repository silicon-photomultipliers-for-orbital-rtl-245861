// gtu_timer: Gate Time Unit (GTU) generator.
//
// The camera integrates photon counts over fixed gates of 2.5 us, the GTU.
// This block divides the system clock into GTUs of a run-time programmable
// length, numbers them, and can re-align the GTU phase to a GPS
// pulse-per-second (PPS) signal from the host.
//
// Operation: while `run` is high a phase counter counts 0 .. gtu_len-1. In the
// last cycle of each GTU `gtu_tick` is high for one cycle; `gtu_num` is the
// number of the GTU now being integrated and increments the cycle after the
// tick. A rising edge on `pps` (synchronised with two flip-flops) ends the
// current GTU at once, so the next GTU starts on the PPS edge. While `run`
// is low the phase is held at zero and no ticks come. `gtu_len` below
// MIN_LEN is treated as MIN_LEN, so that every GTU is long enough for the
// ring buffer to store its frame.
//
// From the camera description: the 2.5 us GTU, its programmable length and
// the PPS synchronisation. Own choices: 100 MHz clock (250 cycles per GTU),
// the truncating PPS re-alignment, 32-bit GTU numbering.
module gtu_timer #(
  parameter int unsigned LEN_W   = 16,
  parameter int unsigned MIN_LEN = 40
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             run,
  input  logic [LEN_W-1:0] gtu_len,
  input  logic             pps,       // asynchronous PPS input
  output logic             gtu_tick,  // last cycle of the current GTU
  output logic [31:0]      gtu_num,   // number of the GTU being integrated
  output logic             pps_seen   // one-cycle pulse when PPS re-aligned a GTU
);

  logic [LEN_W-1:0] phase;
  logic [LEN_W-1:0] len_eff;
  logic [2:0]       pps_sync;
  logic             pps_rise;

  assign len_eff  = (gtu_len < LEN_W'(MIN_LEN)) ? LEN_W'(MIN_LEN) : gtu_len;
  assign pps_rise = pps_sync[1] & ~pps_sync[2];
  assign gtu_tick = run & ((phase == len_eff - LEN_W'(1)) | pps_rise);
  assign pps_seen = run & pps_rise;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phase    <= '0;
      gtu_num  <= '0;
      pps_sync <= '0;
    end else begin
      pps_sync <= {pps_sync[1:0], pps};
      if (!run) begin
        phase <= '0;
      end else if (gtu_tick) begin
        phase   <= '0;
        gtu_num <= gtu_num + 32'd1;
      end else begin
        phase <= phase + LEN_W'(1);
      end
    end
  end

endmodule
