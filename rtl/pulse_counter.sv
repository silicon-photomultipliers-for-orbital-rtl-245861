// pulse_counter: per-channel photon (pulse) counting over each GTU.
//
// Each front-end ASIC channel gives a digital trigger line that pulses when
// the SiPM signal crosses the discriminator threshold. This block counts the
// pulses of every channel during one GTU. At the GTU boundary the counts are
// copied into `frame` and the counters restart, in the same clock edge, so
// no pulse is lost between GTUs (counting has no dead time).
//
// Each line passes a two-flip-flop synchroniser; a rising edge at its output
// is one pulse, so a pulse must be high and low for at least one clock each.
// Counts saturate at 2**CNT_W-1. In the cycle of `gtu_tick` a pulse edge is
// still added to the finishing GTU. `frame` holds the counts of the last
// finished GTU, stable from the cycle after `gtu_tick` (`frame_valid` pulses
// then) until the next one. With `run` low nothing is counted.
//
// From the camera description: 256 lines counted individually and
// continuously per GTU. Own choices: the synchroniser, edge counting,
// 8-bit saturating counters.
module pulse_counter #(
  parameter int unsigned N_CH  = 256,
  parameter int unsigned CNT_W = 8
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       run,
  input  logic [N_CH-1:0]            trig_in,     // asynchronous ASIC trigger lines
  input  logic                       gtu_tick,    // last cycle of the GTU
  output logic [N_CH-1:0][CNT_W-1:0] frame,       // counts of the last finished GTU
  output logic                       frame_valid  // one cycle after gtu_tick
);

  logic [N_CH-1:0]            s1, s2, s3;
  logic [N_CH-1:0]            edge_det;
  logic [N_CH-1:0][CNT_W-1:0] cnt;
  logic [N_CH-1:0][CNT_W-1:0] cnt_inc;

  assign edge_det = s2 & ~s3 & {N_CH{run}};

  always_comb begin
    for (int c = 0; c < N_CH; c++) begin
      cnt_inc[c] = (edge_det[c] && cnt[c] != '1) ? cnt[c] + CNT_W'(1) : cnt[c];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1          <= '0;
      s2          <= '0;
      s3          <= '0;
      cnt         <= '0;
      frame       <= '0;
      frame_valid <= 1'b0;
    end else begin
      s1          <= trig_in;
      s2          <= s1;
      s3          <= s2;
      frame_valid <= gtu_tick;
      if (gtu_tick) begin
        frame <= cnt_inc;
        cnt   <= '0;
      end else begin
        cnt <= cnt_inc;
      end
    end
  end

endmodule
