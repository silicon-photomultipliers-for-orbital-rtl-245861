// trigger_ctrl: trigger processing.
//
// On an external trigger the camera reads out a window of consecutive GTU
// bins from the ring buffer. The window is set by two run-time parameters:
// `latency`, the number of GTUs recorded after the GTU in which the trigger
// arrived, and `depth`, the number of bins in the event. With trigger GTU t
// the event holds GTU t+latency-depth+1 .. t+latency, so latency = depth-1
// puts the trigger at the start of the event and latency = 0 at its end.
//
// The trigger input is synchronised and its rising edge taken. In IDLE an
// edge (with `run` high) records t = gtu_num, pulses `temp_start` (the
// temperatures are measured after each trigger) and moves to WAIT. WAIT ends
// once the ring buffer reports GTU t+latency written; the block then offers
// the readout request (`req_valid`/`req_ready` handshake, request held
// stable while waiting) and returns to IDLE when it is taken. A trigger that
// arrives outside IDLE is not accepted and is counted in `trig_dropped`.
//
// From the camera description: event depth and trigger latency as
// parameters, readout of consecutive bins, temperature measurement after a
// trigger. Own choices: the meaning of latency as post-trigger GTUs, the
// handshake, and dropping triggers that arrive while one is pending.
module trigger_ctrl
  import sieca_pkg::*;
(
  input  logic          clk,
  input  logic          rst_n,
  input  logic          run,
  input  logic          trig_in,       // asynchronous external trigger
  input  logic [10:0]   depth,
  input  logic [10:0]   latency,
  input  logic [31:0]   gtu_num,       // GTU being integrated now
  input  logic [31:0]   last_gtu,      // newest GTU stored in the ring buffer
  input  logic          last_valid,
  output readout_req_t  req,
  output logic          req_valid,
  input  logic          req_ready,
  output logic          temp_start,
  output logic [31:0]   trig_accepted,
  output logic [31:0]   trig_dropped
);

  typedef enum logic [1:0] {S_IDLE, S_WAIT, S_REQ} state_t;
  state_t state;

  logic [2:0]  tsync;
  logic        trig_rise;
  logic [31:0] target;

  assign trig_rise = tsync[1] & ~tsync[2];
  assign req_valid = (state == S_REQ);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state         <= S_IDLE;
      tsync         <= '0;
      target        <= '0;
      req           <= '0;
      temp_start    <= 1'b0;
      trig_accepted <= '0;
      trig_dropped  <= '0;
    end else begin
      tsync      <= {tsync[1:0], trig_in};
      temp_start <= 1'b0;
      unique case (state)
        S_IDLE: begin
          if (trig_rise && run) begin
            state         <= S_WAIT;
            target        <= gtu_num + 32'(latency);
            req.trig_gtu  <= gtu_num;
            req.first_gtu <= gtu_num + 32'(latency) - 32'(depth) + 32'd1;
            req.depth     <= depth;
            req.event_num <= trig_accepted;
            trig_accepted <= trig_accepted + 32'd1;
            temp_start    <= 1'b1;
          end
        end
        S_WAIT: begin
          if (trig_rise) trig_dropped <= trig_dropped + 32'd1;
          // signed distance, so GTU number wrap-around is harmless
          if (last_valid && $signed(last_gtu - target) >= 0) state <= S_REQ;
        end
        S_REQ: begin
          if (trig_rise) trig_dropped <= trig_dropped + 32'd1;
          if (req_ready) state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // A request must not change while it waits to be taken.
  a_req_stable: assert property (@(posedge clk) disable iff (!rst_n)
    req_valid && !req_ready |=> req_valid && $stable(req));

endmodule
