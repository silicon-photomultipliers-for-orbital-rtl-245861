// sync_fifo: event FIFO between packet generation and the USB link.
//
// Finished packet words are queued here until the USB side takes them, so
// the fast ring-buffer readout and the slow host link are decoupled. It is a
// single-clock first-word-fall-through FIFO of DEPTH words: `out_data` shows
// the oldest word whenever `out_valid` is high; a word moves on either side
// when valid and ready are both high. `in_ready` is low while the FIFO is
// full, which stalls the packet builder (no word is ever dropped).
// `level` is the current fill, `max_level` the highest fill seen since reset.
//
// From the camera description: a FIFO buffer receives the packets. Own
// choices: depth (1024 words), first-word-fall-through, the handshake.
module sync_fifo #(
  parameter int unsigned W     = 64,
  parameter int unsigned DEPTH = 1024,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [W-1:0] in_data,
  input  logic         in_valid,
  output logic         in_ready,
  output logic [W-1:0] out_data,
  output logic         out_valid,
  input  logic         out_ready,
  output logic [AW:0]  level,
  output logic [AW:0]  max_level
);

  logic [W-1:0] mem [DEPTH];
  logic [AW-1:0] wp, rp;
  logic push, pop;

  assign in_ready  = (level != (AW+1)'(DEPTH));
  assign out_valid = (level != '0);
  assign out_data  = mem[rp];
  assign push      = in_valid && in_ready;
  assign pop       = out_valid && out_ready;

  always_ff @(posedge clk) begin
    if (push) mem[wp] <= in_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp        <= '0;
      rp        <= '0;
      level     <= '0;
      max_level <= '0;
    end else begin
      if (push) wp <= (wp == AW'(DEPTH - 1)) ? '0 : wp + AW'(1);
      if (pop)  rp <= (rp == AW'(DEPTH - 1)) ? '0 : rp + AW'(1);
      level <= level + (AW+1)'(push) - (AW+1)'(pop);
      if (level > max_level) max_level <= level;
    end
  end

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
    level <= (AW+1)'(DEPTH));

endmodule
