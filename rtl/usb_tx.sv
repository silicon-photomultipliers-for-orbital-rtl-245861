// usb_tx: word-to-byte serialiser feeding the USB interface chip.
//
// Packets leave the camera over a USB link through an external interface
// chip that takes one byte at a time. This block takes WORD_W-bit words from
// the event FIFO and hands them out as WORD_W/8 bytes, most significant byte
// first, with a valid/ready handshake on both sides: a word is taken
// (`in_ready`) only when its last byte has gone out, and a byte moves when
// `byte_valid` and `byte_ready` are both high, one byte per clock at most.
//
// From the camera description: packets are distributed to the USB
// interface. Own choices: byte order and handshake; the USB chip itself is
// outside this design.
module usb_tx #(
  parameter int unsigned WORD_W = 64,
  localparam int unsigned NB    = WORD_W / 8,
  localparam int unsigned BW    = (NB > 1) ? $clog2(NB) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [WORD_W-1:0] in_data,
  input  logic              in_valid,
  output logic              in_ready,
  output logic [7:0]        byte_data,
  output logic              byte_valid,
  input  logic              byte_ready
);

  logic [WORD_W-1:0] sh;
  logic [BW-1:0]     left;   // bytes still to send after the current one
  logic              full;

  assign byte_valid = full;
  assign byte_data  = sh[WORD_W-1 -: 8];
  assign in_ready   = !full || (byte_ready && left == '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sh   <= '0;
      left <= '0;
      full <= 1'b0;
    end else begin
      if (in_valid && in_ready) begin
        sh   <= in_data;
        left <= BW'(NB - 1);
        full <= 1'b1;
      end else if (full && byte_ready) begin
        if (left == '0) begin
          full <= 1'b0;
        end else begin
          sh   <= {sh[WORD_W-9:0], 8'h00};
          left <= left - BW'(1);
        end
      end
    end
  end

endmodule
