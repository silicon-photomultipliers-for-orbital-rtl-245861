// packet_builder: event packet generation.
//
// For each readout request it reads the requested GTU bins out of the ring
// buffer, oldest first, wraps them with a header and a footer and pushes the
// packet word by word towards the output FIFO.
//
// Packet layout (DW = 64-bit words), a choice of this design:
//   H0  {HDR_MAGIC[15:0], 5'b0, depth[10:0], event_num[31:0]}
//   H1  {trig_gtu[31:0], first_gtu[31:0]}
//   H2  {temp3, temp2, temp1, temp0}  per-array temperatures, 16 bits each
//   D   depth x WPG words: bin first_gtu .. first_gtu+depth-1, each as the
//       ring buffer stores it (word w = channels 8w..8w+7, channel 8w+k in
//       bits [8k +: 8])
//   F0  {FTR_MAGIC[15:0], 16'h0000, checksum[31:0]}, checksum = XOR over all
//       data words of (word[63:32] ^ word[31:0])
//
// Interfaces: request with `req_valid`/`req_ready` (ready while idle); ring
// buffer read port with one cycle read latency; output `out_valid`/
// `out_ready` (a word moves when both are high). The output word sits in a
// register, and a word read from the ring buffer waits in a one-word holding
// register while the output is blocked, so a full FIFO stalls the packet
// without losing data. A data word takes three clocks when the output does
// not block (read, hold, output); this is far faster than the USB link.
//
// From the camera description: readout of the requested consecutive GTU
// bins, wrapping with header and footer, push into a FIFO. Own choices: the
// header and footer contents and the data word order.
module packet_builder
  import sieca_pkg::*;
#(
  parameter int unsigned DW = 64,
  parameter int unsigned WPG    = 32,
  localparam int unsigned WRD_W = (WPG > 1) ? $clog2(WPG) : 1
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  readout_req_t                  req,
  input  logic                          req_valid,
  output logic                          req_ready,
  input  logic [N_ARRAY-1:0][15:0]      temps,
  output logic                          rd_en,
  output logic [31:0]                   rd_gtu,
  output logic [WRD_W-1:0]              rd_word,
  input  logic [DW-1:0]             rd_data,
  input  logic                          rd_valid,
  output logic [DW-1:0]             out_data,
  output logic                          out_valid,
  input  logic                          out_ready,
  output logic [31:0]                   packets_done
);

  typedef enum logic [1:0] {S_IDLE, S_HDR, S_DATA, S_FTR} state_t;
  state_t state;

  readout_req_t      cur;
  logic [1:0]        hidx;
  logic [10:0]       gi;
  logic [WRD_W-1:0]  wi;
  logic              pend;
  logic              rbuf_v;
  logic [DW-1:0] rbuf;
  logic [31:0]       csum;
  logic              can_load;
  logic              issue;
  logic              last_word;

  assign req_ready = (state == S_IDLE);
  assign can_load  = !out_valid || out_ready;
  assign issue     = (state == S_DATA) && !pend && !rbuf_v;
  assign rd_en     = issue;
  assign rd_gtu    = cur.first_gtu + 32'(gi);
  assign rd_word   = wi;
  assign last_word = (gi == cur.depth - 11'd1) && (wi == WRD_W'(WPG - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state        <= S_IDLE;
      cur          <= '0;
      hidx         <= '0;
      gi           <= '0;
      wi           <= '0;
      pend         <= 1'b0;
      rbuf_v       <= 1'b0;
      rbuf         <= '0;
      csum         <= '0;
      out_data     <= '0;
      out_valid    <= 1'b0;
      packets_done <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (issue)    pend <= 1'b1;
      if (rd_valid) begin
        pend   <= 1'b0;
        rbuf   <= rd_data;
        rbuf_v <= 1'b1;
      end
      unique case (state)
        S_IDLE: begin
          if (req_valid) begin
            cur   <= req;
            hidx  <= '0;
            gi    <= '0;
            wi    <= '0;
            csum  <= '0;
            state <= S_HDR;
          end
        end
        S_HDR: begin
          if (can_load) begin
            out_valid <= 1'b1;
            unique case (hidx)
              2'd0:    out_data <= DW'({HDR_MAGIC, 5'b0, cur.depth, cur.event_num});
              2'd1:    out_data <= DW'({cur.trig_gtu, cur.first_gtu});
              default: out_data <= DW'(temps);
            endcase
            hidx <= hidx + 2'd1;
            if (hidx == 2'd2) state <= S_DATA;
          end
        end
        S_DATA: begin
          if (rbuf_v && can_load) begin
            out_valid <= 1'b1;
            out_data  <= rbuf;
            rbuf_v    <= 1'b0;
            csum      <= csum ^ rbuf[31:0] ^ rbuf[DW-1:32];
            if (last_word) begin
              state <= S_FTR;
            end else if (wi == WRD_W'(WPG - 1)) begin
              wi <= '0;
              gi <= gi + 11'd1;
            end else begin
              wi <= wi + WRD_W'(1);
            end
          end
        end
        S_FTR: begin
          if (can_load) begin
            out_valid    <= 1'b1;
            out_data     <= DW'({FTR_MAGIC, 16'h0000, csum});
            packets_done <= packets_done + 32'd1;
            state        <= S_IDLE;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  a_out_hold: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid && !out_ready |=> out_valid && $stable(out_data));

endmodule
