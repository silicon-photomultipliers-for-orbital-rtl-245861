// asic_sc_loader: slow-control initialisation of the front-end ASICs.
//
// Each front-end ASIC keeps its settings (pre-amplifier gains, discriminator
// thresholds and fine tunings, per-channel input DACs that trim the SiPM
// bias) in a serial slow-control register of SC_BITS bits. The host writes
// the bit strings of all N_ASIC chips into this block in 32-bit words; a
// `start` pulse then shifts them into the chips, all chips in parallel, and
// latches them.
//
// Storage: word j of ASIC a is written with `wr_en`, `wr_addr` = a*NW + j
// (NW = ceil(SC_BITS/32) words per ASIC) and holds bits 32j .. 32j+31 of
// that ASIC's string. Bit 0 is shifted first. Serial timing: each bit lasts
// 2*HALF clocks; `sc_clk` is low for the first HALF clocks (data change at
// its falling edge) and high for the next HALF (the chip samples on the
// rising edge). After the last bit `sc_load` is high for 2*HALF clocks, then
// `done` pulses. `busy` is high from `start` to `done`; `start` is ignored
// while busy.
//
// From the camera description: the FPGA initialises the ASIC parameters.
// Own choices: the register length (1144 bits, the length of this ASIC's
// slow-control chain), parallel loading, bit order and serial timing.
module asic_sc_loader
  import sieca_pkg::*;
#(
  parameter int unsigned NA      = N_ASIC,
  parameter int unsigned NBITS   = SC_BITS,
  parameter int unsigned HALF    = 5,
  localparam int unsigned NW     = (NBITS + 31) / 32,
  localparam int unsigned AW     = $clog2(NA * NW),
  localparam int unsigned BITW   = $clog2(NBITS + 1),
  localparam int unsigned HW     = $clog2(2 * HALF + 1)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           wr_en,
  input  logic [AW-1:0]  wr_addr,
  input  logic [31:0]    wr_data,
  input  logic           start,
  output logic           sc_clk,
  output logic [NA-1:0]  sc_din,
  output logic           sc_load,
  output logic           busy,
  output logic           done
);

  typedef enum logic [1:0] {S_IDLE, S_SHIFT, S_LOAD} state_t;
  state_t state;

  logic [NA-1:0][NW*32-1:0] bits;
  logic [BITW-1:0]          bidx;
  logic [HW-1:0]            ph;

  assign busy = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bits <= '0;
    end else if (wr_en && 32'(wr_addr) < NA * NW) begin
      bits[32'(wr_addr) / NW][(32'(wr_addr) % NW) * 32 +: 32] <= wr_data;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      bidx    <= '0;
      ph      <= '0;
      sc_clk  <= 1'b0;
      sc_din  <= '0;
      sc_load <= 1'b0;
      done    <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: begin
          sc_clk <= 1'b0;
          if (start) begin
            state <= S_SHIFT;
            bidx  <= '0;
            ph    <= '0;
            for (int a = 0; a < NA; a++) sc_din[a] <= bits[a][0];
          end
        end
        S_SHIFT: begin
          ph     <= ph + HW'(1);
          if (ph == HW'(HALF - 1)) sc_clk <= 1'b1;
          if (ph == HW'(2 * HALF - 1)) begin
            ph     <= '0;
            sc_clk <= 1'b0;
            if (bidx == BITW'(NBITS - 1)) begin
              state   <= S_LOAD;
              sc_load <= 1'b1;
              sc_din  <= '0;
            end else begin
              bidx <= bidx + BITW'(1);
              for (int a = 0; a < NA; a++) sc_din[a] <= bits[a][bidx + BITW'(1)];
            end
          end
        end
        S_LOAD: begin
          ph <= ph + HW'(1);
          if (ph == HW'(2 * HALF - 1)) begin
            ph      <= '0;
            sc_load <= 1'b0;
            done    <= 1'b1;
            state   <= S_IDLE;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
