// ring_buffer: continuous store of the last DEPTH_GTU GTU frames.
//
// Every finished GTU frame (N_CH counts of CNT_W bits) is written into a
// circular memory at bin (frame_gtu mod DEPTH_GTU), overwriting the oldest
// GTU. With the defaults the buffer holds the last 1024 GTU, 2.56 ms, so a
// trigger can always reach back into the past.
//
// The frame is stored as WPG = N_CH*CNT_W/WORD_W memory words (32 words of
// 64 bits by default). Word w of a bin holds channels w*CH_PER_WORD ..
// w*CH_PER_WORD+CH_PER_WORD-1, channel k of the word in bits
// [k*CNT_W +: CNT_W]. On `frame_valid` the block starts writing one word per
// clock; the frame input must stay stable for WPG cycles (the pulse counter
// holds it for a whole GTU). When the last word is written, `last_gtu` takes
// the frame's GTU number and `last_valid` goes high: all bins up to and
// including `last_gtu` are readable.
//
// Read port: `rd_en` with `rd_gtu` (GTU number, taken modulo DEPTH_GTU) and
// `rd_word`; `rd_data` is valid one clock later (`rd_valid`). Reads and
// writes may overlap; the memory is a simple dual-port array, which maps to
// block RAM.
//
// From the camera description: 1024-GTU depth, continuous overwrite of the
// oldest bin. Own choices: word width, word layout, write sequencing.
module ring_buffer #(
  parameter int unsigned N_CH      = 256,
  parameter int unsigned CNT_W     = 8,
  parameter int unsigned WORD_W    = 64,
  parameter int unsigned DEPTH_GTU = 1024,
  localparam int unsigned WPG      = N_CH * CNT_W / WORD_W,
  localparam int unsigned BIN_W    = $clog2(DEPTH_GTU),
  localparam int unsigned WRD_W    = (WPG > 1) ? $clog2(WPG) : 1
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic [N_CH-1:0][CNT_W-1:0] frame,
  input  logic                       frame_valid,
  input  logic [31:0]                frame_gtu,
  output logic [31:0]                last_gtu,
  output logic                       last_valid,
  input  logic                       rd_en,
  input  logic [31:0]                rd_gtu,
  input  logic [WRD_W-1:0]           rd_word,
  output logic [WORD_W-1:0]          rd_data,
  output logic                       rd_valid
);

  logic [WORD_W-1:0] mem [DEPTH_GTU*WPG];

  logic [N_CH*CNT_W-1:0] frame_flat;
  logic                  writing;
  logic [WRD_W-1:0]      widx;
  logic [31:0]           wgtu;
  logic [BIN_W-1:0]      wbin;
  logic [BIN_W-1:0]      rbin;

  if ((1 << WRD_W) != WPG) begin : g_wpg_check
    $error("ring_buffer: N_CH*CNT_W/WORD_W must be a power of two");
  end

  assign frame_flat = frame;
  assign wbin       = wgtu[BIN_W-1:0];
  assign rbin       = rd_gtu[BIN_W-1:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      writing    <= 1'b0;
      widx       <= '0;
      wgtu       <= '0;
      last_gtu   <= '0;
      last_valid <= 1'b0;
    end else begin
      if (frame_valid) begin
        writing <= 1'b1;
        widx    <= '0;
        wgtu    <= frame_gtu;
      end else if (writing) begin
        if (widx == WRD_W'(WPG - 1)) begin
          writing    <= 1'b0;
          last_gtu   <= wgtu;
          last_valid <= 1'b1;
        end
        widx <= widx + WRD_W'(1);
      end
    end
  end

  always_ff @(posedge clk) begin
    if (writing && !frame_valid)
      mem[{wbin, widx}] <= frame_flat[widx*WORD_W +: WORD_W];
  end

  always_ff @(posedge clk) begin
    if (rd_en) rd_data <= mem[{rbin, rd_word}];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rd_valid <= 1'b0;
    else        rd_valid <= rd_en;
  end

endmodule
