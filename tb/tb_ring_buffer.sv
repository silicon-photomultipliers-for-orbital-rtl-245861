// tb_ring_buffer: writes 1100 random frames (full default size: 256
// channels, 1024 bins) and reads every bin back, checking the newest 1024
// frames are there and the oldest were overwritten; also checks last_gtu
// and reading while writing.
module tb_ring_buffer;
  localparam int NCH = 256, CW = 8, WW = 64, DG = 1024, WPG = NCH * CW / WW;
  localparam int NF = 1100;
  logic clk = 0, rst_n = 0;
  logic [NCH-1:0][CW-1:0] frame;
  logic frame_valid = 0;
  logic [31:0] frame_gtu = 0, last_gtu;
  logic last_valid;
  logic rd_en = 0;
  logic [31:0] rd_gtu = 0;
  logic [$clog2(WPG)-1:0] rd_word = 0;
  logic [WW-1:0] rd_data;
  logic rd_valid;
  logic [NCH*CW-1:0] model [NF];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  ring_buffer #(.N_CH(NCH), .CNT_W(CW), .WORD_W(WW), .DEPTH_GTU(DG)) dut (.*);

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  function automatic logic [NCH*CW-1:0] rnd_frame();
    logic [NCH*CW-1:0] f;
    for (int i = 0; i < NCH * CW / 32; i++) f[i*32 +: 32] = $urandom;
    return f;
  endfunction

  task automatic read_check(int g, int w);
    @(negedge clk);
    rd_en = 1; rd_gtu = 32'(g); rd_word = w[$clog2(WPG)-1:0];
    @(negedge clk);
    rd_en = 0;
    check(rd_valid, "rd_valid one cycle after rd_en");
    check(rd_data == model[g][w*WW +: WW], $sformatf("bin %0d word %0d", g, w));
  endtask

  initial begin
    #50000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    frame = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    check(!last_valid, "nothing stored after reset");
    for (int g = 0; g < NF; g++) begin
      @(negedge clk);
      model[g] = rnd_frame();
      frame = model[g];
      frame_gtu = 32'(g);
      frame_valid = 1;
      @(negedge clk);
      frame_valid = 0;
      if (g == NF - 1) begin
        // read an older bin while the newest frame is being written
        for (int w = 0; w < WPG; w++) read_check(g - 3, w);
      end
      repeat (WPG + 2) @(negedge clk);
      check(last_valid && last_gtu == 32'(g), $sformatf("last_gtu after frame %0d", g));
    end
    for (int g = NF - DG; g < NF; g++)
      for (int w = 0; w < WPG; w++) read_check(g, w);
    // the oldest frames are gone: bin of frame 10 now holds frame 10+DG
    read_check(10 + DG, 0);
    check(model[10][WW-1:0] != model[10 + DG][WW-1:0], "overwritten bin differs");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
