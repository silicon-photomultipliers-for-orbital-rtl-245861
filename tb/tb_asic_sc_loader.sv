// tb_asic_sc_loader: random slow-control strings for 3 ASICs of 70 bits;
// the serial stream is sampled on the rising edge of sc_clk, as a chip
// would, and compared bit by bit; checks bit timing, the load pulse and
// that a start while busy is ignored.
module tb_asic_sc_loader;
  localparam int NA = 3, NB = 70, HALF = 2, NW = (NB + 31) / 32;
  logic clk = 0, rst_n = 0, wr_en = 0, start = 0;
  logic [$clog2(NA * NW)-1:0] wr_addr = 0;
  logic [31:0] wr_data = 0;
  logic sc_clk, sc_load, busy, done;
  logic [NA-1:0] sc_din;
  logic [NA-1:0][NW*32-1:0] img;
  logic [NB-1:0] rx[NA];
  int checks = 0, failures = 0, nbits = 0, nload = 0, last_rise = -1, cyc = 0;
  logic sc_clk_d = 0;

  always #5 clk = ~clk;

  asic_sc_loader #(.NA(NA), .NBITS(NB), .HALF(HALF)) dut (.*);

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  always @(posedge clk) begin
    cyc++;
    sc_clk_d <= sc_clk;
    if (rst_n && sc_clk && !sc_clk_d) begin
      if (last_rise >= 0) check(cyc - last_rise == 2 * HALF, "serial bit period");
      last_rise = cyc;
      for (int a = 0; a < NA; a++) if (nbits < NB) rx[a][nbits] = sc_din[a];
      nbits++;
    end
    if (rst_n && sc_load) nload++;
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int a = 0; a < NA; a++)
      for (int j = 0; j < NW; j++) begin
        @(negedge clk);
        img[a][j*32 +: 32] = $urandom;
        wr_en = 1; wr_addr = $bits(wr_addr)'(a * NW + j); wr_data = img[a][j*32 +: 32];
      end
    @(negedge clk) wr_en = 0;
    start = 1; @(negedge clk); start = 0;
    check(busy, "busy after start");
    repeat (20) @(negedge clk);
    start = 1; @(negedge clk); start = 0;   // ignored
    wait (done);
    @(negedge clk);
    check(nbits == NB, $sformatf("bits clocked %0d", nbits));
    check(nload == 2 * HALF, "load pulse length");
    for (int a = 0; a < NA; a++) check(rx[a] == img[a][NB-1:0], $sformatf("ASIC %0d string", a));
    check(!busy, "idle after done");
    repeat (100) @(negedge clk);
    check(nbits == NB, "no second load from the start during busy");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
