// tb_config_regs: reset defaults, writes, clamping of depth and latency,
// the slow-control start pulse and status read-back.
module tb_config_regs;
  import sieca_pkg::*;
  logic clk = 0, rst_n = 0, wr_en = 0;
  logic [3:0] wr_addr = 0, rd_addr = 0;
  logic [31:0] wr_data = 0, rd_data;
  logic [7:0][31:0] status;
  cfg_t cfg;
  logic sc_start;
  int checks = 0, failures = 0, nsc = 0;

  always #5 clk = ~clk;

  config_regs #(.MAX_DEPTH(1024), .RUN_AT_RESET(1'b1)) dut (.*);

  always @(posedge clk) if (rst_n && sc_start) nsc++;

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic wr(int a, int d);
    @(negedge clk);
    wr_en = 1; wr_addr = 4'(a); wr_data = 32'(d);
    @(negedge clk);
    wr_en = 0;
  endtask

  task automatic rd_check(int a, logic [31:0] e, string msg);
    rd_addr = 4'(a);
    #1;
    check(rd_data == e, msg);
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 8; i++) status[i] = 32'h1000 + 32'(i);
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    check(cfg.run && cfg.gtu_len == 250 && cfg.depth == 128 && cfg.latency == 64, "reset defaults");
    rd_check(1, 250, "read gtu_len"); rd_check(2, 128, "read depth");
    rd_check(3, 64, "read latency");  rd_check(0, 1, "read ctrl");
    wr(1, 400);  check(cfg.gtu_len == 400, "gtu_len write");
    wr(2, 0);    check(cfg.depth == 1, "depth clamped to 1");
    wr(2, 5000); check(cfg.depth == 1024, "depth clamped to 1024");
    wr(2, 77);   check(cfg.depth == 77, "depth write"); rd_check(2, 77, "depth read");
    wr(3, 2000); check(cfg.latency == 1023, "latency clamped");
    wr(3, 9);    check(cfg.latency == 9, "latency write");
    wr(0, 0);    check(!cfg.run && nsc == 0, "run cleared, no slow-control start");
    wr(0, 3);    @(negedge clk);
    check(cfg.run && nsc == 1, "run set and one slow-control start pulse");
    for (int i = 0; i < 8; i++) rd_check(8 + i, 32'h1000 + 32'(i), "status read");
    rd_check(5, 0, "unmapped address reads zero");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
