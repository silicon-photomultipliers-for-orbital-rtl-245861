// tb_packet_builder: a behavioural ring-buffer read port (data is a fixed
// function of GTU and word) feeds the builder; the output is drained with
// random back-pressure and every packet word is checked: header, data in
// GTU order, footer checksum.
module tb_packet_builder;
  import sieca_pkg::*;
  localparam int WPG = 4;
  logic clk = 0, rst_n = 0;
  readout_req_t req;
  logic req_valid = 0, req_ready;
  logic [N_ARRAY-1:0][15:0] temps = {16'h0444, 16'h0333, 16'h0222, 16'h0111};
  logic rd_en;
  logic [31:0] rd_gtu;
  logic [1:0] rd_word;
  logic [63:0] rd_data;
  logic rd_valid = 0;
  logic [63:0] out_data;
  logic out_valid, out_ready = 0;
  logic [31:0] packets_done;
  logic [63:0] got[$];
  int checks = 0, failures = 0, stalls = 0;

  always #5 clk = ~clk;

  packet_builder #(.DW(64), .WPG(WPG)) dut (.*);

  function automatic logic [63:0] mem_word(logic [31:0] g, int w);
    return {(g + 32'd1) * 32'h0100_0193 + 32'(w) * 32'h0000_9E37, g * 32'd2654435761 + 32'(w)};
  endfunction

  always @(posedge clk) begin
    rd_valid <= rd_en;
    if (rd_en) rd_data <= mem_word(rd_gtu, int'(rd_word));
    out_ready <= ($urandom % 3) != 0;
    if (out_valid && out_ready) got.push_back(out_data);
    if (out_valid && !out_ready) stalls++;
  end

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic run_event(logic [31:0] ev, logic [31:0] tg, logic [31:0] fg, int d);
    logic [31:0] cs;
    got.delete();
    @(negedge clk);
    req = '{event_num: ev, trig_gtu: tg, first_gtu: fg, depth: 11'(d)};
    req_valid = 1;
    while (!req_ready) @(negedge clk);
    @(negedge clk);
    req_valid = 0;
    wait (got.size() == 4 + d * WPG);
    repeat (5) @(negedge clk);
    check(got.size() == 4 + d * WPG, "packet length");
    check(got[0] == {HDR_MAGIC, 5'b0, 11'(d), ev}, "header 0");
    check(got[1] == {tg, fg}, "header 1");
    check(got[2] == 64'(temps), "header 2 temperatures");
    cs = 0;
    for (int g = 0; g < d; g++)
      for (int w = 0; w < WPG; w++) begin
        logic [63:0] e;
        e = mem_word(fg + 32'(g), w);
        cs ^= e[63:32] ^ e[31:0];
        check(got[3 + g * WPG + w] == e, $sformatf("data bin %0d word %0d", g, w));
      end
    check(got[3 + d * WPG] == {FTR_MAGIC, 16'h0, cs}, "footer");
  endtask

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    req = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run_event(32'd0, 32'd100, 32'd90, 5);
    run_event(32'd1, 32'd7, 32'hFFFF_FFFE, 3);   // GTU number wrap
    run_event(32'd2, 32'd500, 32'd500, 1);
    check(packets_done == 3, "packets_done");
    check(stalls > 0, "back-pressure exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
