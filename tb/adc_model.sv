// adc_model: behavioural model of the temperature ADC. A conversion starts
// on `start` for channel `ch`; after a random 5..20 clocks `done` pulses
// with `data` = value(ch, n), where n counts completed conversions of that
// channel. Not synthesizable; used by the testbenches only.
module adc_model (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic [1:0]  ch,
  output logic        done,
  output logic [11:0] data
);
  int cnt[4];
  int wait_cyc;
  logic [1:0] cur;

  function automatic logic [11:0] value(int c, int n);
    return 12'(1000 + 37 * c + 101 * n + (c == 2 ? 1 : 0));
  endfunction

  initial begin
    foreach (cnt[i]) cnt[i] = 0;
    wait_cyc = -1;
  end

  always @(posedge clk) begin
    done <= 1'b0;
    if (!rst_n) begin
      wait_cyc = -1;
    end else if (start) begin
      cur = ch;
      wait_cyc = 5 + ($urandom % 16);
    end else if (wait_cyc > 0) begin
      wait_cyc--;
    end else if (wait_cyc == 0) begin
      done <= 1'b1;
      data <= value(int'(cur), cnt[cur]);
      cnt[cur]++;
      wait_cyc = -1;
    end
  end
endmodule
