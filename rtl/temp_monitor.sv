// temp_monitor: temperature readout of the sensor board.
//
// Four temperature sensors sit between the corners of neighbouring SiPM
// arrays; an ADC digitises them. Because reading the sensors while photons
// are counted injects noise, they are read only at start-up and after each
// trigger. Each array's temperature is estimated as the mean of the two
// sensors next to it.
//
// Operation: after reset, and on every `start` pulse, the block reads
// channels 0..3 one after the other over a simple ADC handshake: it pulses
// `adc_start` with `adc_ch` set and waits for `adc_done`, when `adc_data`
// holds the result. A `start` that arrives during a sweep is remembered and
// runs one more sweep afterwards. After the fourth result the raw readings
// (`raw`) and the per-array averages (`temps`) are updated together and
// `sweeps` counts up. Sensor k is taken to sit between array k and array
// (k+1) mod 4, so array i averages sensors i and (i-1) mod 4 (rounded down).
//
// From the camera description: four sensors, one ADC, reading only at
// start-up and after a trigger, averaging of two neighbouring sensors per
// array. Own choices: the ADC handshake (the ADC is not specified), the
// sensor-to-array mapping, 12-bit results.
module temp_monitor
  import sieca_pkg::*;
#(
  parameter int unsigned ADC_W = TEMP_W
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         start,
  output logic                         adc_start,
  output logic [1:0]                   adc_ch,
  input  logic                         adc_done,
  input  logic [ADC_W-1:0]             adc_data,
  output logic [N_TSENS-1:0][ADC_W-1:0] raw,
  output logic [N_ARRAY-1:0][15:0]     temps,
  output logic                         busy,
  output logic [31:0]                  sweeps
);

  typedef enum logic [1:0] {S_IDLE, S_REQ, S_WAIT} state_t;
  state_t state;

  logic                          pending;
  logic [N_TSENS-1:0][ADC_W-1:0] acc;
  logic [N_TSENS-1:0][ADC_W-1:0] acc_nxt;

  assign busy = (state != S_IDLE);

  always_comb begin
    acc_nxt         = acc;
    acc_nxt[adc_ch] = adc_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      pending   <= 1'b1;        // measure once at start-up
      adc_start <= 1'b0;
      adc_ch    <= '0;
      acc       <= '0;
      raw       <= '0;
      temps     <= '0;
      sweeps    <= '0;
    end else begin
      adc_start <= 1'b0;
      if (start) pending <= 1'b1;
      unique case (state)
        S_IDLE: begin
          if (pending || start) begin
            pending <= 1'b0;
            adc_ch  <= '0;
            state   <= S_REQ;
          end
        end
        S_REQ: begin
          adc_start <= 1'b1;
          state     <= S_WAIT;
        end
        S_WAIT: begin
          if (adc_done) begin
            acc <= acc_nxt;
            if (adc_ch == 2'(N_TSENS - 1)) begin
              raw    <= acc_nxt;
              sweeps <= sweeps + 32'd1;
              for (int i = 0; i < N_ARRAY; i++) begin
                temps[i] <= 16'((17'(acc_nxt[i]) + 17'(acc_nxt[(i + N_TSENS - 1) % N_TSENS])) >> 1);
              end
              state <= S_IDLE;
            end else begin
              adc_ch <= adc_ch + 2'd1;
              state  <= S_REQ;
            end
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
