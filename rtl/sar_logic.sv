// sar_logic: successive-approximation register and timing sequencer of the
// 12-bit SAR ADC.
//
// A conversion starts on a start pulse (the sample-rate strobe). In the
// first clock the S/H switch is closed (sample high). Then, for each bit
// from the MSB down, the trial bit is set in the DAC code, the comparator
// decides in one clock whether the held input lies at or above the DAC
// level, and the bit is kept (comp = 1) or cleared. After ADC_W decisions
// the code is presented with a one-clock done pulse. The binary search, the
// 12-bit resolution and the S/H, DAC and comparator it drives follow the
// chip's ADC architecture figure; the one-clock-per-bit sequence and the
// handshake are this design's choices. The "Mode Selection" input of that
// figure has no published function and is not modelled.
//
// Interface: dac_code drives the capacitive DAC; comp is the comparator
// decision for the present dac_code (1: input >= DAC level). A start that
// arrives during a conversion is ignored (busy high).
// Timing: done pulses ADC_W + 2 clocks after start (1 sample + ADC_W bit
// clocks + 1 output register clock).
module sar_logic #(
  parameter int unsigned ADC_W = 12
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic             comp,
  output logic             sample,
  output logic [ADC_W-1:0] dac_code,
  output logic             busy,
  output logic             done,
  output logic [ADC_W-1:0] code
);

  typedef enum logic [1:0] {S_IDLE, S_SAMPLE, S_CONV} sar_state_e;

  localparam int unsigned BW = $clog2(ADC_W);

  sar_state_e       state;
  logic [ADC_W-1:0] result;
  logic [BW-1:0]    bitp;      // bit under trial

  always_comb begin
    dac_code = result;
    if (state == S_CONV) dac_code[bitp] = 1'b1;
  end

  assign sample = (state == S_SAMPLE);
  assign busy   = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= S_IDLE;
      result <= '0;
      bitp   <= '0;
      done   <= 1'b0;
      code   <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE:   if (start) state <= S_SAMPLE;
        S_SAMPLE: begin
          result <= '0;
          bitp   <= BW'(ADC_W - 1);
          state  <= S_CONV;
        end
        S_CONV: begin
          result[bitp] <= comp;
          if (bitp == '0) begin
            state <= S_IDLE;
            code  <= {result[ADC_W-1:1], comp};
            done  <= 1'b1;
          end else begin
            bitp <= bitp - 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
