// sar_logic: successive-approximation register of the 10-bit feature ADC.
//
// A start pulse opens one track cycle (sample=1), in which the capacitor array
// follows the selected feature. Then one bit is decided per clock, MSB first:
// the trial code dac_code = decided bits | (1 << i) is applied to the capacitor
// DAC, and the comparator answer comp (1 = input above the DAC level) keeps or
// clears bit i at the clock edge. Each decided bit also leaves the block at
// once on bit_valid/bit_out, so the result travels serially to the
// serial-to-parallel converter while the conversion is still running.
//
// Timing: start sampled in cycle 0, sample high in cycle 1, bits decided in
// cycles 2 .. BITS+1, registered bit_valid/bit_out one cycle after each
// decision, done (with code valid) in cycle BITS+2. Start is ignored while
// busy.
//
// The 10-bit resolution and the SAR principle, with a differential capacitor
// array C0..C9 and a clocked comparator, are the
// SoC's; one bit per clock, the track cycle and the comparator polarity are
// this design's choice. The capacitor array and comparator are analog and
// outside this module.
module sar_logic #(
  parameter int BITS = 10
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  input  logic            comp,
  output logic            sample,
  output logic [BITS-1:0] dac_code,
  output logic            bit_valid,
  output logic            bit_out,
  output logic            busy,
  output logic            done,
  output logic [BITS-1:0] code
);
  typedef enum logic [1:0] {S_IDLE, S_SAMPLE, S_CONV} state_e;
  state_e                  state;
  logic [BITS-1:0]         result;
  logic [$clog2(BITS)-1:0] idx;

  assign sample   = (state == S_SAMPLE);
  assign busy     = (state != S_IDLE);
  assign dac_code = (state == S_CONV) ? (result | (BITS'(1) << idx)) : '0;
  assign code     = result;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      result    <= '0;
      idx       <= '0;
      bit_valid <= 1'b0;
      bit_out   <= 1'b0;
      done      <= 1'b0;
    end else begin
      bit_valid <= 1'b0;
      done      <= 1'b0;
      unique case (state)
        S_IDLE: if (start) state <= S_SAMPLE;
        S_SAMPLE: begin
          result <= '0;
          idx    <= $clog2(BITS)'(BITS-1);
          state  <= S_CONV;
        end
        S_CONV: begin
          result[idx] <= comp;
          bit_valid   <= 1'b1;
          bit_out     <= comp;
          if (idx == 0) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end else begin
            idx <= idx - 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
