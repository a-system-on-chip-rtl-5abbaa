// feature_scanner: frame timer and feature-mux sequencer.
//
// While run is high, a counter raises frame_start once every FRAME_CYCLES
// clocks (one second at the 128 kHz system clock, matching the 1 s time
// constant of the energy integrators and the 1 s segments the first-stage
// network scores). Each frame then walks mux_sel through features
// 0 .. NUM_FEAT-1: it holds each select for SETTLE_CYCLES clocks so the analog
// mux can settle, pulses adc_start, and waits for adc_done before moving on.
//
// Interface: adc_start/adc_busy/adc_done connect to sar_logic. scan_busy is
// high from frame_start until the last conversion is done. A frame that comes
// due while a scan is still running is skipped and counted in overruns.
//
// The 20 features, the 20:1 mux and the one-second frame are the SoC's; the
// clock rate, settling time and overrun handling are this design's choice.
module feature_scanner #(
  parameter int NUM_FEAT      = 20,
  parameter int FRAME_CYCLES  = 128000,
  parameter int SETTLE_CYCLES = 2
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       run,
  input  logic       adc_busy,
  input  logic       adc_done,
  output logic [4:0] mux_sel,
  output logic       adc_start,
  output logic       frame_start,
  output logic       scan_busy,
  output logic [7:0] overruns
);
  typedef enum logic [1:0] {S_IDLE, S_SETTLE, S_CONV} state_e;
  state_e state;
  logic [$clog2(FRAME_CYCLES+1)-1:0]  tmr;
  logic [$clog2(SETTLE_CYCLES+2)-1:0] settle;
  logic                               due;

  assign due       = run && (tmr == $bits(tmr)'(FRAME_CYCLES - 1));
  assign scan_busy = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tmr         <= '0;
      state       <= S_IDLE;
      mux_sel     <= '0;
      settle      <= '0;
      adc_start   <= 1'b0;
      frame_start <= 1'b0;
      overruns    <= '0;
    end else begin
      adc_start   <= 1'b0;
      frame_start <= 1'b0;
      if (!run)     tmr <= '0;
      else if (due) tmr <= '0;
      else          tmr <= tmr + 1'b1;

      unique case (state)
        S_IDLE: if (due) begin
          frame_start <= 1'b1;
          mux_sel     <= '0;
          settle      <= '0;
          state       <= S_SETTLE;
        end
        S_SETTLE: begin
          if (settle == $bits(settle)'(SETTLE_CYCLES - 1)) begin
            adc_start <= 1'b1;
            state     <= S_CONV;
          end else begin
            settle <= settle + 1'b1;
          end
        end
        S_CONV: if (adc_done) begin
          settle <= '0;
          if (mux_sel == 5'(NUM_FEAT - 1)) begin
            state <= S_IDLE;
          end else begin
            mux_sel <= mux_sel + 1'b1;
            state   <= S_SETTLE;
          end
        end
        default: state <= S_IDLE;
      endcase
      if (due && state != S_IDLE && overruns != 8'hff) overruns <= overruns + 1'b1;
    end
  end

  // a conversion is only requested while the converter is idle
  assert property (@(posedge clk) disable iff (!rst_n) adc_start |-> !adc_busy);
endmodule
