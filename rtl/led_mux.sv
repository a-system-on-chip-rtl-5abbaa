// led_mux: routes the 4 stimulators to the 16 LED pads.
//
// Each pad p has an enable bit led_en[p] and a 2-bit source select
// led_sel[p]; the pad is driven by stimulator led_sel[p] when enabled and held
// low otherwise. One stimulator may drive any number of pads. Purely
// combinational.
//
// Four stimulators sharing 16 pads through a multiplexer is the SoC's; on chip
// the multiplexer switches the LED current, here it is modelled as the digital
// gate drive reaching each pad's pass device. The per-pad select encoding is
// this design's choice.
module led_mux #(
  parameter int NUM_STIM = 4,
  parameter int NUM_LED  = 16,
  localparam int SW      = $clog2(NUM_STIM)
) (
  input  logic [NUM_STIM-1:0]         stim,
  input  logic [NUM_LED-1:0]          led_en,
  input  logic [NUM_LED-1:0][SW-1:0]  led_sel,
  output logic [NUM_LED-1:0]          led
);
  always_comb begin
    for (int p = 0; p < NUM_LED; p++)
      led[p] = led_en[p] & stim[led_sel[p]];
  end
endmodule
