// feature_sp: serial-to-parallel converter between the ADC and the networks.
//
// The SAR logic emits each feature as BITS serial bits, MSB first, one
// bit_valid strobe per bit. This block shifts them into a word, stores each
// completed word in the next feature slot (mux order), and pulses frame_valid
// once all NUM_FEAT words of a frame are in. frame_start clears the slot
// counter, so a frame cut short never mixes with the next one. The features
// output holds the last complete frame until the next one completes.
//
// The S/P block itself is named in the SoC's system diagram; the framing
// (MSB first, slot order = mux order) is this design's choice.
module feature_sp #(
  parameter int NUM_FEAT = 20,
  parameter int BITS     = 10
) (
  input  logic                           clk,
  input  logic                           rst_n,
  input  logic                           frame_start,
  input  logic                           bit_valid,
  input  logic                           bit_in,
  output logic [NUM_FEAT-1:0][BITS-1:0]  features,
  output logic                           frame_valid
);
  logic [BITS-2:0]                 shreg;     // bits received so far
  logic [$clog2(BITS+1)-1:0]       nbit;
  logic [$clog2(NUM_FEAT+1)-1:0]   slot;
  logic [NUM_FEAT-1:0][BITS-1:0]   gather;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      shreg       <= '0;
      nbit        <= '0;
      slot        <= '0;
      gather      <= '0;
      features    <= '0;
      frame_valid <= 1'b0;
    end else begin
      frame_valid <= 1'b0;
      if (frame_start) begin
        nbit <= '0;
        slot <= '0;
      end else if (bit_valid) begin
        if (nbit == $bits(nbit)'(BITS - 1)) begin
          nbit <= '0;
          gather[slot] <= {shreg, bit_in};
          if (slot == $bits(slot)'(NUM_FEAT - 1)) begin
            slot        <= '0;
            features    <= gather;
            features[slot] <= {shreg, bit_in};
            frame_valid <= 1'b1;
          end else begin
            slot <= slot + 1'b1;
          end
        end else begin
          nbit <= nbit + 1'b1;
        end
        shreg <= {shreg[BITS-3:0], bit_in};
      end
    end
  end
endmodule
