// frame_window: sliding window of the last DEPTH first-stage outputs.
//
// Each push writes one frame (N_OUT scores) over the oldest entry of a
// circular buffer, so only DEPTH x N_OUT scores are kept: neither raw signals
// nor features need to be stored for the 30 s the second stage looks at.
// A read port addresses the window by age, rd_idx = 0 being the oldest frame
// and DEPTH-1 the newest; full rises once DEPTH frames have been pushed and
// stays high. The read is combinational.
//
// The 30-frame window of first-stage outputs is the SoC's; the circular
// buffer organisation is this design's choice.
module frame_window #(
  parameter int DEPTH = 30,
  parameter int N_OUT = 5,
  parameter int W     = 16,
  localparam int AW   = $clog2(DEPTH)
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       push,
  input  logic [N_OUT-1:0][W-1:0]    din,
  output logic                       full,
  input  logic [AW-1:0]              rd_idx,
  output logic [N_OUT-1:0][W-1:0]    dout
);
  logic [N_OUT-1:0][W-1:0] mem [DEPTH];
  logic [AW-1:0]           wptr;      // next slot to write = oldest slot
  logic [AW:0]             count;
  logic [AW:0]             phys;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr  <= '0;
      count <= '0;
    end else if (push) begin
      wptr  <= (wptr == AW'(DEPTH - 1)) ? '0 : wptr + 1'b1;
      if (count != (AW+1)'(DEPTH)) count <= count + 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (push) mem[wptr] <= din;
  end

  assign full = (count == (AW+1)'(DEPTH));

  always_comb begin
    phys = (AW+1)'(wptr) + (AW+1)'(rd_idx);
    if (phys >= (AW+1)'(DEPTH)) phys = phys - (AW+1)'(DEPTH);
    dout = mem[phys[AW-1:0]];
  end
endmodule
