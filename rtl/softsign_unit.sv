// softsign_unit: sequential softsign y = x / (1 + |x|) on Q8.8 values.
//
// The magnitude is computed as floor(|x| * 256 / (256 + |x|)) by an 8-step
// restoring division (the quotient is always below 256, i.e. below 1.0), and
// the sign of x is applied to it. start loads x; done pulses 9 clocks later
// with y valid until the next start. Used by the LSTM for the cell input and
// the cell-state activation; the division scheme is this design's choice.
module softsign_unit
  import sleep_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  logic start,
  input  act_t x,
  output logic done,
  output act_t y
);
  logic [24:0] rem;
  logic [16:0] den;
  logic [7:0]  q;
  logic [3:0]  k;
  logic        neg, run;
  logic [15:0] mag;
  logic [24:0] trial;

  assign mag   = x[15] ? 16'(-x) : 16'(x);
  assign trial = 25'(den) << k[2:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rem  <= '0;
      den  <= '0;
      q    <= '0;
      k    <= '0;
      neg  <= 1'b0;
      run  <= 1'b0;
      done <= 1'b0;
      y    <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin
        rem <= {1'b0, mag, 8'd0};
        den <= 17'd256 + 17'(mag);
        neg <= x[15];
        q   <= '0;
        k   <= 4'd7;
        run <= 1'b1;
      end else if (run) begin
        if (rem >= trial) begin
          rem     <= rem - trial;
          q[k[2:0]] <= 1'b1;
        end
        if (k == 0) begin
          run  <= 1'b0;
          done <= 1'b1;
          y    <= neg ? -act_t'({8'd0, q | ((rem >= trial) ? 8'd1 : 8'd0)})
                      :  act_t'({8'd0, q | ((rem >= trial) ? 8'd1 : 8'd0)});
        end else begin
          k <= k - 1'b1;
        end
      end
    end
  end
endmodule
