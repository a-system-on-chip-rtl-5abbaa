// lstm_stage2: second-stage network, one LSTM layer over the 30-frame window.
//
// The LSTM reads the window oldest frame first (rd_idx = t, x = frame t) and
// runs T_STEPS recurrent steps from a zero state. Each step has two passes.
// Pass 1 computes the 20 gate pre-activations z = Wx.x + Wh.h + b (gates i, f,
// g, o for each of the N_H units) with one multiply-accumulate per clock,
// 11 clocks per gate and unit. Pass 2 updates each unit in turn:
//   i, f, o = hard_sigmoid(z)   = clip(0.2 z + 0.5, 0, 1), 0.2 taken as 51/256
//   g       = softsign(z)       = z / (1 + |z|)
//   c       = f*c + i*g
//   h       = o * softsign(c)
// using one sequential softsign divider. After the last step the stage is the
// index of the largest h (lowest index on a tie): 0 wake, 1 REM, 2 N1, 3 N2,
// 4 N3. A whole window takes a little over 10 000 clocks (about 80 ms at
// 128 kHz), well inside the 1 s frame.
//
// Coefficients are int8 with 6 fraction bits; for gate gi (0 i, 1 f, 2 g, 3 o)
// and unit u the 11 words at (gi*N_H + u)*11 are the N_IN input weights, the
// N_H recurrent weights and the bias. Values are Q8.8, products truncated.
//
// The LSTM, its 30 steps, the 5 outputs, the 8-bit coefficients and the
// hard-sigmoid/softsign activations are the SoC's. On the SoC it runs as
// software on a RISC-V; the zero initial state per window, the argmax output
// without a further dense layer and all number formats are this design's.
module lstm_stage2
  import sleep_pkg::*;
#(
  parameter int T_STEPS = 30,
  parameter int N_IN    = 5,
  parameter int N_H     = 5,
  localparam int NW     = N_IN + N_H + 1,        // words per gate and unit
  localparam int WORDS  = 4*N_H*NW,
  localparam int AW     = $clog2(WORDS),
  localparam int TW     = $clog2(T_STEPS)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 w_we,
  input  logic [AW-1:0]        w_addr,
  input  logic [W_BITS-1:0]    w_data,
  input  logic                 start,
  output logic [TW-1:0]        rd_idx,
  input  act_t [N_IN-1:0]      x,
  output logic                 busy,
  output logic                 done,
  output logic [2:0]           stage,
  output act_t [N_H-1:0]       h
);
  coef_t mem [WORDS];
  always_ff @(posedge clk) if (w_we && int'(w_addr) < WORDS) mem[w_addr] <= coef_t'(w_data);

  typedef enum logic [2:0] {S_IDLE, S_Z, S_G, S_C, S_H, S_NEXT, S_OUT} state_e;
  state_e state;

  act_t [N_H-1:0]        c;
  act_t [3:0][N_H-1:0]   z;
  logic [TW-1:0]         t;
  logic [4:0]            p;       // gate*N_H + unit in pass 1
  logic [4:0]            k;       // word within a gate/unit
  logic [AW-1:0]         ptr;
  logic [2:0]            u;       // unit in pass 2
  acc_t                  acc;
  logic                  ss_start, ss_done, ss_wait;
  act_t                  ss_x, ss_y, g_act, c_new;

  softsign_unit u_ss (.clk, .rst_n, .start(ss_start), .x(ss_x), .done(ss_done), .y(ss_y));

  assign rd_idx = t;
  assign busy   = (state != S_IDLE);

  coef_t w;
  act_t  operand;
  acc_t  acc_sum;
  logic [1:0] pg;
  logic [2:0] pu;
  always_comb begin
    w       = mem[ptr];
    operand = (int'(k) < N_IN) ? x[k] : h[int'(k) - N_IN];
    acc_sum = acc + bias_to_acc(w);
    pg      = 2'(int'(p) / N_H);
    pu      = 3'(int'(p) % N_H);
    c_new   = sat_act(48'(qmul(hard_sigmoid(z[1][u]), c[u])) +
                      48'(qmul(hard_sigmoid(z[0][u]), g_act)));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      c        <= '0;
      h        <= '0;
      z        <= '0;
      t        <= '0;
      p        <= '0;
      k        <= '0;
      ptr      <= '0;
      u        <= '0;
      acc      <= '0;
      ss_start <= 1'b0;
      ss_x     <= '0;
      ss_wait  <= 1'b0;
      g_act    <= '0;
      done     <= 1'b0;
      stage    <= '0;
    end else begin
      done     <= 1'b0;
      ss_start <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          c     <= '0;
          h     <= '0;
          t     <= '0;
          p     <= '0;
          k     <= '0;
          ptr   <= '0;
          acc   <= '0;
          state <= S_Z;
        end
        // pass 1: gate pre-activations from x_t and the previous h
        S_Z: begin
          ptr <= ptr + 1'b1;
          if (int'(k) < N_IN + N_H) begin
            acc <= acc + acc_t'(operand) * acc_t'(w);
            k   <= k + 1'b1;
          end else begin
            z[pg][pu] <= acc_to_act(acc_sum);
            acc <= '0;
            k   <= '0;
            if (int'(p) == 4*N_H - 1) begin
              p     <= '0;
              u     <= '0;
              state <= S_G;
            end else begin
              p <= p + 1'b1;
            end
          end
        end
        // pass 2, per unit: g = softsign(z_g)
        S_G: begin
          if (!ss_wait) begin
            ss_x     <= z[2][u];
            ss_start <= 1'b1;
            ss_wait  <= 1'b1;
          end else if (ss_done) begin
            g_act   <= ss_y;
            ss_wait <= 1'b0;
            state   <= S_C;
          end
        end
        // c = f*c + i*g, then softsign(c)
        S_C: begin
          if (!ss_wait) begin
            c[u]     <= c_new;
            ss_x     <= c_new;
            ss_start <= 1'b1;
            ss_wait  <= 1'b1;
          end else if (ss_done) begin
            ss_wait <= 1'b0;
            state   <= S_H;
          end
        end
        S_H: begin
          h[u] <= qmul(hard_sigmoid(z[3][u]), ss_y);
          if (int'(u) == N_H - 1) state <= S_NEXT;
          else begin
            u     <= u + 1'b1;
            state <= S_G;
          end
        end
        S_NEXT: begin
          ptr <= '0;
          if (int'(t) == T_STEPS - 1) state <= S_OUT;
          else begin
            t     <= t + 1'b1;
            state <= S_Z;
          end
        end
        S_OUT: begin
          logic [2:0] best;
          best = '0;
          for (int n = 1; n < N_H; n++)
            if (h[n] > h[best]) best = 3'(n);
          stage <= best;
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
