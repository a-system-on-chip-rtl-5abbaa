// nn_stage1: first-stage sleep-scoring network, 20 -> 32 -> 18 -> 5.
//
// Three fully connected layers score the five sleep stages from the 20 energy
// features of one 1 s frame. A single multiply-accumulate unit walks the
// coefficient memory in order: for each neuron it accumulates N_in
// input x weight products and then adds the bias, one coefficient per clock,
// so a frame takes exactly S1_WORDS + 2 clocks from start to done (1363 at the
// default sizes: 32*21 + 18*33 + 5*19 coefficients).
//
// Number formats (this design's choice): inputs are the 10-bit ADC codes read
// as Q8.8 (code/256); weights and biases are int8 with 6 fraction bits; the
// accumulator is 32 bits; each neuron's sum is shifted back to Q8.8 and
// saturated to 16 bits. Hidden layers use ReLU, the output layer is linear
// and its five values are the stage scores (wake, REM, N1, N2, N3).
//
// Coefficient memory layout: layer by layer, neuron by neuron, each neuron's
// N_in weights followed by its bias. It is written through w_we/w_addr/w_data
// (the off-line training result) and read asynchronously.
//
// The layer sizes and the 8-bit coefficients are the SoC's. On the SoC the
// network runs as software on a RISC-V core; the hidden activation, the
// number formats and this single-MAC engine are this design's choice.
module nn_stage1
  import sleep_pkg::act_t, sleep_pkg::coef_t, sleep_pkg::acc_t, sleep_pkg::W_BITS,
         sleep_pkg::bias_to_acc, sleep_pkg::acc_to_act;
#(
  parameter int N_IN  = 20,
  parameter int N_L1  = 32,
  parameter int N_L2  = 18,
  parameter int N_OUT = 5,
  parameter int IN_BITS = 10,
  localparam int WORDS = N_L1*(N_IN+1) + N_L2*(N_L1+1) + N_OUT*(N_L2+1),
  localparam int AW    = $clog2(WORDS)
) (
  input  logic                            clk,
  input  logic                            rst_n,
  input  logic                            w_we,
  input  logic [AW-1:0]                   w_addr,
  input  logic [W_BITS-1:0]               w_data,
  input  logic                            start,
  input  logic [N_IN-1:0][IN_BITS-1:0]    features,
  output logic                            busy,
  output logic                            done,
  output act_t [N_OUT-1:0]                scores
);

  coef_t mem [WORDS];
  always_ff @(posedge clk) if (w_we && int'(w_addr) < WORDS) mem[w_addr] <= coef_t'(w_data);

  typedef enum logic [1:0] {S_IDLE, S_MAC, S_DONE} state_e;
  state_e state;
  logic [1:0]             layer;
  logic [5:0]             i, j;
  logic [AW-1:0]          ptr;
  acc_t                   acc;
  act_t [N_IN-1:0]        xin;
  act_t [N_L1-1:0]        h1;
  act_t [N_L2-1:0]        h2;

  logic [5:0] n_in, n_out;
  act_t       src;
  coef_t      w;
  acc_t       acc_sum;
  act_t       y;

  always_comb begin
    unique case (layer)
      2'd0:    begin n_in = 6'(N_IN); n_out = 6'(N_L1);  end
      2'd1:    begin n_in = 6'(N_L1); n_out = 6'(N_L2);  end
      default: begin n_in = 6'(N_L2); n_out = 6'(N_OUT); end
    endcase
    src = '0;
    unique case (layer)
      2'd0:    if (int'(i) < N_IN) src = xin[i];
      2'd1:    if (int'(i) < N_L1) src = h1[i];
      default: if (int'(i) < N_L2) src = h2[i];
    endcase
    w       = mem[ptr];
    acc_sum = acc + bias_to_acc(w);
    y       = acc_to_act(acc_sum);
    if (layer != 2'd2 && y < 0) y = '0;     // ReLU on hidden layers
  end

  assign busy = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= S_IDLE;
      layer  <= '0;
      i      <= '0;
      j      <= '0;
      ptr    <= '0;
      acc    <= '0;
      done   <= 1'b0;
      xin    <= '0;
      h1     <= '0;
      h2     <= '0;
      scores <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          for (int k = 0; k < N_IN; k++) xin[k] <= act_t'(features[k]);
          layer <= '0;
          i     <= '0;
          j     <= '0;
          ptr   <= '0;
          acc   <= '0;
          state <= S_MAC;
        end
        S_MAC: begin
          ptr <= ptr + 1'b1;
          if (i < n_in) begin
            acc <= acc + acc_t'(src) * acc_t'(w);
            i   <= i + 1'b1;
          end else begin
            // bias word: finish the neuron
            unique case (layer)
              2'd0:    h1[j] <= y;
              2'd1:    h2[j] <= y;
              default: scores[j] <= y;
            endcase
            acc <= '0;
            i   <= '0;
            if (j == n_out - 1) begin
              j <= '0;
              if (layer == 2'd2) state <= S_DONE;
              else               layer <= layer + 1'b1;
            end else begin
              j <= j + 1'b1;
            end
          end
        end
        S_DONE: begin
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
