// pwm_stimulator: one PWM optical stimulator.
//
// With the clock at 128 kHz, one clock is one PWM step. A 5-bit phase counter
// wraps every PWM_STEPS (32) clocks, i.e. a 250 us PWM period (4 kHz refresh);
// inside it the output is high for the first n_on steps, so the on-time is
// n_on/128 kHz (n_on >= 32 gives a constant high). n_on is refreshed once
// per PWM period: a new value is taken at the start of the next period, so a
// register write never cuts or stretches a pulse in progress. A second counter counts PWM
// periods: the PWM runs during the first t_stm periods of every t_per periods
// and is off for the rest (t_per of 0 is treated as 1). Both counters restart
// when en rises, so a stimulus always begins with a full stimulation window;
// the output is low while en is low.
//
// Timing: pwm is registered; it first goes high the clock after en is seen
// high (if n_on and t_stm are non-zero).
//
// The 4 kHz refresh, the 1/128 kHz step, TSTM and TPER are the SoC's;
// counting TSTM and TPER in PWM periods with 16 bits, and the
// pulse sitting at the start of each period, are this design's choice.
module pwm_stimulator #(
  parameter int PWM_STEPS = 32,
  parameter int N_BITS    = 6,
  parameter int T_BITS    = 16
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              en,
  input  logic [N_BITS-1:0] n_on,
  input  logic [T_BITS-1:0] t_stm,
  input  logic [T_BITS-1:0] t_per,
  output logic              pwm
);
  localparam int PW = $clog2(PWM_STEPS);
  logic [PW-1:0]     phase;
  logic [T_BITS-1:0] per_cnt;
  logic              en_q;
  logic              active;
  logic [N_BITS-1:0] n_q;        // on-time of the running period
  logic [N_BITS-1:0] n_eff;

  // phase/period seen by the next output sample: restarted at an enable edge
  logic [PW-1:0]     phase_n;
  logic [T_BITS-1:0] per_n;
  always_comb begin
    if (en && !en_q) begin
      phase_n = '0;
      per_n   = '0;
    end else if (phase == PW'(PWM_STEPS - 1)) begin
      phase_n = '0;
      per_n   = (per_cnt + 1'b1 >= t_per) ? '0 : per_cnt + 1'b1;
    end else begin
      phase_n = phase + 1'b1;
      per_n   = per_cnt;
    end
  end

  assign n_eff  = (phase_n == '0) ? n_on : n_q;
  assign active = en && (per_n < t_stm) && (32'(n_eff) > 32'(phase_n));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phase   <= PW'(PWM_STEPS - 1);
      per_cnt <= '0;
      n_q     <= '0;
      en_q    <= 1'b0;
      pwm     <= 1'b0;
    end else begin
      en_q    <= en;
      phase   <= phase_n;
      per_cnt <= per_n;
      n_q     <= n_eff;
      pwm     <= active;
    end
  end
endmodule
