// sleep_pkg: constants, types and fixed-point helpers shared by the closed-loop
// sleep-stage classifier and stimulator.
//
// Sizes follow the SoC: 20 energy features digitised at 10 bits, a first-stage
// network of 32/18/5 neurons, a 30-frame second stage of 5 LSTM units, 4 PWM
// stimulators routed to 16 LED pads, 8-bit coefficients. The fixed-point
// formats are this design's own choice: activations are signed Q8.8 in 16 bits,
// coefficients are int8 with 6 fraction bits (range -2 .. +1.98).
package sleep_pkg;

  localparam int NUM_FEAT   = 20;   // feature-extraction channels
  localparam int ADC_BITS   = 10;   // SAR ADC resolution
  localparam int N_L1       = 32;   // stage-1 layer sizes
  localparam int N_L2       = 18;
  localparam int N_STAGES   = 5;    // wake, REM, N1, N2, N3
  localparam int WINDOW     = 30;   // stage-2 frames / LSTM steps
  localparam int NUM_STIM   = 4;    // PWM stimulators
  localparam int NUM_LED    = 16;   // LED pads
  localparam int NUM_AMP    = 4;    // recording channels
  localparam int GAIN_BITS  = 4;    // 16 gain steps
  localparam int FILT_BITS  = 6;    // 64 log-spaced corner steps
  localparam int ILIM_BITS  = 4;    // current-limit resistor code
  localparam int PWM_STEPS  = 32;   // 4 kHz period / (1/128 kHz) step
  localparam int N_BITS     = 6;    // PWM on-time code 0..32
  localparam int T_BITS     = 16;   // TSTM / TPER in PWM periods

  localparam int ACT_W      = 16;   // activation width (Q8.8)
  localparam int ACT_FRAC   = 8;
  localparam int W_BITS     = 8;    // coefficient width
  localparam int W_FRAC     = 6;
  localparam int ACC_W      = 32;

  // coefficient counts: each neuron stores its input weights then its bias
  localparam int S1_WORDS   = N_L1*(NUM_FEAT+1) + N_L2*(N_L1+1) + N_STAGES*(N_L2+1); // 1361
  localparam int S2_WORDS   = 4*N_STAGES*(2*N_STAGES+1);                              // 220

  typedef logic signed [ACT_W-1:0]  act_t;
  typedef logic signed [W_BITS-1:0] coef_t;
  typedef logic signed [ACC_W-1:0]  acc_t;
  typedef logic [ADC_BITS-1:0]      adc_code_t;

  typedef enum logic [2:0] {
    ST_WAKE = 3'd0, ST_REM = 3'd1, ST_N1 = 3'd2, ST_N2 = 3'd3, ST_N3 = 3'd4
  } stage_e;

  // settings of one PWM stimulator
  typedef struct packed {
    logic [N_BITS-1:0]    n_on;    // on-time in 1/128 kHz steps
    logic [T_BITS-1:0]    t_stm;   // stimulation-on time, PWM periods
    logic [T_BITS-1:0]    t_per;   // stimulation period, PWM periods
    logic [ILIM_BITS-1:0] ilim;    // current-limit resistor code
  } stim_cfg_t;

  // everything the register file drives
  typedef struct packed {
    logic                                 run;          // frame timer on
    logic                                 loop_en;      // closed loop on
    logic [NUM_AMP-1:0][GAIN_BITS-1:0]    amp_gain;
    logic [NUM_FEAT-1:0][FILT_BITS-1:0]   filt_lo;
    logic [NUM_FEAT-1:0][FILT_BITS-1:0]   filt_hi;
    stim_cfg_t [NUM_STIM-1:0]             stim;
    logic [N_STAGES-1:0][NUM_STIM-1:0]    stage_map;    // stimulators per stage
    logic [NUM_LED-1:0]                   led_en;
    logic [NUM_LED-1:0][1:0]              led_sel;
  } soc_cfg_t;

  // register map (word addresses)
  localparam logic [15:0] A_S1_BASE   = 16'h0000;  // 0x0000..0x0550 stage-1 coefficients
  localparam logic [15:0] A_S2_BASE   = 16'h0800;  // 0x0800..0x08DB LSTM coefficients
  localparam logic [15:0] A_CTRL      = 16'h1000;  // bit0 run, bit1 loop_en
  localparam logic [15:0] A_GAIN      = 16'h1001;  // 4 x 4-bit gains
  localparam logic [15:0] A_STATUS    = 16'h1002;  // read: stage, valid, frame count
  localparam logic [15:0] A_STAGEMAP0 = 16'h1004;  // {map[3],map[2],map[1],map[0]}
  localparam logic [15:0] A_STAGEMAP1 = 16'h1005;  // map[4]
  localparam logic [15:0] A_LED_EN    = 16'h1006;
  localparam logic [15:0] A_LED_SEL0  = 16'h1007;  // pads 0..7, 2 bits each
  localparam logic [15:0] A_LED_SEL1  = 16'h1008;  // pads 8..15
  localparam logic [15:0] A_STIM_BASE = 16'h1010;  // 4 words per stimulator
  localparam logic [15:0] A_FILT_BASE = 16'h1020;  // one word per feature {hi,lo}

  // saturate a wide signed value to an activation
  function automatic act_t sat_act(input logic signed [47:0] v);
    if (v > 48'sd32767)       return act_t'(16'sh7fff);
    else if (v < -48'sd32768) return act_t'(16'sh8000);
    else                      return act_t'(v[15:0]);
  endfunction

  // accumulator (product scale 2^-(ACT_FRAC+W_FRAC)) back to Q8.8
  function automatic act_t acc_to_act(input acc_t a);
    logic signed [47:0] w;
    w = 48'(a) >>> W_FRAC;
    return sat_act(w);
  endfunction

  // bias aligned to the accumulator scale
  function automatic acc_t bias_to_acc(input coef_t b);
    return acc_t'(b) <<< ACT_FRAC;
  endfunction

  // hard sigmoid clip(0.2*x + 0.5, 0, 1) in Q8.8, with 0.2 taken as 51/256
  function automatic act_t hard_sigmoid(input act_t x);
    logic signed [31:0] t;
    t = ((32'(x) * 32'sd51) >>> 8) + 32'sd128;
    if (t < 0)        return '0;
    else if (t > 256) return act_t'(16'sd256);
    else              return act_t'(t[15:0]);
  endfunction

  // Q8.8 product, truncated toward minus infinity
  function automatic act_t qmul(input act_t a, input act_t b);
    logic signed [31:0] p;
    p = 32'(a) * 32'(b);
    return sat_act(48'(p) >>> ACT_FRAC);
  endfunction

endpackage
