// sleep_soc_top: closed-loop sleep-stage classifier and optical stimulator.
//
// Signal path, once per frame (1 s): feature_scanner steps the analog feature
// mux (mux_sel) through the 20 energy features and starts the SAR logic for
// each; the analog capacitor DAC and comparator sit outside (adc_sample,
// adc_dac_code out, adc_comp in). The SAR bits travel serially to feature_sp,
// which hands a complete 20-feature frame to nn_stage1 (20-32-18-5). Its five
// stage scores enter the 30-frame sliding window; once the window is full,
// every new frame runs lstm_stage2 over it, which yields the detected stage.
// stim_mapping turns the stage into enables for the four pwm_stimulator
// instances, and led_mux routes them to the 16 LED pads.
//
// Everything is programmed through the cfg_* word port (see cfg_regs and the
// register map in sleep_pkg). The analog settings the registers hold (gain,
// filter corners, LED current limit) leave the top as ports. The clock is
// 128 kHz: one clock is one PWM step and FRAME_CYCLES clocks are one frame.
// A whole frame of processing takes about 12 000 clocks (under 0.1 s).
//
// The chain of blocks follows the SoC's system diagram; on the SoC the two
// networks and the mapping run as software on a RISC-V core, here they are
// fixed-function logic.
module sleep_soc_top
  import sleep_pkg::*;
#(
  parameter int FRAME_CYCLES  = 128000,
  parameter int SETTLE_CYCLES = 2
) (
  input  logic                                 clk,
  input  logic                                 rst_n,
  // configuration port
  input  logic                                 cfg_we,
  input  logic [15:0]                          cfg_addr,
  input  logic [15:0]                          cfg_wdata,
  output logic [15:0]                          cfg_rdata,
  // feature mux and SAR ADC analog part
  output logic [4:0]                           mux_sel,
  output logic                                 adc_sample,
  output logic [ADC_BITS-1:0]                  adc_dac_code,
  input  logic                                 adc_comp,
  // analog settings
  output logic [NUM_AMP-1:0][GAIN_BITS-1:0]    amp_gain,
  output logic [NUM_FEAT-1:0][FILT_BITS-1:0]   filt_lo_code,
  output logic [NUM_FEAT-1:0][FILT_BITS-1:0]   filt_hi_code,
  output logic [NUM_STIM-1:0][ILIM_BITS-1:0]   stim_ilim_code,
  // LED pads and result
  output logic [NUM_LED-1:0]                   led,
  output logic [2:0]                           stage,
  output logic                                 stage_valid,
  output act_t [N_STAGES-1:0]                  frame_scores,
  output logic                                 frame_scored,
  output logic [7:0]                           scan_overruns
);
  soc_cfg_t cfg;
  logic        s1_we, s2_we;
  logic [10:0] s1_addr;
  logic [7:0]  s2_addr, coef_data;
  logic [7:0]  frames;
  logic        have_stage;

  // frame scan and ADC
  logic adc_start, adc_busy, adc_done, bit_valid, bit_out, frame_start;

  feature_scanner #(.NUM_FEAT(NUM_FEAT), .FRAME_CYCLES(FRAME_CYCLES), .SETTLE_CYCLES(SETTLE_CYCLES)) u_scan (
    .clk, .rst_n, .run(cfg.run), .adc_busy, .adc_done, .mux_sel, .adc_start,
    .frame_start, .scan_busy(), .overruns(scan_overruns));

  sar_logic #(.BITS(ADC_BITS)) u_sar (
    .clk, .rst_n, .start(adc_start), .comp(adc_comp), .sample(adc_sample),
    .dac_code(adc_dac_code), .bit_valid, .bit_out, .busy(adc_busy), .done(adc_done),
    .code());

  logic [NUM_FEAT-1:0][ADC_BITS-1:0] features;
  logic frame_valid;
  feature_sp #(.NUM_FEAT(NUM_FEAT), .BITS(ADC_BITS)) u_sp (
    .clk, .rst_n, .frame_start, .bit_valid, .bit_in(bit_out), .features, .frame_valid);

  // stage 1
  logic s1_busy, s1_done;
  act_t [N_STAGES-1:0] scores;
  nn_stage1 u_s1 (
    .clk, .rst_n, .w_we(s1_we), .w_addr(s1_addr), .w_data(coef_data),
    .start(frame_valid), .features, .busy(s1_busy), .done(s1_done), .scores);

  assign frame_scores = scores;
  assign frame_scored = s1_done;

  // sliding window and stage 2
  logic win_full;
  logic [$clog2(WINDOW)-1:0] rd_idx;
  act_t [N_STAGES-1:0] win_frame;
  frame_window #(.DEPTH(WINDOW), .N_OUT(N_STAGES), .W(ACT_W)) u_win (
    .clk, .rst_n, .push(s1_done), .din(scores), .full(win_full), .rd_idx, .dout(win_frame));

  logic s2_start, s2_busy, s2_done;
  logic [2:0] s2_stage;
  // the clock after each push, run the LSTM if the window is full
  logic push_q;
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) push_q <= 1'b0;
    else        push_q <= s1_done;
  assign s2_start = push_q && win_full;

  lstm_stage2 #(.T_STEPS(WINDOW), .N_IN(N_STAGES), .N_H(N_STAGES)) u_s2 (
    .clk, .rst_n, .w_we(s2_we), .w_addr(s2_addr), .w_data(coef_data),
    .start(s2_start), .rd_idx, .x(win_frame), .busy(s2_busy), .done(s2_done),
    .stage(s2_stage), .h());

  assign stage       = s2_stage;
  assign stage_valid = s2_done;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      frames     <= '0;
      have_stage <= 1'b0;
    end else begin
      if (s1_done) frames <= frames + 1'b1;
      if (s2_done) have_stage <= 1'b1;
    end
  end

  // stimulation
  logic [NUM_STIM-1:0] stim_en, stim_pwm;
  stim_mapping #(.N_STAGES(N_STAGES), .NUM_STIM(NUM_STIM)) u_map (
    .clk, .rst_n, .stage_valid(s2_done), .stage(s2_stage), .map_table(cfg.stage_map),
    .loop_en(cfg.loop_en), .stim_en);

  for (genvar s = 0; s < NUM_STIM; s++) begin : g_stim
    pwm_stimulator #(.PWM_STEPS(PWM_STEPS), .N_BITS(N_BITS), .T_BITS(T_BITS)) u_pwm (
      .clk, .rst_n, .en(stim_en[s]), .n_on(cfg.stim[s].n_on), .t_stm(cfg.stim[s].t_stm),
      .t_per(cfg.stim[s].t_per), .pwm(stim_pwm[s]));
    assign stim_ilim_code[s] = cfg.stim[s].ilim;
  end

  led_mux #(.NUM_STIM(NUM_STIM), .NUM_LED(NUM_LED)) u_led (
    .stim(stim_pwm), .led_en(cfg.led_en), .led_sel(cfg.led_sel), .led);

  cfg_regs u_regs (
    .clk, .rst_n, .we(cfg_we), .addr(cfg_addr), .wdata(cfg_wdata), .rdata(cfg_rdata),
    .st_stage(s2_stage), .st_valid(have_stage), .st_frames(frames), .cfg,
    .s1_we, .s1_addr, .s2_we, .s2_addr, .coef_data);

  assign amp_gain     = cfg.amp_gain;
  assign filt_lo_code = cfg.filt_lo;
  assign filt_hi_code = cfg.filt_hi;

  // the networks must keep up with the frame rate
  assert property (@(posedge clk) disable iff (!rst_n) frame_valid |-> !s1_busy);
  assert property (@(posedge clk) disable iff (!rst_n) s2_start |-> !s2_busy);
endmodule
