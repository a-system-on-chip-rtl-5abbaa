// tb_sleep_soc_top: the whole closed loop at its default sizes and timing
// (128 000-clock, one-second frames).
//
// A behavioural model of the analog side supplies the 20 feature levels: the
// level of the selected mux input is held while the ADC samples, and an ideal
// comparator answers each trial code. Feature vectors change every 6 frames.
// The testbench programs random first-stage coefficients, an LSTM whose units
// follow their own inputs, four stimulator settings, a stage-to-stimulator map
// and the LED routing through the register port, then checks:
//   - every frame's scores against the reference forward pass,
//   - no classification before the 30-frame window is full, and every
//     classification after it against the reference LSTM over the last 30
//     reference score frames,
//   - stimulator enables against the map, and every LED pad, every clock,
//     against a PWM/TSTM/TPER model of its routed stimulator,
//   - that switching the loop off darkens all pads.
// It counts the mechanisms (window fill, sliding classification, stage
// switch, PWM pulses, TSTM gating, disabled pads, loop off) and fails any
// that never happened.
module tb_sleep_soc_top;
  import sleep_pkg::*;
  import nn_ref_pkg::*;

  localparam int FRAME  = 128000;
  localparam int NFRAME = 40;
  localparam int SEG    = 6;

  logic clk = 0, rst_n = 0;
  logic cfg_we = 0;
  logic [15:0] cfg_addr = 0, cfg_wdata = 0, cfg_rdata;
  logic [4:0] mux_sel;
  logic adc_sample, adc_comp;
  logic [9:0] adc_dac_code;
  logic [3:0][3:0] amp_gain, stim_ilim_code;
  logic [19:0][5:0] filt_lo_code, filt_hi_code;
  logic [15:0] led;
  logic [2:0] stage;
  logic stage_valid, frame_scored;
  logic [4:0][15:0] frame_scores;
  logic [7:0] scan_overruns;

  sleep_soc_top dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 30) $display("FAIL %s", what); end
  endtask

  // ---------------- analog model ----------------
  int level[20];          // present feature levels
  int held;               // level on the sampling capacitors
  int captured[20];       // levels the ADC sampled in the current scan
  always @(posedge clk) if (adc_sample) begin
    held <= level[mux_sel];
    captured[mux_sel] = level[mux_sel];
  end
  assign adc_comp = (held >= int'(adc_dac_code));

  // ---------------- configuration ----------------
  int c1[] = new[S1_WORDS];
  int c2[] = new[S2_WORDS];
  int n_on[4]  = '{8, 16, 32, 4};
  int t_stm[4] = '{2, 1, 3, 1};
  int t_per[4] = '{4, 1, 5, 2};
  logic [4:0][3:0] smap = {4'b0011, 4'b1000, 4'b0100, 4'b0010, 4'b0001};
  logic [15:0] led_en_v = 16'h7fff;     // pad 15 unused
  logic [15:0][1:0] led_sel_v;

  task automatic wr(input logic [15:0] a, input logic [15:0] d);
    @(negedge clk); cfg_we = 1; cfg_addr = a; cfg_wdata = d;
    @(negedge clk); cfg_we = 0;
  endtask

  // ---------------- mechanism counters ----------------
  int n_frames = 0, n_class = 0, n_stage_switch = 0, n_pulses = 0, n_gated = 0;
  int n_dark_pad = 0, n_loop_off = 0, n_early = 0;
  longint ref_scores[$][5];
  int last_stage = -1;

  // features per frame: change every SEG frames, chosen so the first-stage
  // winner differs from the previous segment
  int seg_winner = -1;
  task automatic new_segment();
    longint sc[5];
    int f[] = new[20];
    int best;
    for (int tries = 0; tries < 200; tries++) begin
      for (int k = 0; k < 20; k++) f[k] = $urandom_range(0, 1023);
      stage1(c1, f, sc);
      best = 0;
      for (int j = 1; j < 5; j++) if (sc[j] > sc[best]) best = j;
      if (best != seg_winner) break;
    end
    seg_winner = best;
    for (int k = 0; k < 20; k++) level[k] = f[k];
  endtask

  // frame results against the reference
  always @(posedge clk) if (rst_n) begin
    if (frame_scored) begin
      longint sc[5];
      int f[] = new[20];
      for (int k = 0; k < 20; k++) f[k] = captured[k];
      stage1(c1, f, sc);
      for (int j = 0; j < 5; j++)
        check(longint'($signed(frame_scores[j])) == sc[j],
              $sformatf("frame %0d score %0d: %0d vs %0d", n_frames, j, $signed(frame_scores[j]), sc[j]));
      ref_scores.push_back(sc);
      n_frames++;
      if (n_frames % SEG == 0) new_segment();
    end
    if (stage_valid) begin
      longint xs[][5];
      longint hr[5];
      int sr;
      if (n_frames < WINDOW) n_early++;
      else begin
        xs = new[WINDOW];
        for (int t = 0; t < WINDOW; t++) xs[t] = ref_scores[ref_scores.size() - WINDOW + t];
        sr = lstm(c2, xs, WINDOW, hr);
        check(int'(stage) == sr, $sformatf("classification %0d: stage %0d vs %0d", n_class, stage, sr));
        if (last_stage >= 0 && sr != last_stage) n_stage_switch++;
        last_stage = sr;
      end
      n_class++;
    end
  end

  // stimulator enables follow the map one clock after a classification
  always @(posedge clk) if (rst_n && stage_valid && dut.cfg.loop_en) begin
    logic [2:0] s;
    s = stage;
    @(negedge clk);
    check(dut.stim_en == smap[s], $sformatf("enables %b for stage %0d", dut.stim_en, s));
  end

  // PWM/TSTM/TPER model per stimulator and per-pad comparison
  int k_cnt[4];
  logic en_prev[4];
  logic [3:0] model;
  always @(negedge clk) if (rst_n) begin
    for (int s = 0; s < 4; s++) begin
      logic en_now;
      en_now = dut.stim_en[s];
      if (en_now && !en_prev[s]) k_cnt[s] = 0; else k_cnt[s]++;
      // output registered one clock after the enable edge
      model[s] = en_prev[s] && en_now && ((k_cnt[s] - 1) % 32 < n_on[s]) && (((k_cnt[s] - 1) / 32) % t_per[s] < t_stm[s]);
      if (en_prev[s] && en_now && (k_cnt[s] - 1) % 32 == 0) begin
        if (((k_cnt[s] - 1) / 32) % t_per[s] >= t_stm[s]) n_gated++;
      end
      en_prev[s] = en_now;
    end
    for (int p = 0; p < 16; p++) begin
      logic expv;
      expv = led_en_v[p] && model[led_sel_v[p]];
      check(led[p] == expv, $sformatf("pad %0d: %0d vs %0d", p, led[p], expv));
      if (led[p] && !led_en_v[p]) n_dark_pad = -1000;
    end
    if (model[0]) n_pulses++;
  end

  initial begin
    repeat (FRAME * (NFRAME + 3)) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int p = 0; p < 16; p++) led_sel_v[p] = 2'(p % 4);
    for (int a = 0; a < S1_WORDS; a++) c1[a] = $urandom_range(0, 60) - 30;
    // LSTM: each unit follows its own input (i, o open, f nearly closed)
    for (int a = 0; a < S2_WORDS; a++) c2[a] = 0;
    for (int u = 0; u < 5; u++) begin
      c2[(0*5 + u)*11 + 10] = 127;     // input gate bias
      c2[(1*5 + u)*11 + 10] = -128;    // forget gate bias
      c2[(2*5 + u)*11 + u]  = 64;      // cell input from x_u
      c2[(3*5 + u)*11 + 10] = 127;     // output gate bias
    end
    for (int s = 0; s < 4; s++) begin en_prev[s] = 0; k_cnt[s] = 0; end
    new_segment();
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int a = 0; a < S1_WORDS; a++) wr(A_S1_BASE + 16'(a), 16'(c1[a]) & 16'h00ff);
    for (int a = 0; a < S2_WORDS; a++) wr(A_S2_BASE + 16'(a), 16'(c2[a]) & 16'h00ff);
    wr(A_GAIN, 16'h9a5c);
    for (int f = 0; f < 20; f++) wr(A_FILT_BASE + 16'(f), {2'd0, 6'(f + 40), 2'd0, 6'(f)});
    for (int s = 0; s < 4; s++) begin
      wr(A_STIM_BASE + 16'(4*s),     16'(n_on[s]));
      wr(A_STIM_BASE + 16'(4*s + 1), 16'(t_stm[s]));
      wr(A_STIM_BASE + 16'(4*s + 2), 16'(t_per[s]));
      wr(A_STIM_BASE + 16'(4*s + 3), 16'(s + 5));
    end
    wr(A_STAGEMAP0, {smap[3], smap[2], smap[1], smap[0]});
    wr(A_STAGEMAP1, 16'(smap[4]));
    wr(A_LED_EN, led_en_v);
    wr(A_LED_SEL0, led_sel_v[7:0]);
    wr(A_LED_SEL1, led_sel_v[15:8]);
    check(amp_gain == 16'h9a5c, "gain codes reach the amplifiers");
    check(filt_lo_code[7] == 6'd7 && filt_hi_code[7] == 6'd47, "filter codes reach the biquads");
    check(stim_ilim_code[2] == 4'd7, "current-limit code");
    wr(A_CTRL, 16'h0003);          // run, closed loop on

    wait (n_frames == NFRAME);
    repeat (FRAME / 2) @(posedge clk);
    @(negedge clk); cfg_addr = A_STATUS; #1;
    check(cfg_rdata[3] && cfg_rdata[2:0] == 3'(last_stage) && cfg_rdata[11:4] == 8'(NFRAME),
          $sformatf("status word %h", cfg_rdata));
    // loop off: all pads dark
    wr(A_CTRL, 16'h0001);
    repeat (3) @(posedge clk);
    repeat (200) begin @(negedge clk); check(led == 0, "dark with the loop off"); end
    n_loop_off++;

    $display("frames %0d, classifications %0d (early %0d), stage switches %0d, pulse clocks %0d, gated periods %0d, overruns %0d",
             n_frames, n_class, n_early, n_stage_switch, n_pulses, n_gated, scan_overruns);
    check(n_early == 0, "no classification before the window is full");
    check(n_class == NFRAME - WINDOW + 1, $sformatf("%0d classifications", n_class));
    check(n_stage_switch > 0, "stage switch happened");
    check(n_pulses > 0, "PWM pulses happened");
    check(n_gated > 0, "TSTM gating happened");
    check(n_dark_pad == 0, "disabled pad stayed dark");
    check(n_loop_off == 1, "loop switched off");
    check(scan_overruns == 0, "no frame overrun");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
