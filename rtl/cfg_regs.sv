// cfg_regs: configuration registers and coefficient write port of the SoC.
//
// A host (the off-line training and control software) writes 16-bit words
// through we/addr/wdata; every write takes effect at the next clock edge.
// Addresses below A_S2_BASE go to the first-stage coefficient memory, the
// block at A_S2_BASE to the LSTM coefficient memory (low 8 bits of wdata), and
// the block at A_CTRL to the registers in sleep_pkg: control (run, loop_en),
// amplifier gain codes, stage-to-stimulator map, LED pad enables and selects,
// four words per stimulator (n_on, t_stm, t_per, current-limit code) and one
// word per feature channel with its low (bits 5:0) and high (bits 13:8)
// cut-off code. rdata returns the addressed register combinationally; the
// status word is {frames[7:0], valid, stage[2:0]}; coefficients read as 0.
// All registers reset to 0: everything off.
//
// What is programmable (16 gain steps, 64 log-spaced filter steps per corner,
// PWM on-time, TSTM, TPER, current limit, the LED mux and the NN
// coefficients) comes from the SoC; the address map and widths are this
// design's choice.
module cfg_regs
  import sleep_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        we,
  input  logic [15:0] addr,
  input  logic [15:0] wdata,
  output logic [15:0] rdata,
  // status inputs
  input  logic [2:0]  st_stage,
  input  logic        st_valid,
  input  logic [7:0]  st_frames,
  // outputs
  output soc_cfg_t    cfg,
  output logic        s1_we,
  output logic [10:0] s1_addr,
  output logic        s2_we,
  output logic [7:0]  s2_addr,
  output logic [7:0]  coef_data
);
  assign s1_we     = we && (addr < A_S2_BASE) && (int'(addr) < S1_WORDS);
  assign s1_addr   = addr[10:0];
  assign s2_we     = we && (addr >= A_S2_BASE) && (int'({16'd0, addr - A_S2_BASE}) < S2_WORDS);
  assign s2_addr   = 8'(addr - A_S2_BASE);
  assign coef_data = wdata[7:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cfg <= '0;
    end else if (we) begin
      unique case (addr)
        A_CTRL:      {cfg.loop_en, cfg.run} <= wdata[1:0];
        A_GAIN:      cfg.amp_gain <= wdata;
        A_STAGEMAP0: {cfg.stage_map[3], cfg.stage_map[2], cfg.stage_map[1], cfg.stage_map[0]} <= wdata;
        A_STAGEMAP1: cfg.stage_map[4] <= wdata[3:0];
        A_LED_EN:    cfg.led_en <= wdata;
        A_LED_SEL0:  cfg.led_sel[7:0] <= wdata;
        A_LED_SEL1:  cfg.led_sel[15:8] <= wdata;
        default: begin
          if (addr >= A_STIM_BASE && addr < A_STIM_BASE + 16'(4*NUM_STIM)) begin
            unique case (addr[1:0])
              2'd0: cfg.stim[addr[3:2]].n_on  <= wdata[N_BITS-1:0];
              2'd1: cfg.stim[addr[3:2]].t_stm <= wdata;
              2'd2: cfg.stim[addr[3:2]].t_per <= wdata;
              default: cfg.stim[addr[3:2]].ilim <= wdata[ILIM_BITS-1:0];
            endcase
          end else if (addr >= A_FILT_BASE && addr < A_FILT_BASE + 16'(NUM_FEAT)) begin
            cfg.filt_lo[addr[4:0]] <= wdata[5:0];
            cfg.filt_hi[addr[4:0]] <= wdata[13:8];
          end
        end
      endcase
    end
  end

  always_comb begin
    rdata = '0;
    unique case (addr)
      A_CTRL:      rdata = {14'd0, cfg.loop_en, cfg.run};
      A_GAIN:      rdata = cfg.amp_gain;
      A_STATUS:    rdata = {4'd0, st_frames, st_valid, st_stage};
      A_STAGEMAP0: rdata = {cfg.stage_map[3], cfg.stage_map[2], cfg.stage_map[1], cfg.stage_map[0]};
      A_STAGEMAP1: rdata = {12'd0, cfg.stage_map[4]};
      A_LED_EN:    rdata = cfg.led_en;
      A_LED_SEL0:  rdata = cfg.led_sel[7:0];
      A_LED_SEL1:  rdata = cfg.led_sel[15:8];
      default: begin
        if (addr >= A_STIM_BASE && addr < A_STIM_BASE + 16'(4*NUM_STIM)) begin
          unique case (addr[1:0])
            2'd0: rdata = 16'(cfg.stim[addr[3:2]].n_on);
            2'd1: rdata = cfg.stim[addr[3:2]].t_stm;
            2'd2: rdata = cfg.stim[addr[3:2]].t_per;
            default: rdata = 16'(cfg.stim[addr[3:2]].ilim);
          endcase
        end else if (addr >= A_FILT_BASE && addr < A_FILT_BASE + 16'(NUM_FEAT)) begin
          rdata = {2'd0, cfg.filt_hi[addr[4:0]], 2'd0, cfg.filt_lo[addr[4:0]]};
        end
      end
    endcase
  end
endmodule
