// stim_mapping: turns the detected sleep stage into stimulator enables.
//
// A programmable table holds one NUM_STIM-bit mask per sleep stage. When a new
// classification arrives (stage_valid) the mask of that stage is latched into
// stim_en and held until the next classification, so the selected stimuli run
// for as long as the animal stays in the stage. Clearing loop_en switches all
// stimulators off at once; a stage code outside 0..4 selects no stimulator.
//
// Timing: stim_en changes the clock after stage_valid.
//
// Stage-triggered, pre-defined stimuli are the SoC's; the mask table and the
// hold-until-next-classification behaviour are this design's choice.
module stim_mapping #(
  parameter int N_STAGES = 5,
  parameter int NUM_STIM = 4
) (
  input  logic                               clk,
  input  logic                               rst_n,
  input  logic                               stage_valid,
  input  logic [2:0]                         stage,
  input  logic [N_STAGES-1:0][NUM_STIM-1:0]  map_table,
  input  logic                               loop_en,
  output logic [NUM_STIM-1:0]                stim_en
);
  logic [NUM_STIM-1:0] held;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      held <= '0;
    end else if (!loop_en) begin
      held <= '0;
    end else if (stage_valid) begin
      held <= (int'(stage) < N_STAGES) ? map_table[stage] : '0;
    end
  end

  assign stim_en = held;
endmodule
