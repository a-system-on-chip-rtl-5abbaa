// tb_stim_mapping: random stage sequences against the mask table; checks the
// one-clock update, holding between classifications, loop_en off and an
// out-of-range stage code.
module tb_stim_mapping;
  logic clk = 0, rst_n = 0, stage_valid = 0, loop_en = 0;
  logic [2:0] stage = 0;
  logic [4:0][3:0] map_table;
  logic [3:0] stim_en;
  int checks = 0, failures = 0;

  stim_mapping #(.N_STAGES(5), .NUM_STIM(4)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [3:0] expv;
    map_table = {4'b1000, 4'b0101, 4'b0010, 4'b1111, 4'b0001};
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    check(stim_en == 0, "off after reset");
    loop_en = 1;
    expv = 0;
    for (int n = 0; n < 500; n++) begin
      @(negedge clk);
      if (n % 50 == 0) map_table = 20'($urandom);
      stage_valid = ($urandom_range(0, 3) == 0);
      stage = (n % 97 == 5) ? 3'd6 : 3'($urandom_range(0, 4));
      if (n % 120 == 60) loop_en = 0; else loop_en = 1;
      @(negedge clk);
      if (!loop_en) expv = 0;
      else if (stage_valid) expv = (stage < 5) ? map_table[stage] : 4'd0;
      check(stim_en == expv, $sformatf("step %0d stage %0d: %b vs %b", n, stage, stim_en, expv));
      stage_valid = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
