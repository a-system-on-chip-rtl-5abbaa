// tb_nn_stage1: loads random int8 coefficients, scores random feature frames
// and compares the five scores with the reference forward pass; checks the
// start-to-done time of 1363 clocks (one coefficient per clock plus two).
module tb_nn_stage1;
  import nn_ref_pkg::*;
  localparam int WORDS = 32*21 + 18*33 + 5*19;
  logic clk = 0, rst_n = 0, w_we = 0, start = 0, busy, done;
  logic [10:0] w_addr = 0;
  logic [7:0]  w_data = 0;
  logic [19:0][9:0] features;
  logic signed [4:0][15:0] scores;
  int checks = 0, failures = 0;
  int coef[] = new[WORDS];
  int feat[] = new[20];

  nn_stage1 dut (.*);
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint sc[5];
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int set = 0; set < 4; set++) begin
      // coefficient set: small weights, or full-range ones to reach saturation
      for (int a = 0; a < WORDS; a++) begin
        coef[a] = (set == 3) ? $urandom_range(0, 255) - 128 : $urandom_range(0, 60) - 30;
        @(negedge clk); w_we = 1; w_addr = 11'(a); w_data = 8'(coef[a]);
      end
      @(negedge clk); w_we = 0;
      for (int fr = 0; fr < 6; fr++) begin
        int lat;
        for (int k = 0; k < 20; k++) begin
          feat[k] = (fr == 0) ? 1023 : $urandom_range(0, 1023);
          features[k] = 10'(feat[k]);
        end
        stage1(coef, feat, sc);
        @(negedge clk); start = 1;
        @(negedge clk); start = 0;
        lat = 1;
        while (!done && lat < 5000) begin @(negedge clk); lat++; end
        check(lat == WORDS + 2, $sformatf("latency %0d", lat));
        for (int j = 0; j < 5; j++)
          check(longint'($signed(scores[j])) == sc[j], $sformatf("set %0d frame %0d score %0d: %0d vs %0d", set, fr, j, scores[j], sc[j]));
        @(negedge clk);
        check(!busy, "idle after done");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
