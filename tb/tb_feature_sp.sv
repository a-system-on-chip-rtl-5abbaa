// tb_feature_sp: sends random 20-feature frames as MSB-first serial bits with
// random gaps and checks the parallel frame and the single frame_valid pulse;
// a frame cut short by frame_start must not show up.
module tb_feature_sp;
  logic clk = 0, rst_n = 0, frame_start = 0, bit_valid = 0, bit_in = 0;
  logic [19:0][9:0] features;
  logic frame_valid;
  int checks = 0, failures = 0, nvalid = 0;

  feature_sp #(.NUM_FEAT(20), .BITS(10)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) if (frame_valid) nvalid++;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic send_word(input logic [9:0] w);
    for (int b = 9; b >= 0; b--) begin
      @(negedge clk); bit_valid = 1; bit_in = w[b];
      @(negedge clk); bit_valid = 0;
      repeat ($urandom_range(0, 2)) @(negedge clk);
    end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [19:0][9:0] ref_f;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int fr = 0; fr < 12; fr++) begin
      int n_prev;
      @(negedge clk); frame_start = 1;
      @(negedge clk); frame_start = 0;
      n_prev = nvalid;
      if (fr == 5) begin
        // partial frame, then restart
        for (int k = 0; k < 7; k++) send_word(10'($urandom));
        @(negedge clk); frame_start = 1;
        @(negedge clk); frame_start = 0;
      end
      for (int k = 0; k < 20; k++) begin
        ref_f[k] = 10'($urandom);
        send_word(ref_f[k]);
      end
      repeat (2) @(negedge clk);
      check(nvalid == n_prev + 1, $sformatf("frame %0d: %0d valid pulses", fr, nvalid - n_prev));
      for (int k = 0; k < 20; k++)
        check(features[k] == ref_f[k], $sformatf("frame %0d feature %0d: %0d vs %0d", fr, k, features[k], ref_f[k]));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
