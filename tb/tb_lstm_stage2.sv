// tb_lstm_stage2: random coefficients and random 30-frame windows (served by
// the testbench on the rd_idx/x port) against the reference LSTM; checks the
// final hidden state, the stage (argmax) and that the run finishes within
// 12 000 clocks.
module tb_lstm_stage2;
  import nn_ref_pkg::*;
  localparam int T = 30;
  logic clk = 0, rst_n = 0, w_we = 0, start = 0, busy, done;
  logic [7:0] w_addr = 0, w_data = 0;
  logic [4:0] rd_idx;
  logic signed [4:0][15:0] x, h;
  logic [2:0] stage;
  int checks = 0, failures = 0;
  int coef[] = new[220];
  longint xs[][5];
  int stage_seen[5];

  lstm_stage2 #(.T_STEPS(T)) dut (.*);
  always #5 clk = ~clk;
  always_comb for (int k = 0; k < 5; k++) x[k] = 16'(xs[rd_idx][k]);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint hr[5];
    int sr;
    xs = new[T];
    for (int t = 0; t < T; t++) for (int k = 0; k < 5; k++) xs[t][k] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int set = 0; set < 6; set++) begin
      for (int a = 0; a < 220; a++) begin
        coef[a] = (set == 5) ? $urandom_range(0, 255) - 128 : $urandom_range(0, 100) - 50;
        @(negedge clk); w_we = 1; w_addr = 8'(a); w_data = 8'(coef[a]);
      end
      @(negedge clk); w_we = 0;
      for (int win = 0; win < 4; win++) begin
        int lat;
        for (int t = 0; t < T; t++)
          for (int k = 0; k < 5; k++)
            xs[t][k] = (win == 3) ? longint'($urandom_range(0, 65535)) - 32768
                                  : longint'($urandom_range(0, 1536)) - 768;
        sr = lstm(coef, xs, T, hr);
        stage_seen[sr]++;
        @(negedge clk); start = 1;
        @(negedge clk); start = 0;
        lat = 1;
        while (!done && lat < 100000) begin @(negedge clk); lat++; end
        check(lat <= 12000, $sformatf("run took %0d clocks", lat));
        if (set == 0 && win == 0) $display("LSTM run: %0d clocks", lat);
        for (int u = 0; u < 5; u++)
          check(longint'($signed(h[u])) == hr[u], $sformatf("set %0d win %0d h[%0d] %0d vs %0d", set, win, u, h[u], hr[u]));
        check(int'(stage) == sr, $sformatf("stage %0d vs %0d", stage, sr));
      end
    end
    $display("stages seen: %p", stage_seen);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
