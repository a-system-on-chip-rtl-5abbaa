// tb_frame_window: pushes 75 numbered frames and, after each push, reads the
// whole window by age and compares with the last 30 frames; checks when full
// rises.
module tb_frame_window;
  localparam int D = 30;
  logic clk = 0, rst_n = 0, push = 0, full;
  logic [4:0][15:0] din, dout;
  logic [4:0] rd_idx = 0;
  int checks = 0, failures = 0;
  logic [4:0][15:0] hist [$];

  frame_window #(.DEPTH(D), .N_OUT(5), .W(16)) dut (.*);
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
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int f = 0; f < 75; f++) begin
      @(negedge clk);
      for (int k = 0; k < 5; k++) din[k] = 16'($urandom);
      push = 1;
      hist.push_back(din);
      @(negedge clk);
      push = 0;
      check(full == (f >= D - 1), $sformatf("full=%0d after %0d pushes", full, f + 1));
      if (full) begin
        for (int a = 0; a < D; a++) begin
          rd_idx = 5'(a);
          #1;
          check(dout == hist[hist.size() - D + a], $sformatf("push %0d age %0d", f, a));
        end
      end
      repeat ($urandom_range(0, 3)) @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
