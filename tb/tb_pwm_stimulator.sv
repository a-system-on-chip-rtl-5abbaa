// tb_pwm_stimulator: compares the output clock by clock with a model of the
// timing diagram: high when (k mod 32) < N and ((k div 32) mod TPER) < TSTM,
// k counting clocks from the enable. Covers several N/TSTM/TPER settings,
// N = 0 and 32, re-enabling, a low output while disabled, and a change of N
// in mid-period that must wait for the next period (4 kHz refresh).
module tb_pwm_stimulator;
  logic clk = 0, rst_n = 0, en = 0;
  logic [5:0]  n_on;
  logic [15:0] t_stm, t_per;
  logic pwm;
  int checks = 0, failures = 0;

  pwm_stimulator #(.PWM_STEPS(32), .N_BITS(6), .T_BITS(16)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // n2 >= 0: n_on is rewritten to n2 in the middle of a period, at clock k_chg;
  // the new on-time must only apply from the next period on
  task automatic run_case(input int n, input int stm, input int per, input int clocks,
                          input int n2 = -1, input int k_chg = 0);
    int cur_n;
    @(negedge clk); n_on = 6'(n); t_stm = 16'(stm); t_per = 16'(per); en = 1;
    for (int k = 0; k < clocks; k++) begin
      bit expv;
      int pp;
      @(negedge clk);
      if (k % 32 == 0) cur_n = int'(n_on);
      pp = (per == 0) ? 1 : per;
      expv = ((k % 32) < cur_n) && (((k / 32) % pp) < stm);
      check(pwm == expv, $sformatf("n=%0d stm=%0d per=%0d k=%0d pwm=%0d", cur_n, stm, per, k, pwm));
      if (n2 >= 0 && k == k_chg) n_on = 6'(n2);
    end
    @(negedge clk); en = 0;
    repeat (3) @(negedge clk);
    for (int k = 0; k < 40; k++) begin @(negedge clk); check(!pwm, "off while disabled"); end
  endtask

  initial begin
    n_on = 0; t_stm = 0; t_per = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run_case(8, 2, 5, 32 * 12);     // 25 % duty, 2 of 5 periods
    run_case(1, 1, 1, 32 * 4);      // continuous, minimum pulse
    run_case(32, 3, 4, 32 * 9);     // full duty inside TSTM
    run_case(0, 3, 4, 32 * 6);      // N = 0: never on
    run_case(17, 4, 0, 32 * 6);     // TPER 0 acts as 1
    run_case(20, 1, 1, 32 * 6, 6, 32 * 2 + 3);    // shorter on-time mid-pulse
    run_case(4, 1, 1, 32 * 6, 28, 32 * 3 + 10);   // longer on-time after the pulse
    for (int r = 0; r < 6; r++) run_case($urandom_range(0, 32), $urandom_range(0, 6), $urandom_range(1, 7), 32 * 16);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
