// tb_feature_scanner: a 200-clock frame with a fake 6-clock converter. Checks
// the frame period, the mux walk 0..19 with one conversion per feature, the
// settling time before each start, that nothing happens with run low, and
// (second instance, 60-clock frame) that a frame due during a scan is counted
// as an overrun.
module tb_feature_scanner;
  localparam int FRAME = 200;
  logic clk = 0, rst_n = 0, run = 0;
  int checks = 0, failures = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // fake converter: busy 6 clocks after start, then done
  function automatic void adc_step(input logic st, ref int cnt, ref logic bz, ref logic dn);
    dn = 1'b0;
    if (st) begin cnt = 6; bz = 1'b1; end
    else if (cnt > 0) begin cnt--; if (cnt == 0) begin bz = 1'b0; dn = 1'b1; end end
  endfunction

  logic busy_a = 0, done_a = 0, busy_b = 0, done_b = 0;
  int cnt_a = 0, cnt_b = 0;
  logic [4:0] sel_a, sel_b;
  logic start_a, start_b, fs_a, fs_b, sb_a, sb_b;
  logic [7:0] ovr_a, ovr_b;

  feature_scanner #(.NUM_FEAT(20), .FRAME_CYCLES(FRAME), .SETTLE_CYCLES(2)) dut (
    .clk, .rst_n, .run, .adc_busy(busy_a), .adc_done(done_a), .mux_sel(sel_a),
    .adc_start(start_a), .frame_start(fs_a), .scan_busy(sb_a), .overruns(ovr_a));
  feature_scanner #(.NUM_FEAT(20), .FRAME_CYCLES(60), .SETTLE_CYCLES(2)) dut_fast (
    .clk, .rst_n, .run, .adc_busy(busy_b), .adc_done(done_b), .mux_sel(sel_b),
    .adc_start(start_b), .frame_start(fs_b), .scan_busy(sb_b), .overruns(ovr_b));

  always #5 clk = ~clk;
  always @(posedge clk) begin
    adc_step(start_a, cnt_a, busy_a, done_a);
    adc_step(start_b, cnt_b, busy_b, done_b);
  end

  int cyc = 0, last_fs = -1, frames = 0, starts = 0, exp_sel = 0, since_sel = 0;
  logic [4:0] prev_sel = 0;
  always @(negedge clk) if (rst_n) begin
    cyc++;
    if (sel_a != prev_sel) since_sel = 0; else since_sel++;
    prev_sel = sel_a;
    if (fs_a) begin
      if (last_fs >= 0) check(cyc - last_fs == FRAME, $sformatf("frame period %0d", cyc - last_fs));
      if (frames > 0) check(starts == 20, $sformatf("%0d conversions in a frame", starts));
      last_fs = cyc; frames++; starts = 0; exp_sel = 0;
    end
    if (start_a) begin
      check(sel_a == 5'(exp_sel), $sformatf("mux %0d expected %0d", sel_a, exp_sel));
      check(since_sel >= 2, "settle before start");
      exp_sel++; starts++;
    end
    check(!(fs_a && !run), "no frame without run");
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (500) @(posedge clk);
    check(frames == 0, "idle while run low");
    run = 1;
    repeat (FRAME * 5 + 10) @(posedge clk);
    check(frames == 5, $sformatf("%0d frames", frames));
    check(ovr_a == 0, "no overrun at 200-clock frame");
    check(ovr_b > 0, "overrun counted at 60-clock frame");
    run = 0;
    repeat (FRAME * 2) @(posedge clk);
    check(frames == 5, "stops with run low");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
