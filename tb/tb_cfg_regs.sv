// tb_cfg_regs: writes every register with random data and reads it back,
// checks the decoded fields, the status word and the coefficient write
// strobes and addresses for both coefficient memories.
module tb_cfg_regs;
  import sleep_pkg::*;
  logic clk = 0, rst_n = 0, we = 0;
  logic [15:0] addr = 0, wdata = 0, rdata;
  logic [2:0] st_stage = 0;
  logic st_valid = 0;
  logic [7:0] st_frames = 0;
  soc_cfg_t cfg;
  logic s1_we, s2_we;
  logic [10:0] s1_addr;
  logic [7:0] s2_addr, coef_data;
  int checks = 0, failures = 0;

  cfg_regs dut (.*);
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic wr(input logic [15:0] a, input logic [15:0] d);
    @(negedge clk); we = 1; addr = a; wdata = d;
    @(negedge clk); we = 0;
  endtask

  task automatic rd_check(input logic [15:0] a, input logic [15:0] expv);
    @(negedge clk); addr = a; #1;
    check(rdata == expv, $sformatf("read %h: %h vs %h", a, rdata, expv));
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [15:0] d;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    check(cfg == '0, "all zero after reset");
    wr(16'h1000, 16'h0003);
    check(cfg.run && cfg.loop_en, "ctrl bits");
    rd_check(16'h1000, 16'h0003);
    d = 16'($urandom); wr(16'h1001, d);
    for (int c = 0; c < 4; c++) check(cfg.amp_gain[c] == d[4*c +: 4], $sformatf("gain %0d", c));
    rd_check(16'h1001, d);
    d = 16'($urandom); wr(16'h1004, d);
    for (int s = 0; s < 4; s++) check(cfg.stage_map[s] == d[4*s +: 4], $sformatf("map %0d", s));
    wr(16'h1005, 16'h000b);
    check(cfg.stage_map[4] == 4'hb, "map 4");
    d = 16'($urandom); wr(16'h1006, d); check(cfg.led_en == d, "led_en");
    d = 16'($urandom); wr(16'h1007, d);
    for (int p = 0; p < 8; p++) check(cfg.led_sel[p] == d[2*p +: 2], $sformatf("sel %0d", p));
    d = 16'($urandom); wr(16'h1008, d);
    for (int p = 8; p < 16; p++) check(cfg.led_sel[p] == d[2*(p-8) +: 2], $sformatf("sel %0d", p));
    for (int s = 0; s < 4; s++) begin
      logic [15:0] n, a, b, l;
      n = 16'($urandom_range(0, 63)); a = 16'($urandom); b = 16'($urandom); l = 16'($urandom_range(0, 15));
      wr(16'h1010 + 16'(4*s), n); wr(16'h1011 + 16'(4*s), a); wr(16'h1012 + 16'(4*s), b); wr(16'h1013 + 16'(4*s), l);
      check(cfg.stim[s].n_on == n[5:0] && cfg.stim[s].t_stm == a && cfg.stim[s].t_per == b && cfg.stim[s].ilim == l[3:0],
            $sformatf("stim %0d fields", s));
      rd_check(16'h1011 + 16'(4*s), a);
      rd_check(16'h1012 + 16'(4*s), b);
    end
    for (int f = 0; f < 20; f++) begin
      d = 16'($urandom) & 16'h3f3f; wr(16'h1020 + 16'(f), d);
      check(cfg.filt_lo[f] == d[5:0] && cfg.filt_hi[f] == d[13:8], $sformatf("filter %0d", f));
      rd_check(16'h1020 + 16'(f), d);
    end
    st_stage = 3'd4; st_valid = 1; st_frames = 8'h5a;
    rd_check(16'h1002, {4'd0, 8'h5a, 1'b1, 3'd4});
    // coefficient strobes
    @(negedge clk); we = 1; addr = 16'd1360; wdata = 16'h00a5; #1;
    check(s1_we && !s2_we && s1_addr == 11'd1360 && coef_data == 8'ha5, "stage-1 coefficient write");
    addr = 16'd1361; #1;
    check(!s1_we && !s2_we, "beyond stage-1 memory");
    addr = 16'h0800 + 16'd219; #1;
    check(s2_we && !s1_we && s2_addr == 8'd219, "LSTM coefficient write");
    addr = 16'h0800 + 16'd220; #1;
    check(!s2_we, "beyond LSTM memory");
    @(negedge clk); we = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
