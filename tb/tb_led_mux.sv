// tb_led_mux: random stimulator outputs, enables and selects against a
// per-pad model.
module tb_led_mux;
  logic [3:0] stim;
  logic [15:0] led_en, led;
  logic [15:0][1:0] led_sel;
  int checks = 0, failures = 0;

  led_mux #(.NUM_STIM(4), .NUM_LED(16)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 2000; n++) begin
      stim = 4'($urandom); led_en = 16'($urandom); led_sel = 32'($urandom);
      #1;
      for (int p = 0; p < 16; p++) begin
        bit expv;
        expv = led_en[p] && ((stim >> led_sel[p]) & 1);
        checks++;
        if (led[p] !== expv) begin
          failures++;
          $display("FAIL pad %0d sel %0d en %0d stim %b -> %0d", p, led_sel[p], led_en[p], stim, led[p]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
