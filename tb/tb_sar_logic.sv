// tb_sar_logic: converts random input levels through an ideal comparator
// model and checks the code, the serial bit stream (MSB first), the single
// sample cycle and the start-to-done latency of BITS+2 clocks.
module tb_sar_logic;
  localparam int BITS = 10;
  logic clk = 0, rst_n = 0, start = 0;
  logic comp, sample, bit_valid, bit_out, busy, done;
  logic [BITS-1:0] dac_code, code;
  int vin;
  int checks = 0, failures = 0;

  sar_logic #(.BITS(BITS)) dut (.*);

  always #5 clk = ~clk;
  assign comp = (vin >= int'(dac_code));   // ideal comparator on the sampled level

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
    vin = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 300; n++) begin
      int lat, nsample;
      logic [BITS-1:0] serial;
      int nbits;
      case (n)
        0: vin = 0;
        1: vin = 1023;
        2: vin = 512;
        3: vin = 511;
        default: vin = $urandom_range(0, 1023);
      endcase
      @(negedge clk); start = 1;
      @(negedge clk); start = 0;
      lat = 1; nsample = 0; nbits = 0; serial = '0;
      forever begin
        if (sample) nsample++;
        if (bit_valid) begin serial = {serial[BITS-2:0], bit_out}; nbits++; end
        if (done || lat > 100) break;
        @(negedge clk); lat++;
      end
      check(code == BITS'(vin), $sformatf("code %0d for vin %0d", code, vin));
      check(serial == BITS'(vin) && nbits == BITS,
            $sformatf("serial %0d bits %0d", serial, nbits));
      check(nsample == 1, "one sample cycle");
      check(lat == BITS + 2, $sformatf("latency %0d", lat));
      @(negedge clk);
      check(!busy, "idle after done");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
