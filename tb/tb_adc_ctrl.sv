// tb_adc_ctrl: self-checking test of adc_ctrl against the ADC model.
//
// Random voltages are put on the 16 analog inputs of the ADC model; after
// a read the 16 samples must equal round(v * 4096 / 2.5) channel by
// channel (which also checks that the one-word result latency is handled),
// the channel-id check must stay clear, and the model must have made 17
// conversions. The read time is checked against 17 * (2*HALF_DIV*16 + 3) + 1.
module tb_adc_ctrl;
  import pim_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic             start = 0;
  logic [ADC_W-1:0] samples [16];
  logic             id_err, busy, done, sclk, cs_n, mosi, miso;
  real              ain [16];
  int               conversions;

  adc_ctrl #(.CHANNELS(16), .HALF_DIV(2)) dut (.clk, .rst_n, .start, .samples, .id_err,
    .busy, .done, .sclk, .cs_n, .mosi, .miso);
  max11131_model #(.VREF(2.5)) adc (.sclk, .cs_n, .mosi, .miso, .ain, .conversions);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int c = 0; c < 16; c++) ain[c] = 0.0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 20; it++) begin
      int cyc, c0;
      c0 = conversions;
      for (int c = 0; c < 16; c++) ain[c] = 2.4 * real'($urandom % 10000) / 10000.0;
      @(negedge clk); start = 1;
      @(negedge clk); start = 0;
      cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      for (int c = 0; c < 16; c++) begin
        int e;
        e = int'(ain[c] * 4096.0 / 2.5);
        check(int'(samples[c]) == e, $sformatf("ch %0d sample %0d expected %0d", c, samples[c], e));
      end
      check(!id_err, "channel ids match");
      check(conversions - c0 == 17, $sformatf("%0d conversions", conversions - c0));
      check(cyc == 17 * (2 * 2 * 16 + 3) + 1, $sformatf("read took %0d cycles", cyc));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
