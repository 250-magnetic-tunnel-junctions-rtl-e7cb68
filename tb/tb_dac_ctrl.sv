// tb_dac_ctrl: self-checking test of dac_ctrl against the DAC model.
//
// Random sets of 16 codes are loaded; the DAC model must then hold every
// code on its own channel, have received exactly 16 well-formed 24-bit
// "write and update" words per load and no malformed word, and show the
// matching output voltage. The load time is checked against
// 16 * (2*HALF_DIV*24 + 3) + 1 cycles.
module tb_dac_ctrl;
  import pim_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic             start = 0;
  logic [DAC_W-1:0] codes [16];
  logic             busy, done, sclk, cs_n, mosi;
  real              vout [16];
  logic [15:0]      mcodes [16];
  int               frames, bad_frames;

  dac_ctrl #(.CHANNELS(16), .HALF_DIV(1)) dut (.clk, .rst_n, .start, .codes, .busy, .done,
    .sclk, .cs_n, .mosi);
  ad5767_model #(.VMIN(0.0), .VMAX(2.5)) dac (.sclk, .cs_n, .mosi, .vout, .codes(mcodes),
    .frames, .bad_frames);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int c = 0; c < 16; c++) codes[c] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 20; it++) begin
      int cyc, f0;
      f0 = frames;
      for (int c = 0; c < 16; c++) codes[c] = DAC_W'($urandom);
      @(negedge clk); start = 1;
      @(negedge clk); start = 0;
      // inputs may change once captured
      for (int c = 0; c < 16; c++) codes[c] = ~codes[c];
      cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      for (int c = 0; c < 16; c++) begin
        logic [15:0] exp_code;
        exp_code = ~codes[c];
        check(mcodes[c] == exp_code, $sformatf("ch %0d code %h expected %h", c, mcodes[c], exp_code));
        check(vout[c] > real'(exp_code) * 2.5 / 65536.0 - 1e-6 &&
              vout[c] < real'(exp_code) * 2.5 / 65536.0 + 1e-6, "output voltage");
      end
      check(frames - f0 == 16, $sformatf("%0d frames", frames - f0));
      check(bad_frames == 0, "no malformed frame");
      check(cyc == 16 * (2 * 24 + 3) + 1, $sformatf("load took %0d cycles", cyc));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
