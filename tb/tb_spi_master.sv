// tb_spi_master: self-checking test of spi_master.
//
// A behavioural SPI mode-0 slave in the testbench records the bits seen on
// MOSI and returns a frame of its own on MISO. For random frames and two
// clock dividers the test checks that the slave received tx_data, that
// rx_data equals what the slave sent, that chip select framed exactly
// WIDTH clock pulses and that a frame takes 2*HALF_DIV*WIDTH + 2 cycles
// from start to done.
module tb_spi_master;
  localparam int W = 24;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // two instances: HALF_DIV 1 and 3
  logic         start [2];
  logic [W-1:0] tx [2], rx [2];
  logic         busy [2], done [2], sclk [2], cs_n [2], mosi [2], miso [2];

  spi_master #(.WIDTH(W), .HALF_DIV(1)) dut0 (.clk, .rst_n, .start(start[0]), .tx_data(tx[0]),
    .rx_data(rx[0]), .busy(busy[0]), .done(done[0]), .sclk(sclk[0]), .cs_n(cs_n[0]),
    .mosi(mosi[0]), .miso(miso[0]));
  spi_master #(.WIDTH(W), .HALF_DIV(3)) dut1 (.clk, .rst_n, .start(start[1]), .tx_data(tx[1]),
    .rx_data(rx[1]), .busy(busy[1]), .done(done[1]), .sclk(sclk[1]), .cs_n(cs_n[1]),
    .mosi(mosi[1]), .miso(miso[1]));

  // slaves
  logic [W-1:0] got [2], reply [2], rsh [2];
  int           edges [2];
  for (genvar k = 0; k < 2; k++) begin : g_slave
    always @(negedge cs_n[k]) begin
      edges[k] = 0;
      rsh[k]   = reply[k];
    end
    assign miso[k] = rsh[k][W-1];
    always @(posedge sclk[k]) if (!cs_n[k]) begin
      got[k]   = {got[k][W-2:0], mosi[k]};
      edges[k] = edges[k] + 1;
    end
    always @(negedge sclk[k]) if (!cs_n[k]) rsh[k] = {rsh[k][W-2:0], 1'b0};
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int hd [2];
    hd[0] = 1; hd[1] = 3;
    start[0] = 0; start[1] = 0; tx[0] = '0; tx[1] = '0;
    reply[0] = '0; reply[1] = '0; rsh[0] = '0; rsh[1] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    check(cs_n[0] && cs_n[1] && !sclk[0] && !sclk[1], "idle levels after reset");
    for (int it = 0; it < 40; it++) begin
      for (int k = 0; k < 2; k++) begin
        int cyc;
        tx[k]    = W'($urandom);
        reply[k] = W'($urandom);
        @(negedge clk);
        start[k] = 1;
        @(negedge clk);
        start[k] = 0;
        cyc = 1;
        while (!done[k]) begin
          @(negedge clk);
          cyc++;
        end
        check(got[k] == tx[k], $sformatf("slave got %h expected %h", got[k], tx[k]));
        check(rx[k] == reply[k], $sformatf("rx %h expected %h", rx[k], reply[k]));
        check(edges[k] == W, $sformatf("%0d sclk edges", edges[k]));
        check(cyc == 2 * hd[k] * W + 2, $sformatf("frame took %0d cycles", cyc));
        @(negedge clk);
        check(cs_n[k] && !busy[k], "returns to idle");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
