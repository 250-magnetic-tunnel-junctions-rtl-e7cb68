// dac_ctrl: loads all channels of one 16-channel DAC over its SPI link.
//
// On `start` the 16 codes in `codes` are captured and sent as 16 24-bit
// command words, channel 0 first. Each word is {command[3:0], channel[3:0],
// code[15:0]}; CMD selects "write and update DAC channel", so each output
// moves as soon as its own word has been sent. `done` pulses once the last
// word is out, CHANNELS * (2*HALF_DIV*24 + 3) + 1 cycles after `start`.
//
// The paper gives the 16 channels per DAC and the 24-bit command length;
// the field layout and command value follow the usual format of the
// 16-bit multichannel DAC the paper names, and are recorded as assumptions.
module dac_ctrl
  import pim_pkg::*;
#(
  parameter int          CHANNELS = 16,
  parameter logic [3:0]  CMD      = 4'b0011,
  parameter int          HALF_DIV = 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic [DAC_W-1:0] codes [CHANNELS],
  output logic             busy,
  output logic             done,
  output logic             sclk,
  output logic             cs_n,
  output logic             mosi
);

  localparam int CH_W = $clog2(CHANNELS);

  logic [DAC_W-1:0]       code_q [CHANNELS];
  logic [CH_W-1:0]        ch;
  logic                   run, spi_start, spi_busy, spi_done;
  logic [DAC_FRAME_W-1:0] frame, unused_rx;

  assign frame = {CMD, 4'(ch), code_q[ch]};
  assign busy  = run;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run       <= 1'b0;
      ch        <= '0;
      spi_start <= 1'b0;
      done      <= 1'b0;
      for (int i = 0; i < CHANNELS; i++) code_q[i] <= '0;
    end else begin
      spi_start <= 1'b0;
      done      <= 1'b0;
      if (!run) begin
        if (start) begin
          code_q    <= codes;
          ch        <= '0;
          run       <= 1'b1;
          spi_start <= 1'b1;
        end
      end else if (spi_done) begin
        if (ch == CH_W'(CHANNELS - 1)) begin
          run  <= 1'b0;
          done <= 1'b1;
        end else begin
          ch        <= ch + 1'b1;
          spi_start <= 1'b1;
        end
      end
    end
  end

  spi_master #(.WIDTH(DAC_FRAME_W), .HALF_DIV(HALF_DIV)) u_spi (
    .clk, .rst_n,
    .start   (spi_start),
    .tx_data (frame),
    .rx_data (unused_rx),
    .busy    (spi_busy),
    .done    (spi_done),
    .sclk, .cs_n, .mosi,
    .miso    (1'b0)
  );

  a_no_restart: assert property (@(posedge clk) disable iff (!rst_n)
    start |-> !run);

endmodule
