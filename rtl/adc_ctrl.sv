// adc_ctrl: reads V_out of the 16 cells of one PE through one 16-channel ADC.
//
// On `start` it sends CHANNELS+1 16-bit words. Word k selects channel k for
// conversion in manual mode; the ADC returns the result of a word in the
// following word, as {channel id[3:0], result[11:0]}. So word k+1 carries
// the sample of channel k, and the extra last word only collects the final
// sample. Each sample is stored by its position; `id_err` is set when the
// channel id the ADC reports does not match. `done` pulses with all
// `samples` valid, CHANNELS+1 words of (2*HALF_DIV*16 + 3) cycles plus one
// cycle after `start`.
//
// The paper gives the 16 channels per ADC and the 16-bit words; the
// command layout (manual mode, channel select in bits [10:7], channel id
// tagging in bit 2) and the one-word result latency are taken from the
// usual behaviour of the 12-bit ADC the paper names and are assumptions.
module adc_ctrl
  import pim_pkg::*;
#(
  parameter int CHANNELS = 16,
  parameter int HALF_DIV = 2
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  output logic [ADC_W-1:0] samples [CHANNELS],
  output logic             id_err,
  output logic             busy,
  output logic             done,
  output logic             sclk,
  output logic             cs_n,
  output logic             mosi,
  input  logic             miso
);

  localparam int CH_W = $clog2(CHANNELS);

  logic [CH_W:0]          word;        // 0 .. CHANNELS
  logic                   run, spi_start, spi_busy, spi_done;
  logic [ADC_FRAME_W-1:0] tx, rx;
  logic [CH_W-1:0]        sel;
  logic [CH_W-1:0]        prev;

  // ADC mode control word: bit 15 = 0, SCAN[14:11] = 0001 (manual),
  // CHSEL[10:7], CHAN_ID[2] = 1.
  assign sel  = (word < (CH_W+1)'(CHANNELS)) ? word[CH_W-1:0] : CH_W'(CHANNELS - 1);
  assign tx   = {1'b0, 4'b0001, 4'(sel), 2'b00, 2'b00, 1'b1, 2'b00};
  assign prev = CH_W'(word - 1'b1);
  assign busy = run;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run       <= 1'b0;
      word      <= '0;
      spi_start <= 1'b0;
      done      <= 1'b0;
      id_err    <= 1'b0;
      for (int i = 0; i < CHANNELS; i++) samples[i] <= '0;
    end else begin
      spi_start <= 1'b0;
      done      <= 1'b0;
      if (!run) begin
        if (start) begin
          word      <= '0;
          run       <= 1'b1;
          spi_start <= 1'b1;
          id_err    <= 1'b0;
        end
      end else if (spi_done) begin
        if (word != '0) begin
          samples[prev] <= rx[ADC_W-1:0];
          if (rx[ADC_FRAME_W-1 -: 4] != 4'(prev)) id_err <= 1'b1;
        end
        if (word == (CH_W+1)'(CHANNELS)) begin
          run  <= 1'b0;
          done <= 1'b1;
        end else begin
          word      <= word + 1'b1;
          spi_start <= 1'b1;
        end
      end
    end
  end

  spi_master #(.WIDTH(ADC_FRAME_W), .HALF_DIV(HALF_DIV)) u_spi (
    .clk, .rst_n,
    .start   (spi_start),
    .tx_data (tx),
    .rx_data (rx),
    .busy    (spi_busy),
    .done    (spi_done),
    .sclk, .cs_n, .mosi, .miso
  );

  a_no_restart: assert property (@(posedge clk) disable iff (!rst_n)
    start |-> !run);

endmodule
