// ad5767_model: behavioural model of a 16-channel, 16-bit SPI DAC, for
// simulation only.
//
// It receives 24-bit words {command[3:0], channel[3:0], code[15:0]} MSB
// first, sampling MOSI on the rising SCLK edge while CS_N is low. A word
// with command 4'b0011 ("write and update channel") sets that channel's
// output to VMIN + code * (VMAX - VMIN) / 65536 when CS_N rises. Words of
// another length or command are counted in `bad_frames` and ignored.
// `codes` and `frames` let a testbench look at what arrived.
module ad5767_model #(
  parameter real VMIN = 0.0,
  parameter real VMAX = 2.5
) (
  input  logic        sclk,
  input  logic        cs_n,
  input  logic        mosi,
  output real         vout  [16],
  output logic [15:0] codes [16],
  output int          frames,
  output int          bad_frames
);

  logic [23:0] sh;
  int          nbits;
  logic        in_frame;   // a falling CS_N has opened a word

  initial begin
    for (int c = 0; c < 16; c++) begin
      vout[c]  = VMIN;
      codes[c] = '0;
    end
    frames     = 0;
    bad_frames = 0;
    nbits      = 0;
    sh         = '0;
    in_frame   = 1'b0;
  end

  always @(negedge cs_n) begin
    nbits    = 0;
    in_frame = 1'b1;
  end

  always @(posedge sclk) begin
    if (!cs_n) begin
      sh    = {sh[22:0], mosi};
      nbits = nbits + 1;
    end
  end

  always @(posedge cs_n) if (in_frame) begin
    in_frame = 1'b0;
    if (nbits == 24 && sh[23:20] == 4'b0011) begin
      codes[sh[19:16]] = sh[15:0];
      vout[sh[19:16]]  = VMIN + real'(sh[15:0]) * (VMAX - VMIN) / 65536.0;
      frames           = frames + 1;
    end else begin
      bad_frames = bad_frames + 1;
    end
  end

endmodule
