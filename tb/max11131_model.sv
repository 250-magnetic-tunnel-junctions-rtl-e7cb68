// max11131_model: behavioural model of a 16-channel, 12-bit SPI ADC in
// manual mode, for simulation only.
//
// Each 16-bit word received on MOSI (sampled on rising SCLK while CS_N is
// low) that has bit 15 = 0 and SCAN[14:11] = 4'b0001 selects channel
// CHSEL[10:7]; when CS_N rises that channel is converted,
//     code = clamp(round(ain * 4096 / VREF), 0, 4095),
// and the result {channel[3:0], code[11:0]} is shifted out MSB first on
// MISO during the next word (MISO changes on falling SCLK). `conversions`
// counts the conversions made.
module max11131_model #(
  parameter real VREF = 2.5
) (
  input  logic sclk,
  input  logic cs_n,
  input  logic mosi,
  output logic miso,
  input  real  ain [16],
  output int   conversions
);

  logic [15:0] in_sh, out_sh, pending;
  int          nbits;

  initial begin
    in_sh       = '0;
    out_sh      = '0;
    pending     = '0;
    nbits       = 0;
    conversions = 0;
  end

  assign miso = out_sh[15];

  always @(negedge cs_n) begin
    nbits  = 0;
    out_sh = pending;
  end

  always @(posedge sclk) begin
    if (!cs_n) begin
      in_sh = {in_sh[14:0], mosi};
      nbits = nbits + 1;
    end
  end

  always @(negedge sclk) begin
    if (!cs_n) out_sh = {out_sh[14:0], 1'b0};
  end

  always @(posedge cs_n) begin
    if (nbits == 16 && !in_sh[15] && in_sh[14:11] == 4'b0001) begin
      real v;
      int  code;
      v    = ain[in_sh[10:7]];
      code = int'(v * 4096.0 / VREF);
      if (code < 0)    code = 0;
      if (code > 4095) code = 4095;
      pending     = {in_sh[10:7], 12'(code)};
      conversions = conversions + 1;
    end
  end

endmodule
