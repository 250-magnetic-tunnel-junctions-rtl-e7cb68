// spi_master: one SPI link from the FPGA to a DAC or ADC chip.
//
// A pulse on `start` sends `tx_data` MSB first on MOSI while chip select is
// low and shifts MISO into `rx_data`. SPI mode 0 is used: SCLK idles low,
// both sides sample on the rising edge, data changes on the falling edge.
// Each SCLK half period lasts HALF_DIV clock cycles, so a frame takes
// 2*HALF_DIV*WIDTH cycles plus one cycle to raise chip select; `done`
// pulses for one cycle with `rx_data` valid, and a new `start` is accepted
// from the next cycle on.
//
// The paper gives the frame widths (24-bit DAC commands, 16-bit ADC words)
// and that both converter types hang off SPI; the SPI mode and clock rate
// are this design's choices.
module spi_master #(
  parameter int WIDTH    = 24,
  parameter int HALF_DIV = 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic [WIDTH-1:0] tx_data,
  output logic [WIDTH-1:0] rx_data,
  output logic             busy,
  output logic             done,
  output logic             sclk,
  output logic             cs_n,
  output logic             mosi,
  input  logic             miso
);

  typedef enum logic [1:0] {S_IDLE, S_LO, S_HI, S_END} state_e;

  localparam int DIV_W = (HALF_DIV > 1) ? $clog2(HALF_DIV) : 1;
  localparam int BIT_W = $clog2(WIDTH);

  state_e           st;
  logic [WIDTH-1:0] tx_sh, rx_sh;
  logic [DIV_W-1:0] div;
  logic [BIT_W-1:0] nbit;

  assign busy = (st != S_IDLE);
  assign mosi = cs_n ? 1'b0 : tx_sh[WIDTH-1];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st      <= S_IDLE;
      tx_sh   <= '0;
      rx_sh   <= '0;
      rx_data <= '0;
      div     <= '0;
      nbit    <= '0;
      sclk    <= 1'b0;
      cs_n    <= 1'b1;
      done    <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (st)
        S_IDLE: if (start) begin
          tx_sh <= tx_data;
          cs_n  <= 1'b0;
          div   <= '0;
          nbit  <= '0;
          st    <= S_LO;
        end
        S_LO: if (div == DIV_W'(HALF_DIV - 1)) begin
          div   <= '0;
          sclk  <= 1'b1;
          rx_sh <= {rx_sh[WIDTH-2:0], miso};
          st    <= S_HI;
        end else begin
          div <= div + 1'b1;
        end
        S_HI: if (div == DIV_W'(HALF_DIV - 1)) begin
          div  <= '0;
          sclk <= 1'b0;
          if (nbit == BIT_W'(WIDTH - 1)) begin
            st <= S_END;
          end else begin
            nbit  <= nbit + 1'b1;
            tx_sh <= {tx_sh[WIDTH-2:0], 1'b0};
            st    <= S_LO;
          end
        end else begin
          div <= div + 1'b1;
        end
        S_END: begin
          cs_n    <= 1'b1;
          done    <= 1'b1;
          rx_data <= rx_sh;
          st      <= S_IDLE;
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  // A frame is only started from idle.
  a_start_idle: assert property (@(posedge clk) disable iff (!rst_n)
    start |-> st == S_IDLE);

endmodule
