// spi_master: byte shifter for the dedicated SPI bus between CARE and the
// application flash.
//
// SPI mode 0 (SCLK idles low, MOSI changes on the falling edge, MISO is
// sampled on the rising edge), MSB first. A pulse on `start` with `tx_byte`
// shifts one byte out and one in; `done` pulses with `rx_byte`. Chip select
// is not handled here: the flash controller drives it around whole commands.
// Timing: SCLK = clk / (2*CLK_DIV); a byte takes 16*CLK_DIV cycles plus one.
// A dedicated SPI bus keeps the flash traffic off the system bus, as the
// design requires; mode and rate are this design's choice.
module spi_master #(
  parameter int unsigned CLK_DIV = 1
)(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       start,
  input  logic [7:0] tx_byte,
  output logic       busy,
  output logic       done,
  output logic [7:0] rx_byte,
  output logic       sclk,
  output logic       mosi,
  input  logic       miso
);
  localparam int unsigned DW = (CLK_DIV > 1) ? $clog2(CLK_DIV) : 1;
  logic [DW-1:0] div;
  logic [3:0]    half;   // 16 half periods per byte
  logic [7:0]    sh_tx, sh_rx;

  assign mosi    = sh_tx[7];
  assign rx_byte = sh_rx;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy  <= 1'b0;
      done  <= 1'b0;
      sclk  <= 1'b0;
      div   <= '0;
      half  <= '0;
      sh_tx <= '0;
      sh_rx <= '0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          busy  <= 1'b1;
          sh_tx <= tx_byte;
          div   <= '0;
          half  <= '0;
        end
      end else if (int'(div) == CLK_DIV - 1) begin
        div  <= '0;
        half <= half + 4'd1;
        if (!sclk) begin
          sclk  <= 1'b1;                       // rising edge: sample
          sh_rx <= {sh_rx[6:0], miso};
        end else begin
          sclk  <= 1'b0;                       // falling edge: next bit out
          sh_tx <= {sh_tx[6:0], 1'b0};
          if (half == 4'd15) begin
            busy <= 1'b0;
            done <= 1'b1;
          end
        end
      end else begin
        div <= div + 1'b1;
      end
    end
  end
endmodule
