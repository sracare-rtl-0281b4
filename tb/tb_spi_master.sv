// tb_spi_master: exchanges random bytes with a behavioural mode-0 SPI slave
// (samples MOSI on the rising edge, changes MISO on the falling edge) at
// CLK_DIV = 2, checking both directions, that SCLK idles low, and the
// 16*CLK_DIV+1 cycle byte time.
// The original names a dedicated SPI bus; mode 0 and the clock divider
// are this design's own choices.
module tb_spi_master;
  localparam int DIV = 2;
  logic clk = 0, rst_n = 0;
  logic start = 0, busy, done, sclk, mosi, miso;
  logic [7:0] tx_byte = 0, rx_byte;
  int checks = 0, failures = 0;
  int unsigned cycle = 0;

  spi_master #(.CLK_DIV(DIV)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cycle++;

  // slave
  logic [7:0] s_in, s_out;
  int s_bits = 0;
  initial miso = 0;
  always @(posedge sclk) begin s_in = {s_in[6:0], mosi}; s_bits++; end
  always @(negedge sclk) begin s_out = {s_out[6:0], 1'b0}; miso = s_out[7]; end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 30; n++) begin
      logic [7:0] m = 8'($urandom), s = 8'($urandom);
      int unsigned c0;
      s_out = s; miso = s[7]; s_bits = 0;
      @(negedge clk); tx_byte = m; start = 1; c0 = cycle;
      @(negedge clk); start = 0;
      while (!done) @(negedge clk);
      checks++; if (rx_byte !== s) begin failures++; $display("master got %h want %h", rx_byte, s); end
      checks++; if (s_in !== m || s_bits != 8) begin failures++; $display("slave got %h want %h", s_in, m); end
      checks++; if (cycle - c0 != 16 * DIV + 1) begin failures++; $display("byte took %0d", cycle - c0); end
      checks++; if (sclk !== 1'b0) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
