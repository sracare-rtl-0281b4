// tb_uart: the transmitter is decoded by a behavioural receiver in the
// testbench (checking the data bits and 10 bit periods per byte) and the
// receiver is fed by a behavioural transmitter, including a frame with a bad
// stop bit, which must be dropped.
// The original uses a UART link to the verifier; 8N1 framing and the
// reduced bit time used here are this design's own choices.
module tb_uart;
  localparam int CPB = 16;
  logic clk = 0, rst_n = 0;
  logic rx, tx, tx_valid = 0, tx_ready, rx_valid;
  logic [7:0] tx_data = 0, rx_data;
  int checks = 0, failures = 0;
  logic [7:0] got[$];

  uart #(.CLKS_PER_BIT(CPB)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) if (rx_valid) got.push_back(rx_data);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic send_line(input logic [7:0] b, input bit stop);
    rx = 0; repeat (CPB) @(posedge clk);
    for (int i = 0; i < 8; i++) begin rx = b[i]; repeat (CPB) @(posedge clk); end
    rx = stop; repeat (CPB) @(posedge clk);
    rx = 1; repeat (CPB) @(posedge clk);
  endtask

  initial begin
    logic [7:0] sent[$];
    rx = 1;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // transmit: decode the line
    for (int n = 0; n < 20; n++) begin
      logic [7:0] b = 8'($urandom), r;
      int t0, t1;
      @(negedge clk); tx_valid = 1; tx_data = b;
      @(negedge clk); tx_valid = 0;
      t0 = $time;
      for (int i = 0; i < CPB / 2; i++) @(posedge clk);       // middle of start bit
      checks++; if (tx !== 1'b0) failures++;
      for (int i = 0; i < 8; i++) begin repeat (CPB) @(posedge clk); r[i] = tx; end
      repeat (CPB) @(posedge clk);
      checks++; if (tx !== 1'b1) failures++;                    // stop bit
      checks++; if (r !== b) begin failures++; $display("tx sent %h decoded %h", b, r); end
      while (!tx_ready) @(posedge clk);
      t1 = $time;
      checks++; if ((t1 - t0) / 10 < 10 * CPB - 2 || (t1 - t0) / 10 > 10 * CPB + 2) begin
        failures++; $display("byte took %0d cycles", (t1 - t0) / 10); end
    end
    // receive
    for (int n = 0; n < 20; n++) begin
      logic [7:0] b = 8'($urandom);
      send_line(b, 1); sent.push_back(b);
      if (n == 10) send_line(8'hA5, 0);                         // framing error: dropped
    end
    repeat (4 * CPB) @(posedge clk);
    checks++; if (got != sent) begin failures++; $display("rx got %p", got); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
