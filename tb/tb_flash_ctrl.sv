// tb_flash_ctrl: drives the flash controller against the SPI NOR model:
// reads of preloaded data with random back-pressure, a sector erase, and a
// program that crosses page boundaries, checking the flash array and the
// data read back, and the cycle cost of a plain read.
// The flash command set and the timing checked are this design's own
// choices; the original only names the flash controller.
module tb_flash_ctrl;
  import sracare_pkg::*;
  logic clk = 0, rst_n = 0;
  logic cmd_valid = 0, cmd_ready, done, rd_valid, rd_ready = 0, wr_valid = 0, wr_ready;
  flash_op_e cmd_op = FOP_READ;
  faddr_t cmd_addr = '0;
  faddr_t cmd_len = '0;
  logic [7:0] rd_data, wr_data = 0;
  logic sclk, mosi, miso, cs_n;
  int checks = 0, failures = 0;
  int unsigned cycle = 0;

  flash_ctrl #(.CLK_DIV(1)) dut (.*);
  spi_flash_model #(.BYTES(16384)) flash (.sclk, .cs_n, .mosi, .miso);
  always #5 clk = ~clk;
  always @(posedge clk) cycle++;

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic issue(input flash_op_e o, input int a, input int n);
    @(negedge clk); cmd_valid = 1; cmd_op = o; cmd_addr = faddr_t'(a); cmd_len = faddr_t'(n);
    @(negedge clk); cmd_valid = 0;
  endtask

  task automatic do_read(input int a, input int n, input bit bp, output logic [7:0] q[$], output int cyc);
    int unsigned c0 = cycle;
    q.delete();
    issue(FOP_READ, a, n);
    while (!done) begin
      rd_ready = bp ? ($urandom % 4 != 0) : 1'b1;
      @(posedge clk);
      if (rd_valid && rd_ready) q.push_back(rd_data);
      @(negedge clk);
    end
    rd_ready = 0;
    cyc = int'(cycle - c0);
  endtask

  task automatic do_program(input int a, input logic [7:0] d[$]);
    int i = 0;
    issue(FOP_PROGRAM, a, d.size());
    while (!done) begin
      wr_valid = (i < d.size()); wr_data = (i < d.size()) ? d[i] : 8'h00;
      @(posedge clk);
      if (wr_valid && wr_ready) i++;
      @(negedge clk);
    end
    wr_valid = 0;
  endtask

  initial begin
    logic [7:0] q[$], d[$];
    int cyc;
    for (int i = 0; i < 16384; i++) flash.mem[i] = 8'(i * 7 + 3);
    repeat (3) @(negedge clk);
    rst_n = 1;
    // read with back-pressure
    do_read(100, 40, 1, q, cyc);
    checks++;
    if (q.size() != 40) begin failures++; $display("read returned %0d bytes", q.size()); end
    foreach (q[i]) begin checks++; if (q[i] !== 8'((100 + i) * 7 + 3)) failures++; end
    // read without back-pressure: (n+4) SPI bytes of 17 cycles plus overhead
    do_read(0, 16, 0, q, cyc);
    checks++;
    if (cyc < 20 * 17 || cyc > 20 * 17 + 40) begin failures++; $display("16-byte read took %0d", cyc); end
    // erase sector 1 and program 600 bytes starting mid-page
    issue(FOP_ERASE, 4096 + 12, 1);
    while (!done) @(negedge clk);
    checks++;
    if (flash.mem[4096] !== 8'hff || flash.mem[8191] !== 8'hff || flash.mem[4095] !== 8'(4095 * 7 + 3)) begin
      failures++; $display("erase wrong");
    end
    d.delete();
    for (int i = 0; i < 600; i++) d.push_back(8'($urandom));
    do_program(4096 + 200, d);
    checks++;
    if (flash.programs != 4) begin failures++; $display("programs %0d, expected 4 pages", flash.programs); end
    foreach (d[i]) begin checks++; if (flash.mem[4096 + 200 + i] !== d[i]) failures++; end
    checks++;
    if (flash.mem[4096 + 199] !== 8'hff || flash.mem[4096 + 800] !== 8'hff) failures++;
    do_read(4096 + 200, 600, 1, q, cyc);
    checks++;
    if (q != d) begin failures++; $display("read-back mismatch"); end
    checks++;
    if (flash.erases != 1) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
