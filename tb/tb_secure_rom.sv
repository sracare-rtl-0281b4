// tb_secure_rom: provisions the secure ROM, then checks the parallel chip
// information and key outputs, the one-cycle synchronous read port over the
// recovery area, and that writes are ignored once provisioning mode is off.
// The ROM contents (chip information, key, golden data) follow the
// original; the address map and the provisioning port are this design's own.
module tb_secure_rom;
  localparam int N = 2;
  localparam int BYTES = 64 + N * sracare_pkg::REC_BYTES;
  localparam int AW = $clog2(BYTES);
  logic clk = 0;
  logic prov_mode, prov_we = 0;
  logic [AW-1:0] prov_addr = 0, rd_addr = 0;
  logic [7:0] prov_data = 0, rd_data;
  logic [127:0] chip_info;
  logic [255:0] key;
  int checks = 0, failures = 0;

  secure_rom #(.NUM_FRAMES(N)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [7:0] pat(int a);
    return 8'((a * 29) ^ (a >> 3) ^ 8'h5a);
  endfunction

  task automatic wr(input int a, input logic [7:0] d);
    @(negedge clk); prov_we = 1; prov_addr = AW'(a); prov_data = d;
    @(negedge clk); prov_we = 0;
  endtask

  initial begin
    logic [127:0] ci;
    logic [255:0] k;
    prov_mode = 1;
    for (int a = 0; a < BYTES; a++) wr(a, pat(a));
    prov_mode = 0;
    for (int i = 0; i < 16; i++) ci[127-8*i -: 8] = pat(i);
    for (int i = 0; i < 32; i++) k[255-8*i -: 8] = pat(16 + i);
    checks++; if (chip_info !== ci) begin failures++; $display("chip info %h", chip_info); end
    checks++; if (key !== k) begin failures++; $display("key %h", key); end
    for (int n = 0; n < 200; n++) begin
      int a = 64 + $urandom % (BYTES - 64);
      @(negedge clk); rd_addr = AW'(a);
      @(negedge clk);
      checks++; if (rd_data !== pat(a)) begin failures++; $display("rd %0d: %h", a, rd_data); end
    end
    // locked: writes ignored
    wr(70, ~pat(70));
    wr(20, ~pat(20));
    @(negedge clk); rd_addr = AW'(70);
    @(negedge clk);
    checks++; if (rd_data !== pat(70)) failures++;
    checks++; if (key !== k) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
