// tb_hmac_sha256: checks the crypto-core against RFC 4231 test case 1, then
// random keys and messages of lengths around the padding boundaries in both
// HMAC and plain SHA-256 mode, with random gaps on the input stream. Expected
// values come from the behavioural reference in sha_ref_pkg. The cycle count
// of a 256-byte HMAC is checked against the formula in the module header.
// HMAC-SHA256 is the original's crypto-core function; the test vectors are
// the published RFC 4231 ones plus random cases.
module tb_hmac_sha256;
  import sha_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  logic start = 0, hash_only = 0, in_valid = 0, in_last = 0, in_ready, busy, done;
  logic [7:0] in_data = 0;
  logic [255:0] key = 0, digest;
  int checks = 0, failures = 0;
  int unsigned cycle = 0;
  always @(posedge clk) cycle++;

  hmac_sha256 dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input logic [255:0] k, input logic ho, input bq_t msg, input bit gaps, output int cyc);
    int unsigned c0;
    @(negedge clk); key = k; hash_only = ho; start = 1; c0 = cycle;
    @(negedge clk); start = 0;
    for (int i = 0; i < msg.size(); i++) begin
      while (gaps && ($urandom % 3 == 0)) begin in_valid = 0; @(negedge clk); end
      in_valid = 1; in_data = msg[i]; in_last = (i == msg.size() - 1);
      @(posedge clk);
      while (!in_ready) @(posedge clk);
      @(negedge clk);
    end
    in_valid = 0; in_last = 0;
    while (!done) @(negedge clk);
    cyc = int'(cycle - c0);
  endtask

  initial begin
    int cyc;
    bq_t msg;
    logic [255:0] k;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // RFC 4231 test case 1: key = 20 x 0x0b, data = "Hi There"
    k = {{20{8'h0b}}, 96'd0};
    msg = '{8'h48, 8'h69, 8'h20, 8'h54, 8'h68, 8'h65, 8'h72, 8'h65};
    run(k, 0, msg, 0, cyc);
    checks++;
    if (digest !== 256'hb0344c61d8db38535ca8afceaf0bf12b881dc200c9833da726e9376c2e32cff7) begin
      failures++; $display("RFC4231 TC1 got %h", digest);
    end
    // boundary and random lengths
    for (int n = 0; n < 24; n++) begin
      int len;
      int lens[12] = '{1, 2, 32, 55, 56, 63, 64, 65, 119, 120, 128, 200};
      len = (n < 12) ? lens[n] : 1 + $urandom % 300;
      msg.delete();
      for (int i = 0; i < len; i++) msg.push_back(byte'($urandom));
      k = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
      run(k, n[0], msg, n > 4, cyc);
      checks++;
      if (digest !== (n[0] ? sha256(msg) : hmac(k, msg))) begin
        failures++; $display("len %0d hash_only %0d mismatch", len, n[0]);
      end
    end
    // 256-byte HMAC, the block size used for the crypto-core figure of merit
    msg.delete();
    for (int i = 0; i < 256; i++) msg.push_back(byte'(i));
    run(k, 0, msg, 0, cyc);
    checks++;
    if (digest !== hmac(k, msg)) failures++;
    checks++;
    // 256 bytes + 7 compressions (key, 4 data, pad, outer key, outer) of 67 cycles
    if (cyc < 785 || cyc > 805) begin failures++; $display("256 B HMAC took %0d cycles", cyc); end
    $display("256-byte HMAC: %0d cycles", cyc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
