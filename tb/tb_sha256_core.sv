// tb_sha256_core: checks the compression core against the FIPS 180-4 example
// for "abc", a two-block message chained with first=0, random blocks against
// the reference model, and the 66-cycle start-to-done latency.
// The expected digests are the standard's; the 66-cycle latency is this
// implementation's own (the original gives only whole-HMAC figures).
module tb_sha256_core;
  import sha_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  logic start = 0, first = 0, ready, done;
  logic [511:0] block;
  logic [255:0] digest;
  int checks = 0, failures = 0;

  sha256_core dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input logic [511:0] blk, input logic f, output int lat);
    @(negedge clk); block = blk; first = f; start = 1;
    @(negedge clk); start = 0; lat = 1;
    while (!done) begin @(negedge clk); lat++; end
  endtask

  function automatic bq_t padded(bq_t msg);
    bq_t m = msg;
    longint unsigned nb = 64'(msg.size()) * 8;
    m.push_back(8'h80);
    while ((m.size() % 64) != 56) m.push_back(8'h00);
    for (int i = 7; i >= 0; i--) m.push_back(byte'(nb >> (8*i)));
    return m;
  endfunction

  function automatic logic [511:0] blk_of(bq_t m, int off);
    logic [511:0] b;
    for (int i = 0; i < 64; i++) b[511-8*i -: 8] = m[off+i];
    return b;
  endfunction

  initial begin
    int lat;
    bq_t msg, m;
    block = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // FIPS 180-4 "abc"
    msg = '{8'h61, 8'h62, 8'h63};
    m = padded(msg);
    run(blk_of(m, 0), 1'b1, lat);
    checks++;
    if (digest !== 256'hba7816bf8f01cfea414140de5dae2223b00361a396177a9cb410ff61f20015ad) begin
      failures++; $display("abc digest %h", digest);
    end
    checks++;
    if (lat != 66) begin failures++; $display("latency %0d", lat); end
    // random multi-block messages against the reference
    for (int n = 0; n < 8; n++) begin
      msg.delete();
      for (int i = 0; i < 20 + n * 23; i++) msg.push_back(byte'($urandom));
      m = padded(msg);
      for (int off = 0; off < m.size(); off += 64) run(blk_of(m, off), off == 0, lat);
      checks++;
      if (digest !== sha256(msg)) begin failures++; $display("msg %0d mismatch", n); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
