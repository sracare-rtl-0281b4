// tb_hmac_arbiter: two requesters share the real crypto-core through the
// arbiter. Each repeatedly requests the core at random times, hashes a random
// message under its own key and checks the digest against the reference, so
// an interleaved or misrouted transaction shows as a wrong digest. Also checks
// that port 0 wins when both ask in the same cycle and that a grant is held
// until released.
// The original shares one crypto-core; the fixed priority checked here is
// this design's own choice.
module tb_hmac_arbiter;
  import sracare_pkg::*;
  import sha_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  hmac_req_t req0, req1;
  hmac_rsp_t rsp0, rsp1;
  logic start, hash_only, in_valid, in_last, in_ready, done, busy;
  logic [7:0] in_data;
  digest_t key, digest;
  int checks = 0, failures = 0;
  int jobs[2] = '{0, 0};

  hmac_arbiter dut (.*);
  hmac_sha256 u_core (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rsp0.gnt && rsp1.gnt) begin failures++; $display("double grant"); end

  task automatic client(input int id, ref hmac_req_t rq, ref hmac_rsp_t rs, input int n);
    for (int j = 0; j < n; j++) begin
      bq_t msg;
      logic [255:0] k = {8{$urandom}};
      int len = 1 + $urandom % 150;
      for (int i = 0; i < len; i++) msg.push_back(byte'($urandom));
      repeat ($urandom % 20) @(negedge clk);
      rq.req = 1; rq.key = k; rq.hash_only = 0;
      while (!rs.gnt) @(negedge clk);
      rq.start = 1; @(negedge clk); rq.start = 0;
      foreach (msg[i]) begin
        rq.in_valid = 1; rq.in_data = msg[i]; rq.in_last = (i == len - 1);
        @(posedge clk); while (!rs.in_ready) @(posedge clk);
        @(negedge clk);
      end
      rq.in_valid = 0; rq.in_last = 0;
      while (!rs.done) begin @(posedge clk); #1; end
      checks++; if (rs.digest !== hmac(k, msg)) begin failures++; $display("client %0d job %0d wrong", id, j); end
      checks++; if (!rs.gnt) failures++;
      @(negedge clk); rq.req = 0;
      jobs[id]++;
    end
  endtask

  initial begin
    req0 = '0; req1 = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // simultaneous request: port 0 first
    @(negedge clk); req0.req = 1; req1.req = 1;
    @(negedge clk);
    checks++; if (!rsp0.gnt || rsp1.gnt) begin failures++; $display("priority wrong"); end
    repeat (5) @(negedge clk);
    checks++; if (!rsp0.gnt) failures++;   // held
    req0.req = 0; @(negedge clk); @(negedge clk);
    checks++; if (!rsp1.gnt) failures++;
    req1.req = 0; @(negedge clk);
    fork
      client(0, req0, rsp0, 12);
      client(1, req1, rsp1, 12);
    join
    checks++; if (jobs[0] != 12 || jobs[1] != 12) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
