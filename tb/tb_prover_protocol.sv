// tb_prover_protocol: plays the verifier against the protocol engine, which
// uses the real crypto-core through the arbiter. Expected A, n2 and C are
// computed with the reference HMAC/SHA-256 from the message definitions.
// Sessions: right B then attestation (checks the CA request and that R is
// the CA digest), right B then secure boot (checks R carries the boot
// status), a wrong B (C = 0, session closed, no action), and a repeat n1
// check that n2 changes with n1.
// The message formulas checked follow the original's protocol equations;
// byte widths and the F/S/L and R encodings are this design's own.
module tb_prover_protocol;
  import sracare_pkg::*;
  import sha_ref_pkg::*;
  import frame_gen_pkg::*;
  logic clk = 0, rst_n = 0;
  logic rx_valid = 0, tx_valid, tx_ready = 1;
  logic [7:0] rx_data = 0, tx_data;
  digest_t key;
  logic [127:0] chip_info;
  hmac_req_t hreq, hreq0;
  hmac_rsp_t hrsp, hrsp0;
  logic boot_req, boot_done = 0, boot_ok = 0;
  logic [7:0] frames_recovered = 0;
  logic ca_cmd_valid, ca_cmd_ready = 1, ca_done = 0;
  ca_op_e ca_cmd_op;
  faddr_t ca_cmd_addr, ca_cmd_len;
  digest_t ca_digest = '0;
  logic auth_pass, auth_fail, ra_done;
  logic c_start, c_ho, c_iv, c_il, c_ir, c_busy, c_done;
  logic [7:0] c_id;
  digest_t c_key, c_dig;
  int checks = 0, failures = 0;
  int n_boot = 0, n_ra = 0, n_pass = 0, n_fail = 0;
  logic [7:0] txq[$];

  assign key = TB_KEY;
  assign chip_info = TB_CHIP_INFO;
  assign hreq0 = '0;

  prover_protocol dut (.*);
  hmac_arbiter u_arb (.clk, .rst_n, .req0(hreq0), .rsp0(hrsp0), .req1(hreq), .rsp1(hrsp),
    .start(c_start), .hash_only(c_ho), .key(c_key), .in_valid(c_iv), .in_data(c_id), .in_last(c_il),
    .in_ready(c_ir), .done(c_done), .digest(c_dig));
  hmac_sha256 u_hmac (.clk, .rst_n, .start(c_start), .hash_only(c_ho), .key(c_key), .in_valid(c_iv),
    .in_data(c_id), .in_last(c_il), .in_ready(c_ir), .busy(c_busy), .done(c_done), .digest(c_dig));

  always #5 clk = ~clk;
  always @(posedge clk) begin
    if (rst_n && tx_valid && tx_ready) txq.push_back(tx_data);
    tx_ready <= ($urandom % 3 != 0);
    if (auth_pass) n_pass++;
    if (auth_fail) n_fail++;
  end

  // behavioural boot and CA responders
  digest_t ra_val;
  faddr_t ra_addr, ra_len;
  always @(posedge clk) if (rst_n) begin
    if (boot_req) begin
      n_boot++;
      fork begin repeat (20) @(posedge clk); boot_ok <= 1; frames_recovered <= 8'd2; boot_done <= 1;
        @(posedge clk); boot_done <= 0; end join_none
    end
    if (ca_cmd_valid && ca_cmd_ready) begin
      n_ra++; ra_addr = ca_cmd_addr; ra_len = ca_cmd_len;
      fork begin repeat (30) @(posedge clk); ca_digest <= ra_val; ca_done <= 1;
        @(posedge clk); ca_done <= 0; end join_none
    end
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic send(input bq_t b);
    foreach (b[i]) begin
      @(negedge clk); rx_valid = 1; rx_data = b[i];
      @(negedge clk); rx_valid = 0;
      repeat ($urandom % 4) @(negedge clk);
    end
  endtask

  task automatic recv(input int n, output bq_t b);
    b.delete();
    while (txq.size() < n) @(negedge clk);
    repeat (n) b.push_back(txq.pop_front());
  endtask

  function automatic logic [255:0] v256(bq_t q, int off);
    logic [255:0] v;
    for (int i = 0; i < 32; i++) v[255-8*i -: 8] = q[off + i];
    return v;
  endfunction

  // one session; returns C and R
  task automatic session(input logic [255:0] n1, input bit good_b, input bq_t fd,
                         output logic [7:0] c, output logic [255:0] r, output logic [255:0] n2_out);
    bq_t a, q, ci;
    logic [255:0] h1, n2, t, k1, b;
    for (int i = 0; i < 16; i++) ci.push_back(TB_CHIP_INFO[127-8*i -: 8]);
    send(to_bytes(n1));
    recv(64, a);
    h1 = hmac(TB_KEY, to_bytes(n1));
    t  = sha256(ci) ^ n1;
    n2 = hmac(TB_KEY, to_bytes(t));
    checks++; if (v256(a, 0) !== h1) begin failures++; $display("A: Hmac(K,n1) wrong %h %h n1 %h dutn1 %h", v256(a,0), h1, n1, dut.n1); end
    checks++; if (v256(a, 32) !== n2) begin failures++; $display("A: n2 wrong"); end
    n2_out = v256(a, 32);
    k1 = h1 ^ n1 ^ n2;
    b = hmac(k1, to_bytes(n2));
    if (!good_b) b[17] ^= 1'b1;
    send(to_bytes(b));
    recv(1, q);
    c = q[0];
    r = '0;
    if (c == 8'h01) begin
      send(fd);
      recv(32, q);
      r = v256(q, 0);
    end
  endtask

  initial begin
    logic [7:0] c;
    logic [255:0] r, n2a, n2b, n1;
    bq_t fd;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // attestation of 0x001234 .. +0x300
    ra_val = {8{$urandom}};
    fd = '{8'h00, 8'h00, 8'h00, 8'h12, 8'h34, 8'h00, 8'h00, 8'h03, 8'h00};
    n1 = {8{$urandom}};
    session(n1, 1, fd, c, r, n2a);
    checks++; if (c !== 8'h01) begin failures++; $display("C = %h for a right B", c); end
    checks++; if (r !== ra_val) begin failures++; $display("RA: R wrong"); end
    checks++; if (ra_addr !== 24'h001234 || ra_len !== 24'h000300) begin
      failures++; $display("RA request %h %h", ra_addr, ra_len); end
    // secure boot
    fd = '{8'h01, 8'h00, 8'h00, 8'h00, 8'h00, 8'h00, 8'h00, 8'h00, 8'h00};
    session(n1 ^ 256'h1, 1, fd, c, r, n2b);
    checks++; if (c !== 8'h01) failures++;
    checks++; if (r !== {8'h01, 8'h02, 240'd0}) begin failures++; $display("boot R %h", r); end
    checks++; if (n2a === n2b) begin failures++; $display("n2 did not change with n1"); end
    // wrong B
    session({8{$urandom}}, 0, fd, c, r, n2a);
    checks++; if (c !== 8'h00) begin failures++; $display("C = %h for a wrong B", c); end
    repeat (50) @(negedge clk);
    checks++; if (n_boot != 1 || n_ra != 1) begin failures++; $display("boot %0d ra %0d", n_boot, n_ra); end
    checks++; if (n_pass != 2 || n_fail != 1) failures++;
    checks++; if (txq.size() != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
