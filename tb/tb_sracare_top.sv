// tb_sracare_top: end-to-end test of the prover at its default parameters
// (six 1 KB frames, 868 clocks per UART bit, SPI at half the clock).
// A behavioural verifier talks to the design over the UART; expected values
// come from the reference HMAC/SHA-256. Sequence:
//   1 provision the secure ROM, load the flash with frame 2 corrupted, power on:
//     the boot must repair frame 2, lock it and release the core
//   2 verifier session with attestation of a flash region: R = HMAC(K, region)
//   3 runtime attack (frame 4 changed, frames 0 and 1 swapped), session with
//     F = 1: the boot repairs three frames, R reports it
//   4 session with a wrong B: C = 0, nothing else happens
//   5 flash write-protected and frame 3 corrupted, F = 1: repair cannot
//     stick, boot halts with the core held; protection lifted, F = 1 again:
//     the boot succeeds
//   6 reset and power-on boot of the clean six-frame image, timed
// Each mechanism is counted and a mechanism that never happened is a failure.
// The sequence follows the original's flow (authenticate, then attest or
// boot with repair); the scenario, sizes and flash timing are chosen here.
// The top runs at its default parameters.
module tb_sracare_top;
  import sracare_pkg::*;
  import sha_ref_pkg::*;
  import frame_gen_pkg::*;
  localparam int N   = 6;
  localparam int CPB = 868;
  localparam int AW  = $clog2(64 + N * REC_BYTES);

  logic clk = 0, rst_n;
  logic uart_rx, uart_tx;
  logic spi_sclk, spi_mosi, spi_miso, spi_cs_n;
  logic prov_mode, prov_we;
  logic [AW-1:0] prov_addr;
  logic [7:0] prov_data;
  logic core_fetch_enable, boot_busy, boot_ok, auth_pass, auth_fail, ra_done;
  logic [N-1:0] pmp_lock_mask;
  faddr_t pmp_lock_base [N];
  logic [7:0] frames_checked, frames_recovered;
  int checks = 0, failures = 0;

  sracare_top dut (.*);
  spi_flash_model #(.BYTES(N * SECTOR_BYTES)) flash (.sclk(spi_sclk), .cs_n(spi_cs_n),
    .mosi(spi_mosi), .miso(spi_miso));

  always #5 clk = ~clk;   // 100 MHz

  // mechanism counters
  int m_boot = 0, m_boot_halt = 0, m_recover = 0, m_lock = 0, m_auth_pass = 0, m_auth_fail = 0;
  int m_ra = 0, m_boot_f = 0, m_crypto_stall = 0, m_core_shared = 0;
  logic [N-1:0] lock_q = '0;
  always @(posedge clk) if (rst_n) begin
    if (dut.u_boot.boot_done) begin
      if (dut.boot_ok) m_boot++; else m_boot_halt++;
    end
    if (dut.re_done && dut.re_ok) m_recover++;
    if (pmp_lock_mask != lock_q) m_lock++;
    lock_q <= pmp_lock_mask;
    if (auth_pass) m_auth_pass++;
    if (auth_fail) m_auth_fail++;
    if (ra_done) m_ra++;
    if (dut.u_proto.boot_req) m_boot_f++;
    if (dut.fl_rd_valid && !dut.fl_rd_ready) m_crypto_stall++;
    if (dut.hrsp_pp.gnt && dut.u_proto.hreq.start) m_core_shared++;
    if (boot_busy && core_fetch_enable) begin failures++; $display("core enabled during boot"); end
  end

  initial begin
    repeat (30_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---- verifier side of the serial link
  task automatic vr_send(input byte unsigned b);
    uart_rx = 0; repeat (CPB) @(posedge clk);
    for (int i = 0; i < 8; i++) begin uart_rx = b[i]; repeat (CPB) @(posedge clk); end
    uart_rx = 1; repeat (CPB) @(posedge clk);
  endtask

  task automatic vr_recv(output byte unsigned b);
    while (uart_tx !== 1'b0) @(posedge clk);
    repeat (CPB / 2) @(posedge clk);
    for (int i = 0; i < 8; i++) begin repeat (CPB) @(posedge clk); b[i] = uart_tx; end
    repeat (CPB) @(posedge clk);
  endtask

  task automatic vr_send_q(input bq_t q);
    foreach (q[i]) vr_send(q[i]);
  endtask

  task automatic vr_recv_n(input int n, output bq_t q);
    byte unsigned b;
    q.delete();
    repeat (n) begin vr_recv(b); q.push_back(b); end
  endtask

  function automatic logic [255:0] v256(bq_t q, int off);
    logic [255:0] v;
    for (int i = 0; i < 32; i++) v[255-8*i -: 8] = q[off + i];
    return v;
  endfunction

  // one verifier session: n1 -> A -> B -> C [-> F,D -> R]
  task automatic session(input bit good_b, input byte unsigned f, input int saddr, input int len,
                         output byte unsigned c, output logic [255:0] r);
    bq_t a, q, ci;
    logic [255:0] n1, h1, n2, b;
    n1 = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
    for (int i = 0; i < 16; i++) ci.push_back(TB_CHIP_INFO[127-8*i -: 8]);
    vr_send_q(to_bytes(n1));
    vr_recv_n(64, a);
    h1 = hmac(TB_KEY, to_bytes(n1));
    n2 = hmac(TB_KEY, to_bytes(sha256(ci) ^ n1));
    checks++; if (v256(a, 0) !== h1) begin failures++; $display("prover failed authentication"); end
    checks++; if (v256(a, 32) !== n2) begin failures++; $display("n2 wrong"); end
    b = hmac(h1 ^ n1 ^ n2, to_bytes(n2));
    if (!good_b) b = ~b;
    vr_send_q(to_bytes(b));
    vr_recv_n(1, q);
    c = q[0];
    r = '0;
    if (c == 8'h01) begin
      q.delete();
      q.push_back(f);
      for (int i = 3; i >= 0; i--) q.push_back(byte'(saddr >> (8 * i)));
      for (int i = 3; i >= 0; i--) q.push_back(byte'(len >> (8 * i)));
      vr_send_q(q);
      vr_recv_n(32, q);
      r = v256(q, 0);
    end
  endtask

  task automatic check_flash_golden(input string when);
    int bad = 0;
    for (int s = 0; s < N; s++) begin
      bq_t rec = frame_record(s, TB_KEY);
      foreach (rec[k]) if (flash.mem[s * SECTOR_BYTES + k] !== rec[k]) bad++;
    end
    checks++; if (bad != 0) begin failures++; $display("%s: %0d flash bytes differ from golden", when, bad); end
  endtask

  initial begin
    bq_t rec, m;
    byte unsigned c;
    logic [255:0] r;
    int t0, t_boot;
    rst_n = 0; uart_rx = 1; prov_mode = 1; prov_we = 0; prov_addr = '0; prov_data = '0;
    // factory initialisation of the secure ROM: chip info, key, golden records
    for (int i = 0; i < 16; i++) begin
      @(negedge clk); prov_we = 1; prov_addr = AW'(i); prov_data = TB_CHIP_INFO[127-8*i -: 8];
    end
    for (int i = 0; i < 32; i++) begin
      @(negedge clk); prov_we = 1; prov_addr = AW'(16 + i); prov_data = TB_KEY[255-8*i -: 8];
    end
    for (int s = 0; s < N; s++) begin
      rec = frame_record(s, TB_KEY);
      foreach (rec[k]) begin
        @(negedge clk); prov_we = 1; prov_addr = AW'(64 + s * REC_BYTES + k); prov_data = rec[k];
      end
    end
    @(negedge clk); prov_we = 0; prov_mode = 0;
    // flash image with frame 2 tampered
    for (int i = 0; i < N * SECTOR_BYTES; i++) flash.mem[i] = 8'hff;
    for (int s = 0; s < N; s++) begin
      rec = frame_record(s, TB_KEY);
      foreach (rec[k]) flash.mem[s * SECTOR_BYTES + k] = rec[k];
    end
    flash.mem[2 * SECTOR_BYTES + 40 + 77] ^= 8'h04;

    // 1: power-on secure boot with repair
    @(negedge clk); rst_n = 1; t0 = $time;
    while (!dut.u_boot.boot_done) @(negedge clk);
    t_boot = ($time - t0) / 10;
    @(negedge clk);
    $display("power-on boot with one repair: %0d cycles", t_boot);
    checks++; if (!boot_ok || !core_fetch_enable) begin failures++; $display("power-on boot failed"); end
    checks++; if (frames_recovered != 1 || frames_checked != 7) begin
      failures++; $display("checked %0d recovered %0d", frames_checked, frames_recovered); end
    checks++; if (pmp_lock_mask !== 6'b000100 || pmp_lock_base[2] !== faddr_t'(2 * SECTOR_BYTES)) begin
      failures++; $display("lock mask %b", pmp_lock_mask); end
    check_flash_golden("after power-on boot");

    // 2: remote attestation of 700 bytes starting inside frame 1
    session(1, 8'h00, SECTOR_BYTES + 100, 700, c, r);
    m.delete();
    for (int i = 0; i < 700; i++) m.push_back(flash.mem[SECTOR_BYTES + 100 + i]);
    checks++; if (c !== 8'h01) begin failures++; $display("C = %0d", c); end
    checks++; if (r !== hmac(TB_KEY, m)) begin failures++; $display("attestation report wrong"); end

    // 3: runtime attack, then secure boot requested by the verifier
    flash.mem[4 * SECTOR_BYTES + 40 + 1000] = 8'h00;
    for (int k = 0; k < REC_BYTES; k++) begin
      byte unsigned tmp = flash.mem[k];
      flash.mem[k] = flash.mem[SECTOR_BYTES + k];
      flash.mem[SECTOR_BYTES + k] = tmp;
    end
    t0 = $time;
    session(1, 8'h01, 0, 0, c, r);
    checks++; if (c !== 8'h01) failures++;
    checks++; if (r !== {8'h01, 8'h03, 240'd0}) begin failures++; $display("boot report %h", r[255:240]); end
    checks++; if (!core_fetch_enable || pmp_lock_mask !== 6'b010111) begin
      failures++; $display("after F=1 boot: fetch %b lock %b", core_fetch_enable, pmp_lock_mask); end
    check_flash_golden("after requested boot");

    // 4: verifier that does not know K
    session(0, 8'h01, 0, 0, c, r);
    checks++; if (c !== 8'h00) begin failures++; $display("wrong B accepted"); end
    checks++; if (!core_fetch_enable) failures++;

    // 5: unrecoverable flash, then recovery once writable again
    flash.wp = 1;
    flash.mem[3 * SECTOR_BYTES + 600] ^= 8'h80;
    session(1, 8'h01, 0, 0, c, r);
    checks++; if (r !== {8'h00, 8'h01, 240'd0} || core_fetch_enable) begin
      failures++; $display("write-protected boot: report %h fetch %b", r[255:240], core_fetch_enable); end
    flash.wp = 0;
    session(1, 8'h01, 0, 0, c, r);
    checks++; if (r !== {8'h01, 8'h01, 240'd0} || !core_fetch_enable) begin
      failures++; $display("final boot: report %h", r[255:240]); end
    check_flash_golden("at the end");

    // 6: power-on boot of the clean six-frame image; each frame costs one
    // 1064-byte SPI read: 17 cycles a byte plus the 2-3 cycle hand-off to the
    // CA unit, since the next byte starts only once the last one is taken
    @(negedge clk); rst_n = 0;
    repeat (3) @(negedge clk); rst_n = 1; t0 = $time;
    while (!dut.u_boot.boot_done) @(negedge clk);
    t_boot = ($time - t0) / 10;
    @(negedge clk);
    $display("clean power-on boot of %0d frames: %0d cycles", N, t_boot);
    checks++; if (!boot_ok || !core_fetch_enable || frames_checked != 8'(N) || frames_recovered != 0) begin
      failures++; $display("clean boot: ok %b checked %0d", boot_ok, frames_checked); end
    checks++; if (t_boot < N * REC_BYTES * 17 || t_boot > N * (REC_BYTES + 40) * 21) begin
      failures++; $display("clean boot took %0d cycles", t_boot); end

    // every mechanism must have happened
    $display("boots ok %0d, halted %0d, repairs %0d, lock changes %0d, auth pass %0d, auth fail %0d, RA %0d, F=1 boots %0d, crypto stalls %0d, protocol core jobs %0d",
             m_boot, m_boot_halt, m_recover, m_lock, m_auth_pass, m_auth_fail, m_ra, m_boot_f, m_crypto_stall, m_core_shared);
    checks++; if (m_boot != 4) begin failures++; $display("boots %0d", m_boot); end
    checks++; if (m_boot_halt != 1) failures++;
    checks++; if (m_recover != 6) begin failures++; $display("repairs %0d", m_recover); end
    checks++; if (m_lock == 0) failures++;
    checks++; if (m_auth_pass != 4 || m_auth_fail != 1) failures++;
    checks++; if (m_ra != 1) failures++;
    checks++; if (m_boot_f != 3) failures++;
    checks++; if (m_crypto_stall == 0) failures++;
    checks++; if (m_core_shared != 5 * 4) begin failures++; $display("protocol core jobs %0d", m_core_shared); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
