// tb_care: the CARE module with the secure ROM, flash controller and flash
// model. Checks a genuine and a tampered frame, repairs the tampered one with
// the Resilience Engine (flash equals the golden record afterwards, lock set),
// re-checks it, computes an attestation digest, and runs a plain SHA-256 job on
// the external crypto port while the CA unit checks a frame, so the shared core
// must serve both correctly.
// The sharing of one crypto-core between code authentication and other
// users follows the original; the scenario is this testbench's own.
module tb_care;
  import sracare_pkg::*;
  import sha_ref_pkg::*;
  import frame_gen_pkg::*;
  localparam int N = 3;
  localparam int AW = $clog2(64 + N * REC_BYTES);
  logic clk = 0, rst_n = 0;
  digest_t key, ca_digest;
  logic [127:0] chip_info;
  logic ca_cmd_valid = 0, ca_cmd_ready, ca_done, ca_pass;
  ca_op_e ca_cmd_op = CA_VERIFY;
  faddr_t ca_cmd_addr = '0, ca_cmd_len = '0;
  logic [31:0] ca_frame_num, ca_frame_off;
  logic re_start = 0, re_busy, re_done, re_ok;
  logic [1:0] re_slot = 0;
  logic [7:0] re_recovered;
  logic [N-1:0] lock_mask;
  faddr_t lock_base [N];
  logic [AW-1:0] rom_addr, prov_addr = 0;
  logic [7:0] rom_data, prov_data = 0;
  logic prov_mode, prov_we = 0;
  hmac_req_t hreq_ext;
  hmac_rsp_t hrsp_ext;
  logic fl_cmd_valid, fl_cmd_ready, fl_done, fl_rd_valid, fl_rd_ready, fl_wr_valid, fl_wr_ready;
  flash_op_e fl_cmd_op;
  faddr_t fl_cmd_addr, fl_cmd_len;
  logic [7:0] fl_rd_data, fl_wr_data;
  logic sclk, mosi, miso, cs_n;
  int checks = 0, failures = 0;

  care #(.NUM_FRAMES(N)) dut (.*);
  secure_rom #(.NUM_FRAMES(N)) u_rom (.clk, .prov_mode, .prov_we, .prov_addr, .prov_data,
    .rd_addr(rom_addr), .rd_data(rom_data), .chip_info, .key);
  flash_ctrl u_fc (.clk, .rst_n, .cmd_valid(fl_cmd_valid), .cmd_op(fl_cmd_op), .cmd_addr(fl_cmd_addr),
    .cmd_len(fl_cmd_len), .cmd_ready(fl_cmd_ready), .done(fl_done), .rd_valid(fl_rd_valid),
    .rd_data(fl_rd_data), .rd_ready(fl_rd_ready), .wr_valid(fl_wr_valid), .wr_data(fl_wr_data),
    .wr_ready(fl_wr_ready), .sclk, .mosi, .miso, .cs_n);
  spi_flash_model #(.BYTES(N * SECTOR_BYTES)) flash (.sclk, .cs_n, .mosi, .miso);

  always #5 clk = ~clk;
  initial begin
    repeat (1000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic verify(input int s);
    @(negedge clk); ca_cmd_valid = 1; ca_cmd_op = CA_VERIFY; ca_cmd_addr = faddr_t'(s * SECTOR_BYTES);
    @(negedge clk); ca_cmd_valid = 0;
    while (!ca_done) @(negedge clk);
  endtask

  task automatic ext_sha(input bq_t msg, output logic [255:0] d);
    hreq_ext.req = 1; hreq_ext.hash_only = 1;
    while (!hrsp_ext.gnt) @(negedge clk);
    hreq_ext.start = 1; @(negedge clk); hreq_ext.start = 0;
    foreach (msg[i]) begin
      hreq_ext.in_valid = 1; hreq_ext.in_data = msg[i]; hreq_ext.in_last = (i == msg.size() - 1);
      @(posedge clk); while (!hrsp_ext.in_ready) @(posedge clk);
      @(negedge clk);
    end
    hreq_ext.in_valid = 0;
    while (!hrsp_ext.done) begin @(posedge clk); #1; end
    d = hrsp_ext.digest;
    @(negedge clk); hreq_ext.req = 0;
  endtask

  initial begin
    bq_t rec, m;
    logic [255:0] d;
    hreq_ext = '0;
    prov_mode = 1;
    for (int i = 0; i < 32; i++) begin
      @(negedge clk); prov_we = 1; prov_addr = AW'(16 + i); prov_data = TB_KEY[255-8*i -: 8];
    end
    for (int s = 0; s < N; s++) begin
      rec = frame_record(s, TB_KEY);
      foreach (rec[k]) begin @(negedge clk); prov_we = 1; prov_addr = AW'(64 + s * REC_BYTES + k); prov_data = rec[k]; end
    end
    @(negedge clk); prov_we = 0; prov_mode = 0;
    for (int s = 0; s < N; s++) begin
      rec = frame_record(s, TB_KEY);
      foreach (rec[k]) flash.mem[s * SECTOR_BYTES + k] = rec[k];
    end
    flash.mem[SECTOR_BYTES + 900] ^= 8'h01;
    rst_n = 1;
    verify(0);
    checks++; if (!ca_pass) begin failures++; $display("frame 0 rejected"); end
    verify(1);
    checks++; if (ca_pass) begin failures++; $display("tampered frame 1 accepted"); end
    @(negedge clk); re_start = 1; re_slot = 1; @(negedge clk); re_start = 0;
    while (!re_done) @(negedge clk);
    checks++; if (!re_ok || lock_mask !== 3'b010 || re_recovered != 1) begin failures++; $display("repair failed"); end
    rec = frame_record(1, TB_KEY);
    begin int bad = 0; foreach (rec[k]) if (flash.mem[SECTOR_BYTES + k] !== rec[k]) bad++;
      checks++; if (bad) begin failures++; $display("%0d bytes differ", bad); end end
    verify(1);
    checks++; if (!ca_pass) begin failures++; $display("repaired frame rejected"); end
    // shared core: external SHA job racing a CA frame check
    m.delete();
    for (int i = 0; i < 16; i++) m.push_back(TB_CHIP_INFO[127-8*i -: 8]);
    fork
      verify(2);
      begin @(negedge clk); ext_sha(m, d); end
    join
    checks++; if (!ca_pass) begin failures++; $display("frame 2 rejected under sharing"); end
    checks++; if (d !== sha256(m)) begin failures++; $display("external SHA wrong"); end
    // attestation digest
    @(negedge clk); ca_cmd_valid = 1; ca_cmd_op = CA_DIGEST; ca_cmd_addr = faddr_t'(2 * SECTOR_BYTES + 5); ca_cmd_len = 24'd90;
    @(negedge clk); ca_cmd_valid = 0;
    while (!ca_done) @(negedge clk);
    m.delete();
    for (int i = 0; i < 90; i++) m.push_back(flash.mem[2 * SECTOR_BYTES + 5 + i]);
    checks++; if (ca_digest !== hmac(TB_KEY, m)) begin failures++; $display("attestation digest wrong"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
