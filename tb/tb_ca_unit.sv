// tb_ca_unit: the CA unit with the real crypto-core, arbiter and flash
// controller against the flash model. It checks that a genuine frame passes,
// that a flipped payload bit, a modified stored digest and a swapped frame
// number each fail, that header fields are reported, and that the region
// digest equals the reference HMAC.
// The checks follow the original's rule that a frame passes only if its
// recomputed digest matches the stored one; the tamper cases are chosen here.
module tb_ca_unit;
  import sracare_pkg::*;
  import sha_ref_pkg::*;
  import frame_gen_pkg::*;
  logic clk = 0, rst_n = 0;
  logic cmd_valid = 0, cmd_ready, done, pass;
  ca_op_e cmd_op = CA_VERIFY;
  faddr_t cmd_addr = '0, cmd_len = '0;
  digest_t digest, key;
  logic [31:0] frame_num, frame_off;
  hmac_req_t hreq, hreq_idle;
  hmac_rsp_t hrsp, hrsp1;
  logic fl_cmd_valid, fl_cmd_ready, fl_done, fl_rd_valid, fl_rd_ready;
  flash_op_e fl_cmd_op;
  faddr_t fl_cmd_addr, fl_cmd_len;
  logic [7:0] fl_rd_data;
  logic c_start, c_ho, c_iv, c_il, c_ir, c_busy, c_done, wr_ready;
  logic [7:0] c_id;
  digest_t c_key, c_dig;
  logic sclk, mosi, miso, cs_n;
  int checks = 0, failures = 0;

  assign key = TB_KEY;
  assign hreq_idle = '0;

  ca_unit dut (.*);
  hmac_arbiter u_arb (.clk, .rst_n, .req0(hreq), .rsp0(hrsp), .req1(hreq_idle), .rsp1(hrsp1),
    .start(c_start), .hash_only(c_ho), .key(c_key), .in_valid(c_iv), .in_data(c_id), .in_last(c_il),
    .in_ready(c_ir), .done(c_done), .digest(c_dig));
  hmac_sha256 u_hmac (.clk, .rst_n, .start(c_start), .hash_only(c_ho), .key(c_key), .in_valid(c_iv),
    .in_data(c_id), .in_last(c_il), .in_ready(c_ir), .busy(c_busy), .done(c_done), .digest(c_dig));
  flash_ctrl u_fc (.clk, .rst_n, .cmd_valid(fl_cmd_valid), .cmd_op(fl_cmd_op), .cmd_addr(fl_cmd_addr),
    .cmd_len(fl_cmd_len), .cmd_ready(fl_cmd_ready), .done(fl_done), .rd_valid(fl_rd_valid),
    .rd_data(fl_rd_data), .rd_ready(fl_rd_ready), .wr_valid(1'b0), .wr_data(8'h00), .wr_ready,
    .sclk, .mosi, .miso, .cs_n);
  spi_flash_model #(.BYTES(16384)) flash (.sclk, .cs_n, .mosi, .miso);

  always #5 clk = ~clk;
  initial begin
    repeat (600000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input ca_op_e o, input int a, input int n);
    @(negedge clk); cmd_valid = 1; cmd_op = o; cmd_addr = faddr_t'(a); cmd_len = faddr_t'(n);
    @(negedge clk); cmd_valid = 0;
    while (!done) @(negedge clk);
  endtask

  task automatic load(input int slot, input int as_frame);
    bq_t r = frame_record(as_frame, TB_KEY);
    foreach (r[k]) flash.mem[slot * SECTOR_BYTES + k] = r[k];
  endtask

  initial begin
    bq_t m;
    for (int i = 0; i < 16384; i++) flash.mem[i] = 8'hff;
    load(0, 0); load(1, 1); load(2, 2);
    repeat (3) @(negedge clk);
    rst_n = 1;
    run(CA_VERIFY, 0, 0);
    checks++; if (!pass) begin failures++; $display("genuine frame 0 failed"); end
    checks++; if (frame_num != 0 || frame_off != 0) failures++;
    run(CA_VERIFY, SECTOR_BYTES, 0);
    checks++; if (!pass) begin failures++; $display("genuine frame 1 failed"); end
    checks++; if (frame_num != 1 || frame_off != SECTOR_BYTES) failures++;
    // one flipped payload bit
    flash.mem[SECTOR_BYTES + 40 + 500] ^= 8'h10;
    run(CA_VERIFY, SECTOR_BYTES, 0);
    checks++; if (pass) begin failures++; $display("bit flip not detected"); end
    // modified stored digest
    load(1, 1);
    flash.mem[SECTOR_BYTES + 3] ^= 8'h01;
    run(CA_VERIFY, SECTOR_BYTES, 0);
    checks++; if (pass) begin failures++; $display("digest change not detected"); end
    // frame 2 written into slot 1 with its number changed: header mismatch
    load(1, 2);
    flash.mem[SECTOR_BYTES + 35] = 8'h01;
    run(CA_VERIFY, SECTOR_BYTES, 0);
    checks++; if (pass) begin failures++; $display("renumbered frame not detected"); end
    // region digest (remote attestation) over 300 bytes of frame 2
    m.delete();
    for (int k = 0; k < 300; k++) m.push_back(flash.mem[2 * SECTOR_BYTES + 17 + k]);
    run(CA_DIGEST, 2 * SECTOR_BYTES + 17, 300);
    checks++; if (digest !== hmac(TB_KEY, m)) begin failures++; $display("region digest wrong"); end
    checks++; if (pass) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
