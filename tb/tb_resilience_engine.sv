// tb_resilience_engine: the Resilience Engine with the secure ROM, flash
// controller and flash model. The ROM is provisioned with golden records;
// a corrupted flash frame is repaired and must then equal the golden record
// byte for byte, with its sector erased first, the lock bit and base set and
// the recovery counted. A ROM record whose frame number does not match its
// slot must be refused without touching the flash.
// Locate, reflash and lock follow the original's Resilience Engine steps;
// the erase-before-program check and the refused-record case are chosen here.
module tb_resilience_engine;
  import sracare_pkg::*;
  import sha_ref_pkg::*;
  import frame_gen_pkg::*;
  localparam int N = 4;
  localparam int AW = $clog2(64 + N * REC_BYTES);
  logic clk = 0, rst_n = 0;
  logic start = 0, busy, done, ok;
  logic [1:0] slot = 0;
  logic [7:0] recovered;
  logic [N-1:0] lock_mask;
  faddr_t lock_base [N];
  logic [AW-1:0] rom_addr, prov_addr = 0;
  logic [7:0] rom_data, prov_data = 0;
  logic prov_mode, prov_we = 0;
  logic [127:0] chip_info;
  digest_t key;
  logic fl_cmd_valid, fl_cmd_ready, fl_done, fl_wr_valid, fl_wr_ready, rd_valid;
  flash_op_e fl_cmd_op;
  faddr_t fl_cmd_addr, fl_cmd_len;
  logic [7:0] fl_wr_data, rd_data;
  logic sclk, mosi, miso, cs_n;
  int checks = 0, failures = 0;

  resilience_engine #(.NUM_FRAMES(N)) dut (.*);
  secure_rom #(.NUM_FRAMES(N)) u_rom (.clk, .prov_mode, .prov_we, .prov_addr, .prov_data,
    .rd_addr(rom_addr), .rd_data(rom_data), .chip_info, .key);
  flash_ctrl u_fc (.clk, .rst_n, .cmd_valid(fl_cmd_valid), .cmd_op(fl_cmd_op), .cmd_addr(fl_cmd_addr),
    .cmd_len(fl_cmd_len), .cmd_ready(fl_cmd_ready), .done(fl_done), .rd_valid, .rd_data,
    .rd_ready(1'b1), .wr_valid(fl_wr_valid), .wr_data(fl_wr_data), .wr_ready(fl_wr_ready),
    .sclk, .mosi, .miso, .cs_n);
  spi_flash_model #(.BYTES(N * SECTOR_BYTES)) flash (.sclk, .cs_n, .mosi, .miso);

  always #5 clk = ~clk;
  initial begin
    repeat (600000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic prov(input int a, input byte unsigned d);
    @(negedge clk); prov_we = 1; prov_addr = AW'(a); prov_data = d;
    @(negedge clk); prov_we = 0;
  endtask

  task automatic recover(input int s);
    @(negedge clk); slot = 2'(s); start = 1;
    @(negedge clk); start = 0;
    while (!done) @(negedge clk);
  endtask

  initial begin
    bq_t rec;
    int e0;
    for (int i = 0; i < N * SECTOR_BYTES; i++) flash.mem[i] = 8'h00;
    prov_mode = 1;
    for (int s = 0; s < N; s++) begin
      rec = frame_record(s == 3 ? 1 : s, TB_KEY);   // slot 3 holds a mislabelled record
      foreach (rec[k]) prov(64 + s * REC_BYTES + k, rec[k]);
    end
    prov_mode = 0;
    for (int s = 0; s < N; s++) begin
      rec = frame_record(s, TB_KEY);
      foreach (rec[k]) flash.mem[s * SECTOR_BYTES + k] = rec[k];
    end
    // attack: overwrite part of frame 2 and garbage behind the record
    for (int k = 100; k < 300; k++) flash.mem[2 * SECTOR_BYTES + k] = 8'h00;
    flash.mem[2 * SECTOR_BYTES + 2000] = 8'h00;
    repeat (3) @(negedge clk);
    rst_n = 1;
    recover(2);
    rec = frame_record(2, TB_KEY);
    checks++; if (!ok) begin failures++; $display("recovery of slot 2 reported failure"); end
    begin
      int bad = 0;
      foreach (rec[k]) if (flash.mem[2 * SECTOR_BYTES + k] !== rec[k]) bad++;
      checks++; if (bad != 0) begin failures++; $display("%0d bytes differ after reflash", bad); end
    end
    checks++; if (flash.mem[2 * SECTOR_BYTES + 2000] !== 8'hff) begin failures++; $display("sector not erased"); end
    checks++; if (flash.erases != 1 || flash.programs != (REC_BYTES + 255) / 256) begin
      failures++; $display("erases %0d programs %0d", flash.erases, flash.programs); end
    checks++; if (lock_mask !== 4'b0100 || lock_base[2] !== faddr_t'(2 * SECTOR_BYTES)) begin
      failures++; $display("lock %b", lock_mask); end
    checks++; if (recovered != 1) failures++;
    // untouched neighbour
    checks++; if (flash.mem[1 * SECTOR_BYTES + 500] !== frame_record(1, TB_KEY)[500]) failures++;
    // mislabelled golden record: refused, flash untouched
    e0 = flash.erases;
    recover(3);
    checks++; if (ok) begin failures++; $display("mislabelled record accepted"); end
    checks++; if (flash.erases != e0 || lock_mask[3]) failures++;
    checks++; if (recovered != 1) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
