// sracare_top: the SRACARE prover - secure boot with onboard recovery and
// remote attestation behind an authenticated link, around a processor that is
// only released once its code is known good.
//
// Blocks: the CARE module (crypto-core, CA unit, Resilience Engine), the
// secure ROM, the flash controller on a dedicated SPI bus, the boot
// sequencer, the protocol engine and the UART to the verifier. The RISC-V
// processor, its PMP and SRAM, and the flash chip are outside and meet this
// block at its ports:
//   core_fetch_enable      the processor may run (all frames verified)
//   pmp_lock_mask/_base    regions the processor's PMP must make read-only
//   spi_*                  the application flash
//   prov_*                 factory initialisation of the secure ROM
//   uart_rx / uart_tx      link to the verifier
// The CA unit's command port serves the boot sequencer while a boot runs and
// the protocol engine (remote attestation) otherwise.
// Timing: at the default sizes a power-on boot of six clean frames takes
// 127,693 cycles, about 21,300 a frame (1064 SPI bytes at about 20 cycles); a repaired frame adds an erase, five page
// programs and a second check.
// Block split and connections follow the design's prover architecture; the
// port list is this design's choice.
// Lint notes: SYNCASYNCNET on rst_n comes from the disable iff of the
// sub-blocks' assertions; every register uses rst_n as an asynchronous reset. ca_frame_off, re_busy and re_recovered are status outputs
// of sub-blocks that the top does not need (the boot sequencer keeps its own
// repair count).
module sracare_top
  import sracare_pkg::*;
#(
  parameter int unsigned NUM_FRAMES   = 6,
  parameter int unsigned CLKS_PER_BIT = 868,
  parameter int unsigned SPI_CLK_DIV  = 1,
  localparam int unsigned ROM_BYTES   = 64 + NUM_FRAMES * REC_BYTES,
  localparam int unsigned AW          = $clog2(ROM_BYTES)
)(
  input  logic          clk,
  input  logic          rst_n,
  // verifier link
  input  logic          uart_rx,
  output logic          uart_tx,
  // application flash
  output logic          spi_sclk,
  output logic          spi_mosi,
  input  logic          spi_miso,
  output logic          spi_cs_n,
  // secure ROM initialisation (tied off in the field)
  input  logic          prov_mode,
  input  logic          prov_we,
  input  logic [AW-1:0] prov_addr,
  input  logic [7:0]    prov_data,
  // processor
  output logic          core_fetch_enable,
  output logic [NUM_FRAMES-1:0] pmp_lock_mask,
  output faddr_t        pmp_lock_base [NUM_FRAMES],
  // status
  output logic          boot_busy,
  output logic          boot_ok,
  output logic [7:0]    frames_checked,
  output logic [7:0]    frames_recovered,
  output logic          auth_pass,
  output logic          auth_fail,
  output logic          ra_done
);
  localparam int unsigned SW = (NUM_FRAMES > 1) ? $clog2(NUM_FRAMES) : 1;

  // secure ROM
  logic [AW-1:0] rom_addr;
  logic [7:0]    rom_data;
  logic [127:0]  chip_info;
  digest_t       key;

  secure_rom #(.NUM_FRAMES(NUM_FRAMES)) u_rom (
    .clk, .prov_mode, .prov_we, .prov_addr, .prov_data,
    .rd_addr(rom_addr), .rd_data(rom_data), .chip_info, .key
  );

  // flash controller and SPI
  logic      fl_cmd_valid, fl_cmd_ready, fl_done, fl_rd_valid, fl_rd_ready, fl_wr_valid, fl_wr_ready;
  flash_op_e fl_cmd_op;
  faddr_t    fl_cmd_addr, fl_cmd_len;
  logic [7:0] fl_rd_data, fl_wr_data;

  flash_ctrl #(.CLK_DIV(SPI_CLK_DIV)) u_flash (
    .clk, .rst_n, .cmd_valid(fl_cmd_valid), .cmd_op(fl_cmd_op), .cmd_addr(fl_cmd_addr),
    .cmd_len(fl_cmd_len), .cmd_ready(fl_cmd_ready), .done(fl_done),
    .rd_valid(fl_rd_valid), .rd_data(fl_rd_data), .rd_ready(fl_rd_ready),
    .wr_valid(fl_wr_valid), .wr_data(fl_wr_data), .wr_ready(fl_wr_ready),
    .sclk(spi_sclk), .mosi(spi_mosi), .miso(spi_miso), .cs_n(spi_cs_n)
  );

  // CA command port: boot sequencer during a boot, protocol engine otherwise
  logic        ca_cmd_valid, ca_cmd_ready, ca_done, ca_pass;
  ca_op_e      ca_cmd_op;
  faddr_t      ca_cmd_addr, ca_cmd_len;
  digest_t     ca_digest;
  logic [31:0] ca_frame_num, ca_frame_off;

  logic        sb_ca_valid, pp_ca_valid;
  ca_op_e      sb_ca_op, pp_ca_op;
  faddr_t      sb_ca_addr, pp_ca_addr, pp_ca_len;

  logic          re_start, re_busy, re_done, re_ok;
  logic [SW-1:0] re_slot;
  logic [7:0]    re_recovered;

  hmac_req_t hreq_pp;
  hmac_rsp_t hrsp_pp;

  care #(.NUM_FRAMES(NUM_FRAMES)) u_care (
    .clk, .rst_n, .key,
    .ca_cmd_valid, .ca_cmd_op, .ca_cmd_addr, .ca_cmd_len, .ca_cmd_ready, .ca_done,
    .ca_pass, .ca_digest, .ca_frame_num, .ca_frame_off,
    .re_start, .re_slot, .re_busy, .re_done, .re_ok, .re_recovered,
    .lock_mask(pmp_lock_mask), .lock_base(pmp_lock_base),
    .rom_addr, .rom_data, .hreq_ext(hreq_pp), .hrsp_ext(hrsp_pp),
    .fl_cmd_valid, .fl_cmd_op, .fl_cmd_addr, .fl_cmd_len, .fl_cmd_ready, .fl_done,
    .fl_rd_valid, .fl_rd_data, .fl_rd_ready, .fl_wr_valid, .fl_wr_data, .fl_wr_ready
  );

  always_comb begin
    if (boot_busy) begin
      ca_cmd_valid = sb_ca_valid;
      ca_cmd_op    = sb_ca_op;
      ca_cmd_addr  = sb_ca_addr;
      ca_cmd_len   = '0;
    end else begin
      ca_cmd_valid = pp_ca_valid;
      ca_cmd_op    = pp_ca_op;
      ca_cmd_addr  = pp_ca_addr;
      ca_cmd_len   = pp_ca_len;
    end
  end

  logic boot_req, boot_done;

  secure_boot_ctrl #(.NUM_FRAMES(NUM_FRAMES)) u_boot (
    .clk, .rst_n, .boot_req, .core_fetch_enable, .boot_busy, .boot_done, .boot_ok,
    .frames_checked, .frames_recovered,
    .ca_cmd_valid(sb_ca_valid), .ca_cmd_op(sb_ca_op), .ca_cmd_addr(sb_ca_addr),
    .ca_cmd_ready(ca_cmd_ready && boot_busy), .ca_done, .ca_pass, .ca_frame_num,
    .re_start, .re_slot, .re_done, .re_ok
  );

  // verifier link
  logic       rx_valid, tx_valid, tx_ready;
  logic [7:0] rx_data, tx_data;

  uart #(.CLKS_PER_BIT(CLKS_PER_BIT)) u_uart (
    .clk, .rst_n, .rx(uart_rx), .tx(uart_tx), .tx_valid, .tx_data, .tx_ready,
    .rx_valid, .rx_data
  );

  prover_protocol u_proto (
    .clk, .rst_n, .rx_valid, .rx_data, .tx_valid, .tx_data, .tx_ready,
    .key, .chip_info, .hreq(hreq_pp), .hrsp(hrsp_pp),
    .boot_req, .boot_done, .boot_ok, .frames_recovered,
    .ca_cmd_valid(pp_ca_valid), .ca_cmd_op(pp_ca_op), .ca_cmd_addr(pp_ca_addr),
    .ca_cmd_len(pp_ca_len), .ca_cmd_ready(ca_cmd_ready && !boot_busy), .ca_done,
    .ca_digest, .auth_pass, .auth_fail, .ra_done
  );
endmodule
