// care: the CARE module (Code Authentication and Resilience Engine), the
// trusted hardware between the secure ROM, the application flash and the
// processor.
//
// Contents: the single HMAC-SHA256 crypto-core with its arbiter, the CA unit
// (frame checks and attestation digests) and the Resilience Engine (locate,
// reflash, lock). Port 0 of the arbiter belongs to the CA unit; port 1 is
// brought out (`hreq_ext`/`hrsp_ext`) for the protocol engine, so one core
// serves digest computation, code authentication and the protocol.
// The flash controller port is shared: the Resilience Engine owns it while it
// is busy (erase and program), the CA unit otherwise (reads). The two never
// run at the same time, as the boot sequencer starts the engine only after a
// frame check has finished.
// The key comes from the secure ROM; the ROM's recovery area is read through
// `rom_addr`/`rom_data`.
// Grouping CA, RE and the crypto-core into CARE follows the design; the
// port sharing is this design's choice.
// Lint notes: SYNCASYNCNET on rst_n comes from the disable iff of the
// assertion; every register uses rst_n as an asynchronous reset. c_busy of
// the crypto-core is not needed because the arbiter tracks ownership.
module care
  import sracare_pkg::*;
#(
  parameter int unsigned NUM_FRAMES = 6,
  localparam int unsigned ROM_BYTES = 64 + NUM_FRAMES * REC_BYTES,
  localparam int unsigned AW        = $clog2(ROM_BYTES),
  localparam int unsigned SW        = (NUM_FRAMES > 1) ? $clog2(NUM_FRAMES) : 1
)(
  input  logic        clk,
  input  logic        rst_n,
  input  digest_t     key,
  // CA unit commands
  input  logic        ca_cmd_valid,
  input  ca_op_e      ca_cmd_op,
  input  faddr_t      ca_cmd_addr,
  input  faddr_t      ca_cmd_len,
  output logic        ca_cmd_ready,
  output logic        ca_done,
  output logic        ca_pass,
  output digest_t     ca_digest,
  output logic [31:0] ca_frame_num,
  output logic [31:0] ca_frame_off,
  // Resilience Engine
  input  logic          re_start,
  input  logic [SW-1:0] re_slot,
  output logic          re_busy,
  output logic          re_done,
  output logic          re_ok,
  output logic [7:0]    re_recovered,
  output logic [NUM_FRAMES-1:0] lock_mask,
  output faddr_t        lock_base [NUM_FRAMES],
  // secure ROM recovery area
  output logic [AW-1:0] rom_addr,
  input  logic [7:0]    rom_data,
  // crypto-core port for the protocol engine
  input  hmac_req_t     hreq_ext,
  output hmac_rsp_t     hrsp_ext,
  // flash controller
  output logic        fl_cmd_valid,
  output flash_op_e   fl_cmd_op,
  output faddr_t      fl_cmd_addr,
  output faddr_t      fl_cmd_len,
  input  logic        fl_cmd_ready,
  input  logic        fl_done,
  input  logic        fl_rd_valid,
  input  logic [7:0]  fl_rd_data,
  output logic        fl_rd_ready,
  output logic        fl_wr_valid,
  output logic [7:0]  fl_wr_data,
  input  logic        fl_wr_ready
);
  hmac_req_t hreq_ca;
  hmac_rsp_t hrsp_ca;
  logic       c_start, c_ho, c_iv, c_il, c_ir, c_busy, c_done;
  logic [7:0] c_id;
  digest_t    c_key, c_dig;

  hmac_arbiter u_arb (
    .clk, .rst_n, .req0(hreq_ca), .rsp0(hrsp_ca), .req1(hreq_ext), .rsp1(hrsp_ext),
    .start(c_start), .hash_only(c_ho), .key(c_key), .in_valid(c_iv), .in_data(c_id),
    .in_last(c_il), .in_ready(c_ir), .done(c_done), .digest(c_dig)
  );

  hmac_sha256 u_hmac (
    .clk, .rst_n, .start(c_start), .hash_only(c_ho), .key(c_key), .in_valid(c_iv),
    .in_data(c_id), .in_last(c_il), .in_ready(c_ir), .busy(c_busy), .done(c_done),
    .digest(c_dig)
  );

  logic      ca_fl_valid, re_fl_valid;
  flash_op_e ca_fl_op, re_fl_op;
  faddr_t    ca_fl_addr, ca_fl_len, re_fl_addr, re_fl_len;

  ca_unit u_ca (
    .clk, .rst_n, .cmd_valid(ca_cmd_valid), .cmd_op(ca_cmd_op), .cmd_addr(ca_cmd_addr),
    .cmd_len(ca_cmd_len), .cmd_ready(ca_cmd_ready), .done(ca_done), .pass(ca_pass),
    .digest(ca_digest), .frame_num(ca_frame_num), .frame_off(ca_frame_off), .key,
    .hreq(hreq_ca), .hrsp(hrsp_ca),
    .fl_cmd_valid(ca_fl_valid), .fl_cmd_op(ca_fl_op), .fl_cmd_addr(ca_fl_addr),
    .fl_cmd_len(ca_fl_len), .fl_cmd_ready(fl_cmd_ready && !re_busy), .fl_done(fl_done && !re_busy),
    .fl_rd_valid(fl_rd_valid && !re_busy), .fl_rd_data, .fl_rd_ready
  );

  resilience_engine #(.NUM_FRAMES(NUM_FRAMES)) u_re (
    .clk, .rst_n, .start(re_start), .slot(re_slot), .busy(re_busy), .done(re_done), .ok(re_ok),
    .recovered(re_recovered), .lock_mask, .lock_base, .rom_addr, .rom_data,
    .fl_cmd_valid(re_fl_valid), .fl_cmd_op(re_fl_op), .fl_cmd_addr(re_fl_addr),
    .fl_cmd_len(re_fl_len), .fl_cmd_ready, .fl_done, .fl_wr_valid, .fl_wr_data, .fl_wr_ready
  );

  always_comb begin
    if (re_busy) begin
      fl_cmd_valid = re_fl_valid;
      fl_cmd_op    = re_fl_op;
      fl_cmd_addr  = re_fl_addr;
      fl_cmd_len   = re_fl_len;
    end else begin
      fl_cmd_valid = ca_fl_valid;
      fl_cmd_op    = ca_fl_op;
      fl_cmd_addr  = ca_fl_addr;
      fl_cmd_len   = ca_fl_len;
    end
  end

  a_exclusive: assert property (@(posedge clk) disable iff (!rst_n) !(re_busy && ca_fl_valid));
endmodule
