// sracare_pkg: constants and types shared by the SRACARE prover blocks.
//
// Frame layout (flash and recovery ROM alike), byte offsets inside a record:
//   0..31   digest  = HMAC-SHA256(K, frame_number || frame_offset || data)
//   32..35  frame number (big-endian)
//   36..39  flash offset of the frame (big-endian), where it is reflashed to
//   40..    data, FRAME_BYTES long
// The field order follows the frame drawing (hash, frame number, frame offset,
// data); the field widths and the byte order are this design's choice.
// Lint note: linted on its own, the constants look unused (UNUSEDPARAM);
// the modules that import the package use them.
package sracare_pkg;

  localparam int unsigned DIGEST_BYTES = 32;
  localparam int unsigned HDR_BYTES    = 40;
  localparam int unsigned FRAME_BYTES  = 1024;                    // 1 KB frames
  localparam int unsigned REC_BYTES    = HDR_BYTES + FRAME_BYTES; // one frame record
  localparam int unsigned SECTOR_BYTES = 4096;                    // flash erase sector
  localparam int unsigned ADDR_W       = 24;                      // SPI NOR address

  typedef logic [255:0] digest_t;
  typedef logic [ADDR_W-1:0] faddr_t;

  // SPI NOR commands
  localparam logic [7:0] CMD_READ = 8'h03;
  localparam logic [7:0] CMD_PP   = 8'h02;
  localparam logic [7:0] CMD_WREN = 8'h06;
  localparam logic [7:0] CMD_SE   = 8'h20;
  localparam logic [7:0] CMD_RDSR = 8'h05;

  typedef enum logic [1:0] {FOP_READ = 2'd0, FOP_PROGRAM = 2'd1, FOP_ERASE = 2'd2} flash_op_e;

  typedef enum logic {CA_VERIFY = 1'b0, CA_DIGEST = 1'b1} ca_op_e;

  // One requester's side of the shared HMAC core
  typedef struct packed {
    logic       req;        // hold high for the whole use of the core
    logic       start;      // one-cycle pulse, only while granted
    logic       hash_only;  // plain SHA-256 instead of HMAC
    digest_t    key;
    logic       in_valid;
    logic [7:0] in_data;
    logic       in_last;
  } hmac_req_t;

  typedef struct packed {
    logic    gnt;
    logic    in_ready;
    logic    done;          // one-cycle pulse, digest valid
    digest_t digest;
  } hmac_rsp_t;

endpackage
