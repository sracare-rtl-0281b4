// ca_unit: Code integrity and Authentication unit of the CARE module.
//
// Two operations, each streaming flash bytes straight from the flash
// controller into the shared HMAC-SHA256 core under the device key K:
//   CA_VERIFY  reads the frame record at cmd_addr (REC_BYTES bytes). The first
//              32 bytes are the stored digest; frame number, frame offset and
//              the 1 KB payload are fed to the HMAC. `pass` is set when the
//              computed digest equals the stored one (integrity and
//              authenticity in one check); `frame_num` and `frame_off` report
//              the header fields.
//   CA_DIGEST  returns on `digest` HMAC(K, m) of the cmd_len bytes at cmd_addr,
//              the attestation report for a memory region.
// Handshake: cmd_valid is taken when cmd_ready; `done` pulses at the end.
// The unit holds the HMAC core (req) from the start of an operation to its
// end, so the check cannot be interleaved with other use of the core.
// Timing: a frame check costs the flash read (REC_BYTES+4 SPI bytes) with the
// HMAC overlapped; the HMAC stalls the read only while it compresses.
// Which fields the frame holds follows the design; their widths and that the
// digest covers the header fields as well as the data are this design's
// choice.
module ca_unit
  import sracare_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        cmd_valid,
  input  ca_op_e      cmd_op,
  input  faddr_t      cmd_addr,
  input  faddr_t      cmd_len,
  output logic        cmd_ready,
  output logic        done,
  output logic        pass,
  output digest_t     digest,
  output logic [31:0] frame_num,
  output logic [31:0] frame_off,
  input  digest_t     key,
  // shared crypto-core
  output hmac_req_t   hreq,
  input  hmac_rsp_t   hrsp,
  // flash controller
  output logic        fl_cmd_valid,
  output flash_op_e   fl_cmd_op,
  output faddr_t      fl_cmd_addr,
  output faddr_t      fl_cmd_len,
  input  logic        fl_cmd_ready,
  input  logic        fl_done,
  input  logic        fl_rd_valid,
  input  logic [7:0]  fl_rd_data,
  output logic        fl_rd_ready
);
  typedef enum logic [2:0] {S_IDLE, S_GNT, S_FCMD, S_STREAM, S_DONE} state_e;
  state_e  state;
  ca_op_e  op;
  faddr_t  addr, len, idx;
  digest_t stored;
  logic    fl_fin, h_fin;

  logic to_hmac;   // current flash byte goes into the HMAC
  assign to_hmac = (op == CA_DIGEST) || (idx >= faddr_t'(DIGEST_BYTES));

  assign cmd_ready    = (state == S_IDLE);
  assign fl_cmd_valid = (state == S_FCMD);
  assign fl_cmd_op    = FOP_READ;
  assign fl_cmd_addr  = addr;
  assign fl_cmd_len   = len;
  assign fl_rd_ready  = (state == S_STREAM) && (!to_hmac || hrsp.in_ready);

  always_comb begin
    hreq           = '0;
    hreq.req       = (state != S_IDLE) && (state != S_DONE);
    hreq.start     = (state == S_GNT) && hrsp.gnt;
    hreq.hash_only = 1'b0;
    hreq.key       = key;
    hreq.in_valid  = (state == S_STREAM) && fl_rd_valid && to_hmac;
    hreq.in_data   = fl_rd_data;
    hreq.in_last   = (idx == len - 1'b1);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      op        <= CA_VERIFY;
      addr      <= '0;
      len       <= '0;
      idx       <= '0;
      stored    <= '0;
      fl_fin    <= 1'b0;
      h_fin     <= 1'b0;
      done      <= 1'b0;
      pass      <= 1'b0;
      digest    <= '0;
      frame_num <= '0;
      frame_off <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (cmd_valid) begin
          op    <= cmd_op;
          addr  <= cmd_addr;
          len   <= (cmd_op == CA_VERIFY) ? faddr_t'(REC_BYTES) : cmd_len;
          idx   <= '0;
          pass  <= 1'b0;
          state <= S_GNT;
        end
        S_GNT: if (hrsp.gnt) state <= S_FCMD;
        S_FCMD: if (fl_cmd_ready) begin
          fl_fin <= 1'b0;
          h_fin  <= 1'b0;
          state  <= S_STREAM;
        end
        S_STREAM: begin
          if (fl_rd_valid && fl_rd_ready) begin
            idx <= idx + 1'b1;
            if (op == CA_VERIFY) begin
              if (idx < 32)      stored    <= {stored[247:0], fl_rd_data};
              else if (idx < 36) frame_num <= {frame_num[23:0], fl_rd_data};
              else if (idx < 40) frame_off <= {frame_off[23:0], fl_rd_data};
            end
          end
          if (fl_done)   fl_fin <= 1'b1;
          if (hrsp.done) begin h_fin <= 1'b1; digest <= hrsp.digest; end
          if ((fl_fin || fl_done) && (h_fin || hrsp.done)) state <= S_DONE;
        end
        S_DONE: begin
          pass  <= (op == CA_VERIFY) && (digest == stored);
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
