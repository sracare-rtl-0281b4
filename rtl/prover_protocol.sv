// prover_protocol: prover side of the lightweight authenticated protocol
// between the remote verifier (Vr) and this device (Pr), and dispatch of the
// verifier's request to secure boot or remote attestation.
//
// Message sequence on the byte link (all values big-endian):
//   Vr -> Pr  n1                      32 bytes, verifier nonce
//   Pr        h1 = HMAC(K, n1)
//             T  = SHA-256(chip info, 16 bytes) xor n1
//             n2 = HMAC(K, T)         prover nonce, fresh for every n1
//   Pr -> Vr  A  = h1 || n2           64 bytes
//   Pr        K1 = h1 xor n1 xor n2
//   Vr -> Pr  B                       32 bytes, expected HMAC(K1, n2)
//   Pr -> Vr  C                       1 byte, 0x01 if B is right, else 0x00;
//                                     on 0x00 the session ends here
//   Vr -> Pr  F, D                    1 byte flag, then S_addr (4) and L (4)
//   F bit0 = 1: request a secure boot (core held, all frames re-checked and
//               repaired); R = {8'(boot ok), 8'(frames repaired), 240'd0}
//   F bit0 = 0: remote attestation; R = HMAC(K, flash[S_addr +: L]) from the
//               CA unit (L > 0, the low 24 bits of S_addr and L are used)
//   Pr -> Vr  R                       32 bytes
// All HMAC and hash work runs on the shared crypto-core (port `hreq`/`hrsp`),
// one job at a time. Status pulses `auth_pass` / `auth_fail` report the
// outcome of each verifier authentication.
// Timing: four core jobs of about 340 cycles each between n1 and A, one
// between B and C, plus the serial link.
// The message contents and their derivations follow the design; the nonce
// width, byte formats, the coding of C, F and R for a boot are this design's
// choice.
// Lint note: the F byte ends up in bits [71:64] of the F/S/L register after
// the last shift, but F is taken from bits [63:56] one byte earlier, as the
// ninth byte arrives, so bits [71:64] are never read.
module prover_protocol
  import sracare_pkg::*;
#(
  parameter int unsigned NONCE_BYTES = 32,
  parameter int unsigned CI_BYTES    = 16
)(
  input  logic        clk,
  input  logic        rst_n,
  // byte link
  input  logic        rx_valid,
  input  logic [7:0]  rx_data,
  output logic        tx_valid,
  output logic [7:0]  tx_data,
  input  logic        tx_ready,
  // secure storage
  input  digest_t     key,
  input  logic [CI_BYTES*8-1:0] chip_info,
  // shared crypto-core
  output hmac_req_t   hreq,
  input  hmac_rsp_t   hrsp,
  // secure boot
  output logic        boot_req,
  input  logic        boot_done,
  input  logic        boot_ok,
  input  logic [7:0]  frames_recovered,
  // remote attestation through the CA unit
  output logic        ca_cmd_valid,
  output ca_op_e      ca_cmd_op,
  output faddr_t      ca_cmd_addr,
  output faddr_t      ca_cmd_len,
  input  logic        ca_cmd_ready,
  input  logic        ca_done,
  input  digest_t     ca_digest,
  // status
  output logic        auth_pass,
  output logic        auth_fail,
  output logic        ra_done
);
  typedef enum logic [4:0] {
    S_RX_N1, S_H1, S_T, S_N2, S_SEND_A, S_RX_B, S_BX, S_SEND_C,
    S_RX_FD, S_BOOT, S_BOOT_W, S_RA, S_RA_W, S_SEND_R,
    J_REQ, J_FEED, J_WAIT
  } state_e;
  state_e state, jret;

  digest_t n1, h1, n2, bv, r;
  logic [71:0] fd;            // F, S_addr, L
  logic [6:0]  cnt;
  // crypto job
  digest_t    jkey, jmsg, jres;
  logic       jho;
  logic [5:0] jlen, jidx;
  // transmitter
  logic [511:0] txs;
  logic [6:0]   txn;

  assign tx_valid = (txn != 7'd0);
  assign tx_data  = txs[511:504];

  always_comb begin
    hreq           = '0;
    hreq.req       = (state == J_REQ) || (state == J_FEED) || (state == J_WAIT);
    hreq.start     = (state == J_REQ) && hrsp.gnt;
    hreq.hash_only = jho;
    hreq.key       = jkey;
    hreq.in_valid  = (state == J_FEED);
    hreq.in_data   = jmsg[255:248];
    hreq.in_last   = (jidx == jlen - 6'd1);
  end

  assign boot_req     = (state == S_BOOT);
  assign ca_cmd_valid = (state == S_RA);
  assign ca_cmd_op    = CA_DIGEST;
  assign ca_cmd_addr  = fd[ADDR_W+31:32];
  assign ca_cmd_len   = fd[ADDR_W-1:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_RX_N1;
      jret  <= S_RX_N1;
      {n1, h1, n2, bv, r} <= '0;
      fd    <= '0;
      cnt   <= '0;
      jkey  <= '0; jmsg <= '0; jres <= '0; jho <= 1'b0; jlen <= '0; jidx <= '0;
      txs   <= '0;
      txn   <= '0;
      auth_pass <= 1'b0;
      auth_fail <= 1'b0;
      ra_done   <= 1'b0;
    end else begin
      auth_pass <= 1'b0;
      auth_fail <= 1'b0;
      ra_done   <= 1'b0;
      if (tx_valid && tx_ready) begin
        txs <= {txs[503:0], 8'h00};
        txn <= txn - 7'd1;
      end
      unique case (state)
        S_RX_N1: if (rx_valid) begin
          n1  <= {n1[247:0], rx_data};
          cnt <= cnt + 7'd1;
          if (int'(cnt) == NONCE_BYTES - 1) begin
            cnt <= '0;
            // h1 = HMAC(K, n1)
            jkey <= key; jho <= 1'b0; jmsg <= {n1[247:0], rx_data}; jlen <= 6'(NONCE_BYTES);
            jret <= S_H1; state <= J_REQ;
          end
        end
        S_H1: begin
          h1 <= jres;
          // T: SHA-256 over the first CI_BYTES of chip information
          jho <= 1'b1; jmsg <= {chip_info, {(256 - CI_BYTES*8){1'b0}}}; jlen <= 6'(CI_BYTES);
          jret <= S_T; state <= J_REQ;
        end
        S_T: begin
          // n2 = HMAC(K, T), T = hash xor n1
          jho <= 1'b0; jkey <= key; jmsg <= jres ^ n1; jlen <= 6'(NONCE_BYTES);
          jret <= S_N2; state <= J_REQ;
        end
        S_N2: begin
          n2 <= jres;
          txs <= {h1, jres}; txn <= 7'd64;
          state <= S_SEND_A;
        end
        S_SEND_A: if (txn == 7'd0) state <= S_RX_B;
        S_RX_B: if (rx_valid) begin
          bv  <= {bv[247:0], rx_data};
          cnt <= cnt + 7'd1;
          if (cnt == 7'd31) begin
            cnt  <= '0;
            // expected B = HMAC(K1, n2), K1 = h1 ^ n1 ^ n2
            jho <= 1'b0; jkey <= h1 ^ n1 ^ n2; jmsg <= n2; jlen <= 6'(NONCE_BYTES);
            jret <= S_BX; state <= J_REQ;
          end
        end
        S_BX: begin
          txs <= {(jres == bv) ? 8'h01 : 8'h00, 504'd0}; txn <= 7'd1;
          if (jres == bv) auth_pass <= 1'b1; else auth_fail <= 1'b1;
          state <= (jres == bv) ? S_SEND_C : S_RX_N1;
        end
        S_SEND_C: if (txn == 7'd0) state <= S_RX_FD;
        S_RX_FD: if (rx_valid) begin
          fd  <= {fd[63:0], rx_data};
          cnt <= cnt + 7'd1;
          if (cnt == 7'd8) begin
            cnt   <= '0;
            state <= fd[56] ? S_BOOT : S_RA;   // F bit0, eight bytes in
          end
        end
        S_BOOT:   state <= S_BOOT_W;
        S_BOOT_W: if (boot_done) begin
          r <= {7'd0, boot_ok, frames_recovered, 240'd0};
          state <= S_SEND_R;
        end
        S_RA:   if (ca_cmd_ready) state <= S_RA_W;
        S_RA_W: if (ca_done) begin
          r <= ca_digest; ra_done <= 1'b1;
          state <= S_SEND_R;
        end
        S_SEND_R: begin
          if (txn == 7'd0 && cnt == 7'd0) begin txs <= {r, 256'd0}; txn <= 7'd32; cnt <= 7'd1; end
          else if (txn == 7'd0) begin cnt <= '0; state <= S_RX_N1; end
        end
        // crypto job: request, stream jlen bytes of jmsg, collect the digest
        J_REQ: if (hrsp.gnt) begin jidx <= '0; state <= J_FEED; end
        J_FEED: if (hrsp.in_ready) begin
          jmsg <= {jmsg[247:0], 8'h00};
          jidx <= jidx + 6'd1;
          if (jidx == jlen - 6'd1) state <= J_WAIT;
        end
        J_WAIT: if (hrsp.done) begin jres <= hrsp.digest; state <= jret; end
        default: state <= S_RX_N1;
      endcase
    end
  end
endmodule
