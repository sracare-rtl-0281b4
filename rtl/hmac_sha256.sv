// hmac_sha256: the HMAC-SHA256 crypto-core, shared by code authentication,
// remote attestation and the communication protocol.
//
// HMAC(K, m) = H((K' ^ opad) || H((K' ^ ipad) || m)) with ipad = 0x36..36 and
// opad = 0x5C..5C. The key is 256 bits, shorter than the 64-byte block, so
// K' is K padded with zeros (no key hashing is needed). With `hash_only` set
// the same engine returns the plain SHA-256 of the message.
//
// Interface: pulse `start` (with `hash_only`, `key`) while `busy` is low, then
// stream the message one byte per `in_valid && in_ready` cycle, `in_last` on
// the final byte (messages are at least one byte). `done` pulses once with
// the result on `digest`, which holds until the next start.
// Timing: bytes are gathered into a 64-byte buffer, one per cycle; each full
// block costs 66 cycles of sha256_core plus a cycle of hand-over. An HMAC of
// an n-byte message takes about n + 67*(ceil((n+9)/64) + 3) cycles.
// The formula is the one the design specifies; the byte-serial interface
// and the buffering are this design's choice.
// Lint note: the compression core's ready output is unused; this FSM
// starts a block only after the previous done.
module hmac_sha256 (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic         hash_only,
  input  logic [255:0] key,
  input  logic         in_valid,
  input  logic [7:0]   in_data,
  input  logic         in_last,
  output logic         in_ready,
  output logic         busy,
  output logic         done,
  output logic [255:0] digest
);
  typedef enum logic [3:0] {
    S_IDLE, S_KEYI, S_MSG, S_PAD, S_PAD2, S_INNER, S_OUT2, S_WAIT, S_DONE
  } state_e;
  state_e state, ret;

  logic [7:0]   buffer [64];
  logic [6:0]   cnt;
  logic         lastseen, mode_hash, first_q;
  logic [255:0] key_q, inner;
  logic [63:0]  nbits;

  logic         c_start, c_first, c_ready, c_done;
  logic [511:0] c_block;
  logic [255:0] c_digest;

  sha256_core u_core (
    .clk, .rst_n, .start(c_start), .first(c_first), .block(c_block),
    .ready(c_ready), .done(c_done), .digest(c_digest)
  );

  logic [511:0] buf_block, pad_block, pad2_block;
  always_comb begin
    for (int i = 0; i < 64; i++) begin
      buf_block[511-8*i -: 8] = buffer[i];
      if (i < int'(cnt))       pad_block[511-8*i -: 8] = buffer[i];
      else if (i == int'(cnt)) pad_block[511-8*i -: 8] = 8'h80;
      else                     pad_block[511-8*i -: 8] = 8'h00;
    end
    if (cnt <= 7'd55) pad_block[63:0] = nbits;
    pad2_block = {448'd0, nbits};
  end

  assign in_ready = (state == S_MSG) && (cnt < 7'd64) && !lastseen;
  assign busy     = (state != S_IDLE);
  assign digest   = c_digest;

  always_comb begin
    c_start = 1'b0;
    c_first = 1'b0;
    c_block = buf_block;
    unique case (state)
      S_KEYI:  begin c_start = 1'b1; c_first = 1'b1; c_block = {key_q ^ {32{8'h36}}, {32{8'h36}}}; end
      S_MSG:   begin c_start = (cnt == 7'd64); c_first = first_q; c_block = buf_block; end
      S_PAD:   begin c_start = 1'b1; c_first = first_q; c_block = pad_block; end
      S_PAD2:  begin c_start = 1'b1; c_block = pad2_block; end
      S_INNER: begin c_start = !mode_hash; c_first = 1'b1; c_block = {key_q ^ {32{8'h5c}}, {32{8'h5c}}}; end
      S_OUT2:  begin c_start = 1'b1; c_block = {inner, 8'h80, 184'd0, 64'd768}; end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      ret       <= S_IDLE;
      cnt       <= '0;
      lastseen  <= 1'b0;
      mode_hash <= 1'b0;
      first_q   <= 1'b0;
      key_q     <= '0;
      inner     <= '0;
      nbits     <= '0;
      done      <= 1'b0;
      for (int i = 0; i < 64; i++) buffer[i] <= '0;
    end else begin
      done <= 1'b0;
      if (c_start) first_q <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          key_q     <= key;
          mode_hash <= hash_only;
          first_q   <= hash_only;
          cnt       <= '0;
          lastseen  <= 1'b0;
          nbits     <= hash_only ? 64'd0 : 64'd512;
          state     <= hash_only ? S_MSG : S_KEYI;
        end
        S_KEYI: begin ret <= S_MSG; state <= S_WAIT; end
        S_MSG: begin
          if (in_valid && in_ready) begin
            buffer[cnt[5:0]] <= in_data;
            cnt      <= cnt + 7'd1;
            nbits    <= nbits + 64'd8;
            lastseen <= in_last;
          end else if (cnt == 7'd64) begin
            cnt   <= '0;
            ret   <= S_MSG;
            state <= S_WAIT;
          end else if (lastseen) begin
            state <= S_PAD;
          end
        end
        S_PAD: begin
          ret   <= (cnt <= 7'd55) ? S_INNER : S_PAD2;
          state <= S_WAIT;
        end
        S_PAD2: begin ret <= S_INNER; state <= S_WAIT; end
        S_INNER: begin
          inner <= c_digest;
          if (mode_hash) begin
            done  <= 1'b1;
            state <= S_IDLE;
          end else begin
            ret   <= S_OUT2;
            state <= S_WAIT;
          end
        end
        S_OUT2: begin ret <= S_DONE; state <= S_WAIT; end
        S_WAIT: if (c_done) state <= ret;
        S_DONE: begin done <= 1'b1; state <= S_IDLE; end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
