// sha256_core: SHA-256 compression function (FIPS 180-4), one 512-bit block
// per command, one round per clock.
//
// A pulse on `start` with `block` loads the working variables from the
// chaining value (the standard initial value H0 when `first` is high, the
// previous result otherwise) and the message schedule from `block`. Rounds
// 0..63 then run one per cycle, keeping the schedule in a 16-word shift
// register. The cycle after round 63 adds the working variables into the
// chaining value, pulses `done` and shows the result on `digest`.
// Timing: start accepted when `ready`; `done` is seen 66 clock edges after the edge that takes `start`.
// The hash is the standard one the HMAC-SHA256 crypto-core is built on; the
// round-per-cycle structure is this design's choice.
module sha256_core (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic         first,
  input  logic [511:0] block,
  output logic         ready,
  output logic         done,
  output logic [255:0] digest
);
  localparam logic [31:0] K [64] = '{
    32'h428a2f98, 32'h71374491, 32'hb5c0fbcf, 32'he9b5dba5, 32'h3956c25b, 32'h59f111f1, 32'h923f82a4, 32'hab1c5ed5,
    32'hd807aa98, 32'h12835b01, 32'h243185be, 32'h550c7dc3, 32'h72be5d74, 32'h80deb1fe, 32'h9bdc06a7, 32'hc19bf174,
    32'he49b69c1, 32'hefbe4786, 32'h0fc19dc6, 32'h240ca1cc, 32'h2de92c6f, 32'h4a7484aa, 32'h5cb0a9dc, 32'h76f988da,
    32'h983e5152, 32'ha831c66d, 32'hb00327c8, 32'hbf597fc7, 32'hc6e00bf3, 32'hd5a79147, 32'h06ca6351, 32'h14292967,
    32'h27b70a85, 32'h2e1b2138, 32'h4d2c6dfc, 32'h53380d13, 32'h650a7354, 32'h766a0abb, 32'h81c2c92e, 32'h92722c85,
    32'ha2bfe8a1, 32'ha81a664b, 32'hc24b8b70, 32'hc76c51a3, 32'hd192e819, 32'hd6990624, 32'hf40e3585, 32'h106aa070,
    32'h19a4c116, 32'h1e376c08, 32'h2748774c, 32'h34b0bcb5, 32'h391c0cb3, 32'h4ed8aa4a, 32'h5b9cca4f, 32'h682e6ff3,
    32'h748f82ee, 32'h78a5636f, 32'h84c87814, 32'h8cc70208, 32'h90befffa, 32'ha4506ceb, 32'hbef9a3f7, 32'hc67178f2};

  localparam logic [255:0] H0 = {32'h6a09e667, 32'hbb67ae85, 32'h3c6ef372, 32'ha54ff53a,
                                 32'h510e527f, 32'h9b05688c, 32'h1f83d9ab, 32'h5be0cd19};

  typedef enum logic [1:0] {S_IDLE, S_ROUND, S_FINAL} state_e;
  state_e state;

  logic [31:0] w [16];
  logic [31:0] a, b, c, d, e, f, g, h;
  logic [5:0]  t;
  logic [255:0] hv;

  function automatic logic [31:0] rotr(input logic [31:0] x, input int n);
    return (x >> n) | (x << (32 - n));
  endfunction

  logic [31:0] s0, s1, ch, maj, t1, t2, wnew, ss0, ss1;
  always_comb begin
    s1   = rotr(e, 6) ^ rotr(e, 11) ^ rotr(e, 25);
    ch   = (e & f) ^ (~e & g);
    t1   = h + s1 + ch + K[t] + w[0];
    s0   = rotr(a, 2) ^ rotr(a, 13) ^ rotr(a, 22);
    maj  = (a & b) ^ (a & c) ^ (b & c);
    t2   = s0 + maj;
    ss0  = rotr(w[1], 7) ^ rotr(w[1], 18) ^ (w[1] >> 3);
    ss1  = rotr(w[14], 17) ^ rotr(w[14], 19) ^ (w[14] >> 10);
    wnew = ss1 + w[9] + ss0 + w[0];
  end

  assign ready  = (state == S_IDLE);
  assign digest = hv;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      done  <= 1'b0;
      t     <= '0;
      hv    <= H0;
      {a, b, c, d, e, f, g, h} <= '0;
      for (int i = 0; i < 16; i++) w[i] <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          logic [255:0] cv;
          cv = first ? H0 : hv;
          hv <= cv;
          {a, b, c, d, e, f, g, h} <= cv;
          for (int i = 0; i < 16; i++) w[i] <= block[511-32*i -: 32];
          t     <= '0;
          state <= S_ROUND;
        end
        S_ROUND: begin
          h <= g; g <= f; f <= e; e <= d + t1;
          d <= c; c <= b; b <= a; a <= t1 + t2;
          for (int i = 0; i < 15; i++) w[i] <= w[i+1];
          w[15] <= wnew;
          t <= t + 6'd1;
          if (t == 6'd63) state <= S_FINAL;
        end
        S_FINAL: begin
          hv <= {hv[255:224] + a, hv[223:192] + b, hv[191:160] + c, hv[159:128] + d,
                 hv[127:96]  + e, hv[95:64]    + f, hv[63:32]    + g, hv[31:0]     + h};
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
