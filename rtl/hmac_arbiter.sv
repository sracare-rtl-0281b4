// hmac_arbiter: lets two requesters share the single HMAC-SHA256 core.
//
// The design reuses one crypto-core for frame digests, code authentication
// and the communication protocol, so the core needs an owner at any time.
// A requester raises `req` in its hmac_req_t bundle and keeps it high for the
// whole use of the core; it may pulse `start` and stream bytes only while its
// `gnt` is high. When the core is free, port 0 wins over port 1. The grant is
// held until the owner drops `req`, so a transaction is never interrupted.
// Timing: a grant follows a request by one cycle when the core is free; all
// other signals pass through combinationally to the owner.
// Fixed priority and the request/grant bundle are this design's choice.
// Lint notes: SYNCASYNCNET on rst_n comes from the disable iff of the
// assertions. The top bit of the packed request select (the req flag) is not
// forwarded to the crypto-core, which has no such input.
module hmac_arbiter
  import sracare_pkg::*;
(
  input  logic      clk,
  input  logic      rst_n,
  input  hmac_req_t req0,
  output hmac_rsp_t rsp0,
  input  hmac_req_t req1,
  output hmac_rsp_t rsp1,
  // to the core
  output logic       start,
  output logic       hash_only,
  output digest_t    key,
  output logic       in_valid,
  output logic [7:0] in_data,
  output logic       in_last,
  input  logic       in_ready,
  input  logic       done,
  input  digest_t    digest
);
  typedef enum logic [1:0] {OWN_NONE, OWN_0, OWN_1} owner_e;
  owner_e owner;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) owner <= OWN_NONE;
    else unique case (owner)
      OWN_NONE: if (req0.req) owner <= OWN_0; else if (req1.req) owner <= OWN_1;
      OWN_0:    if (!req0.req) owner <= OWN_NONE;
      OWN_1:    if (!req1.req) owner <= OWN_NONE;
      default:  owner <= OWN_NONE;
    endcase
  end

  hmac_req_t sel;
  always_comb begin
    unique case (owner)
      OWN_0:   sel = req0;
      OWN_1:   sel = req1;
      default: sel = '0;
    endcase
    start     = sel.start;
    hash_only = sel.hash_only;
    key       = sel.key;
    in_valid  = sel.in_valid;
    in_data   = sel.in_data;
    in_last   = sel.in_last;
    rsp0 = '{gnt: owner == OWN_0, in_ready: (owner == OWN_0) && in_ready,
             done: (owner == OWN_0) && done, digest: digest};
    rsp1 = '{gnt: owner == OWN_1, in_ready: (owner == OWN_1) && in_ready,
             done: (owner == OWN_1) && done, digest: digest};
  end

  // A requester must not drive the core without the grant
  property p_no_start_without_grant0;
    @(posedge clk) disable iff (!rst_n) req0.start |-> owner == OWN_0;
  endproperty
  property p_no_start_without_grant1;
    @(posedge clk) disable iff (!rst_n) req1.start |-> owner == OWN_1;
  endproperty
  a_gnt0: assert property (p_no_start_without_grant0);
  a_gnt1: assert property (p_no_start_without_grant1);
endmodule
