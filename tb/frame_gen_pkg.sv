// frame_gen_pkg: testbench helpers that build the golden application image.
// Frame i's payload byte j is ((i*1024 + j) * 2654435761) >> 13, truncated to
// 8 bits; a frame record is digest || frame number || offset || payload with
// digest = HMAC-SHA256(K, number || offset || payload), computed by the
// behavioural reference in sha_ref_pkg. Frame i lives at flash offset i*4096.
// The payload formula and the key and chip information values are arbitrary
// test data chosen here; the record layout is this design's own (the
// original fixes only the 1 KB frame and that each frame carries a digest).
package frame_gen_pkg;
  import sha_ref_pkg::*;
  import sracare_pkg::*;

  localparam logic [255:0] TB_KEY =
    256'h6b3a1f09_c4d2e8a7_55aa0ff0_12345678_9abcdef0_0fedcba9_87654321_deadbeef;
  localparam logic [127:0] TB_CHIP_INFO =
    128'h0000_1a2b_0102_0003_9f86d081_884c7d65; // serial, board/firmware rev, UUID

  function automatic byte unsigned app_byte(int i, int j);
    int unsigned v = (i * 1024 + j) * 32'd2654435761;
    return byte'(v >> 13);
  endfunction

  function automatic bq_t frame_record(int i, logic [255:0] key);
    bq_t body, rec;
    logic [31:0] num = 32'(i), off = 32'(i * SECTOR_BYTES);
    for (int b = 3; b >= 0; b--) body.push_back(num[8*b +: 8]);
    for (int b = 3; b >= 0; b--) body.push_back(off[8*b +: 8]);
    for (int j = 0; j < FRAME_BYTES; j++) body.push_back(app_byte(i, j));
    rec = to_bytes(hmac(key, body));
    foreach (body[k]) rec.push_back(body[k]);
    return rec;
  endfunction
endpackage
