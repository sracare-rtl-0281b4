// secure_rom: the prover's secure storage - chip information, the shared
// HMAC key K and the golden recovery image used by the Resilience Engine.
//
// Byte map:
//   0x000..0x00F  chip information (serial number, firmware revision, UUID)
//   0x010..0x02F  shared key K (256 bits), right after the chip information
//   0x040..       NUM_FRAMES golden frame records of REC_BYTES each
//                 (record i at 0x040 + i*REC_BYTES, same layout as in flash)
// Chip information and K are also presented in parallel on `chip_info` and
// `key`, as the protocol engine and the crypto-core use them whole. The
// recovery area is read one byte per cycle on a synchronous port
// (`rd_addr` -> `rd_data` one cycle later).
// The contents are fixed for the life of the device. The write port, enabled
// only while `prov_mode` is high, stands for the factory initialisation of
// the ROM and is tied low in a fielded device; no other path writes it, and
// it is not reachable from the processor.
// Which items the secure ROM holds follows the design; the byte map and the
// provisioning port are this design's choice.
module secure_rom
  import sracare_pkg::*;
#(
  parameter int unsigned NUM_FRAMES = 6,
  parameter int unsigned CI_BYTES   = 16,
  localparam int unsigned REC_BASE  = 64,
  localparam int unsigned ROM_BYTES = REC_BASE + NUM_FRAMES * REC_BYTES,
  localparam int unsigned AW        = $clog2(ROM_BYTES)
)(
  input  logic                  clk,
  input  logic                  prov_mode,
  input  logic                  prov_we,
  input  logic [AW-1:0]         prov_addr,
  input  logic [7:0]            prov_data,
  input  logic [AW-1:0]         rd_addr,
  output logic [7:0]            rd_data,
  output logic [CI_BYTES*8-1:0] chip_info,
  output digest_t               key
);
  logic [7:0] mem [ROM_BYTES];

  always_ff @(posedge clk) begin
    if (prov_mode && prov_we && int'(prov_addr) < ROM_BYTES) mem[prov_addr] <= prov_data;
    rd_data <= mem[rd_addr];
  end

  always_comb begin
    for (int i = 0; i < CI_BYTES; i++) chip_info[CI_BYTES*8-1-8*i -: 8] = mem[i];
    for (int i = 0; i < 32; i++)       key[255-8*i -: 8] = mem[CI_BYTES + i];
  end
endmodule
