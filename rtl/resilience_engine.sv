// resilience_engine: onboard recovery of a frame that failed its check.
//
// On `start` with the failing frame's slot index the engine runs the three
// steps of the recovery flow:
//   Locate   read the golden record for that slot from the secure ROM and
//            check that its frame number matches the slot; its offset field
//            gives the flash location to repair. A mismatch ends with ok=0.
//   Reflash  erase the flash sector at that offset, then program the whole
//            golden record (header and payload, REC_BYTES) from ROM to flash,
//            streaming one ROM byte per flash byte.
//   Lock     set the slot's bit in `lock_mask` and its region base in
//            `lock_base`, the request to the processor's Physical Memory
//            Protection to deny further writes to that region. Locks stay
//            until reset.
// `done` pulses at the end with `ok`; `recovered` counts repaired frames.
// Timing: dominated by the flash: one sector erase plus
// ceil(REC_BYTES/PAGE_BYTES) page programs and REC_BYTES SPI byte transfers.
// The three steps, the golden copy in secure ROM and the PMP lock follow the
// design, which ran them as boot software; doing them in a hardware FSM,
// and copying whole records, is this design's choice.
module resilience_engine
  import sracare_pkg::*;
#(
  parameter int unsigned NUM_FRAMES = 6,
  localparam int unsigned REC_BASE  = 64,
  localparam int unsigned ROM_BYTES = REC_BASE + NUM_FRAMES * REC_BYTES,
  localparam int unsigned AW        = $clog2(ROM_BYTES),
  localparam int unsigned SW        = (NUM_FRAMES > 1) ? $clog2(NUM_FRAMES) : 1
)(
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  input  logic [SW-1:0]   slot,
  output logic            busy,
  output logic            done,
  output logic            ok,
  output logic [7:0]      recovered,
  output logic [NUM_FRAMES-1:0] lock_mask,
  output faddr_t          lock_base [NUM_FRAMES],
  // secure ROM read port
  output logic [AW-1:0]   rom_addr,
  input  logic [7:0]      rom_data,
  // flash controller
  output logic            fl_cmd_valid,
  output flash_op_e       fl_cmd_op,
  output faddr_t          fl_cmd_addr,
  output faddr_t          fl_cmd_len,
  input  logic            fl_cmd_ready,
  input  logic            fl_done,
  output logic            fl_wr_valid,
  output logic [7:0]      fl_wr_data,
  input  logic            fl_wr_ready
);
  typedef enum logic [3:0] {
    S_IDLE, S_HDR, S_CHECK, S_ERASE, S_ERASE_W, S_PROG, S_PROG_W, S_LOCK, S_DONE
  } state_e;
  state_e state;

  logic [SW-1:0] slot_q;
  logic [AW-1:0] rd_ptr, base;
  logic [15:0]   fetched;
  logic          pending, have;
  logic [7:0]    wdata;
  logic [63:0]   hdr;       // frame number and offset of the golden record
  logic          hit;

  assign busy        = (state != S_IDLE);
  assign rom_addr    = rd_ptr;
  assign fl_cmd_valid = (state == S_ERASE) || (state == S_PROG);
  assign fl_cmd_op   = (state == S_ERASE) ? FOP_ERASE : FOP_PROGRAM;
  assign fl_cmd_addr = hdr[ADDR_W-1:0];
  assign fl_cmd_len  = faddr_t'(REC_BYTES);
  assign fl_wr_valid = (state == S_PROG_W) && have;
  assign fl_wr_data  = wdata;
  assign hit         = (hdr[63:32] == 32'(slot_q));

  // ROM prefetch: one byte in flight, one byte held
  logic fetch_hdr, fetch_prog;
  assign fetch_hdr  = (state == S_HDR) && !pending && (fetched < 16'd8);
  assign fetch_prog = (state == S_PROG_W) && !pending && !have && (fetched < 16'(REC_BYTES));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      slot_q    <= '0;
      rd_ptr    <= '0;
      base      <= '0;
      fetched   <= '0;
      pending   <= 1'b0;
      have      <= 1'b0;
      wdata     <= '0;
      hdr       <= '0;
      done      <= 1'b0;
      ok        <= 1'b0;
      recovered <= '0;
      lock_mask <= '0;
      for (int i = 0; i < NUM_FRAMES; i++) lock_base[i] <= '0;
    end else begin
      done <= 1'b0;
      if (fetch_hdr || fetch_prog) pending <= 1'b1;
      if (pending) begin
        pending <= 1'b0;
        rd_ptr  <= rd_ptr + 1'b1;
        fetched <= fetched + 16'd1;
      end
      unique case (state)
        S_IDLE: if (start) begin
          slot_q  <= slot;
          base    <= AW'(REC_BASE + int'(slot) * REC_BYTES);
          rd_ptr  <= AW'(REC_BASE + int'(slot) * REC_BYTES + 32);
          fetched <= '0;
          pending <= 1'b0;
          have    <= 1'b0;
          state   <= S_HDR;
        end
        S_HDR: begin                       // Locate
          if (pending) hdr <= {hdr[55:0], rom_data};
          if (fetched == 16'd8 && !pending) state <= S_CHECK;
        end
        S_CHECK: begin
          if (hit) state <= S_ERASE;
          else begin ok <= 1'b0; state <= S_DONE; end
        end
        S_ERASE:   if (fl_cmd_ready) state <= S_ERASE_W;   // Reflash
        S_ERASE_W: if (fl_done) begin
          rd_ptr  <= base;
          fetched <= '0;
          state   <= S_PROG;
        end
        S_PROG:    if (fl_cmd_ready) state <= S_PROG_W;
        S_PROG_W: begin
          if (pending) begin wdata <= rom_data; have <= 1'b1; end
          if (fl_wr_valid && fl_wr_ready) have <= 1'b0;
          if (fl_done) state <= S_LOCK;
        end
        S_LOCK: begin                      // Lock
          lock_mask[slot_q] <= 1'b1;
          lock_base[slot_q] <= hdr[ADDR_W-1:0];
          recovered <= recovered + 8'd1;
          ok    <= 1'b1;
          state <= S_DONE;
        end
        S_DONE: begin done <= 1'b1; state <= S_IDLE; end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
