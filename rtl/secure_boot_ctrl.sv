// secure_boot_ctrl: bootstrap sequencer implementing the frame-by-frame chain
// of trust, I_0 = true, I_{i+1} = I_i & V_i(frame i).
//
// After reset (power-on) and on every `boot_req` the processor is held
// (`core_fetch_enable` low) and the frames in flash are checked in order,
// frame i at offset i*SECTOR_BYTES. V_i is true when the CA unit accepts the
// frame's digest and the header's frame number equals i. On a failed check the
// Resilience Engine is started for that slot; after a successful repair the
// frame is checked again. A frame that still fails, or cannot be repaired,
// stops the boot: `boot_ok` stays low and the processor is never released.
// When all NUM_FRAMES frames hold, `core_fetch_enable` rises and stays high
// until the next boot request.
// Outputs for monitoring: `boot_done` pulses at the end of a boot, and the
// counters `frames_checked` and `frames_recovered` cover the last boot.
// Timing: one CA frame check per frame, plus a recovery and a second check
// for each corrupted frame.
// The ordering rule, the repair on a mismatch and the release of the core only
// after all checks follow the design; the re-check after repair and the halt
// on a second failure are this design's choice.
// Lint note: SYNCASYNCNET on rst_n comes from the disable iff of the
// assertion; the registers use rst_n only as an asynchronous reset.
module secure_boot_ctrl
  import sracare_pkg::*;
#(
  parameter int unsigned NUM_FRAMES = 6,
  localparam int unsigned SW = (NUM_FRAMES > 1) ? $clog2(NUM_FRAMES) : 1
)(
  input  logic          clk,
  input  logic          rst_n,
  input  logic          boot_req,
  output logic          core_fetch_enable,
  output logic          boot_busy,
  output logic          boot_done,
  output logic          boot_ok,
  output logic [7:0]    frames_checked,
  output logic [7:0]    frames_recovered,
  // CA unit
  output logic          ca_cmd_valid,
  output ca_op_e        ca_cmd_op,
  output faddr_t        ca_cmd_addr,
  input  logic          ca_cmd_ready,
  input  logic          ca_done,
  input  logic          ca_pass,
  input  logic [31:0]   ca_frame_num,
  // Resilience Engine
  output logic          re_start,
  output logic [SW-1:0] re_slot,
  input  logic          re_done,
  input  logic          re_ok
);
  typedef enum logic [2:0] {S_START, S_VERIFY, S_VWAIT, S_RECOVER, S_RWAIT, S_RUN, S_HALT} state_e;
  state_e state;
  logic [SW-1:0] slot;
  logic retried;
  logic v_i;

  assign v_i          = ca_pass && (ca_frame_num == 32'(slot));
  assign ca_cmd_valid = (state == S_VERIFY);
  assign ca_cmd_op    = CA_VERIFY;
  assign ca_cmd_addr  = faddr_t'(int'(slot) * SECTOR_BYTES);
  assign re_start     = (state == S_RECOVER);
  assign re_slot      = slot;
  assign boot_busy    = (state != S_RUN) && (state != S_HALT);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state             <= S_START;
      slot              <= '0;
      retried           <= 1'b0;
      core_fetch_enable <= 1'b0;
      boot_done         <= 1'b0;
      boot_ok           <= 1'b0;
      frames_checked    <= '0;
      frames_recovered  <= '0;
    end else begin
      boot_done <= 1'b0;
      unique case (state)
        S_START: begin
          core_fetch_enable <= 1'b0;
          boot_ok           <= 1'b0;
          slot              <= '0;
          retried           <= 1'b0;
          frames_checked    <= '0;
          frames_recovered  <= '0;
          state             <= S_VERIFY;
        end
        S_VERIFY: if (ca_cmd_ready) state <= S_VWAIT;
        S_VWAIT: if (ca_done) begin
          frames_checked <= frames_checked + 8'd1;
          if (v_i) begin
            retried <= 1'b0;
            if (int'(slot) == NUM_FRAMES - 1) begin
              core_fetch_enable <= 1'b1;
              boot_ok           <= 1'b1;
              boot_done         <= 1'b1;
              state             <= S_RUN;
            end else begin
              slot  <= slot + 1'b1;
              state <= S_VERIFY;
            end
          end else if (!retried) begin
            state <= S_RECOVER;
          end else begin
            boot_done <= 1'b1;
            state     <= S_HALT;
          end
        end
        S_RECOVER: state <= S_RWAIT;
        S_RWAIT: if (re_done) begin
          if (re_ok) begin
            retried          <= 1'b1;
            frames_recovered <= frames_recovered + 8'd1;
            state            <= S_VERIFY;
          end else begin
            boot_done <= 1'b1;
            state     <= S_HALT;
          end
        end
        S_RUN, S_HALT: if (boot_req) begin
          core_fetch_enable <= 1'b0;
          state             <= S_START;
        end
        default: state <= S_START;
      endcase
    end
  end

  // The core never runs while frames are being checked
  a_hold_core: assert property (@(posedge clk) disable iff (!rst_n) boot_busy |-> !core_fetch_enable);
endmodule
