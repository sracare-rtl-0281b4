// tb_secure_boot_ctrl: the boot sequencer against behavioural CA and RE
// responders. Each scenario sets, per slot, whether the frame is good, carries
// a wrong frame number, can be repaired, and whether the repair sticks. The
// expected order of checks and repairs, the counters and the release of the
// core are worked out from the scenario. Checks also that the core is never
// enabled while a boot is running.
// The chain of trust (all earlier frames good before the next) and the
// repair-then-halt rule follow the original; the single retry is this
// design's own choice and is what the expected sequences assume.
module tb_secure_boot_ctrl;
  import sracare_pkg::*;
  localparam int N = 6;
  logic clk = 0, rst_n = 0;
  logic boot_req = 0, core_fetch_enable, boot_busy, boot_done, boot_ok;
  logic [7:0] frames_checked, frames_recovered;
  logic ca_cmd_valid, ca_cmd_ready, ca_done = 0, ca_pass = 0;
  ca_op_e ca_cmd_op;
  faddr_t ca_cmd_addr;
  logic [31:0] ca_frame_num = 0;
  logic re_start, re_done = 0, re_ok = 0;
  logic [2:0] re_slot;
  int checks = 0, failures = 0;

  secure_boot_ctrl #(.NUM_FRAMES(N)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // scenario state
  bit good[N], renum[N], fixable[N], sticks[N];
  int log_checks[$], log_repairs[$];
  logic ca_busy = 0;
  assign ca_cmd_ready = !ca_busy;

  always @(posedge clk) begin
    if (rst_n && ca_cmd_valid && !ca_busy) begin
      automatic int s = int'(ca_cmd_addr) / SECTOR_BYTES;
      ca_busy <= 1;
      log_checks.push_back(s);
      fork begin
        repeat (5) @(posedge clk);
        ca_pass <= good[s] || renum[s];
        ca_frame_num <= renum[s] ? 32'(s + 1) : 32'(s);
        ca_done <= 1;
        @(posedge clk); ca_done <= 0; ca_busy <= 0;
      end join_none
    end
    if (rst_n && re_start) begin
      automatic int s = int'(re_slot);
      log_repairs.push_back(s);
      fork begin
        repeat (7) @(posedge clk);
        re_ok <= fixable[s];
        if (fixable[s] && sticks[s]) begin good[s] = 1; renum[s] = 0; end
        re_done <= 1;
        @(posedge clk); re_done <= 0;
      end join_none
    end
  end

  always @(posedge clk) if (rst_n && boot_busy && core_fetch_enable) begin
    failures++; $display("core enabled during boot");
  end

  task automatic expect_boot(input string name, input bit ok, input int nchk, input int nrec,
                             input int chk[$], input int rep[$]);
    while (!boot_done) @(negedge clk);
    @(negedge clk);
    checks++; if (boot_ok !== ok || core_fetch_enable !== ok) begin failures++; $display("%s: ok %b", name, boot_ok); end
    checks++; if (frames_checked != nchk || frames_recovered != nrec) begin
      failures++; $display("%s: checked %0d recovered %0d", name, frames_checked, frames_recovered); end
    checks++; if (log_checks != chk) begin failures++; $display("%s: check order %p", name, log_checks); end
    checks++; if (log_repairs != rep) begin failures++; $display("%s: repairs %p", name, log_repairs); end
    log_checks.delete(); log_repairs.delete();
  endtask

  task automatic setup(input int bad, input int rn, input bit fx, input bit st);
    foreach (good[i]) begin good[i] = (i != bad); renum[i] = (i == rn); fixable[i] = fx; sticks[i] = st; end
    if (rn >= 0) good[rn] = 0;
  endtask

  task automatic reboot;
    @(negedge clk); boot_req = 1; @(negedge clk); boot_req = 0;
  endtask

  initial begin
    setup(-1, -1, 1, 1);
    repeat (3) @(negedge clk);
    rst_n = 1;
    // 1: clean image, power-on boot
    expect_boot("clean", 1, 6, 0, '{0,1,2,3,4,5}, '{});
    // 2: frame 3 corrupted, repaired
    setup(3, -1, 1, 1); reboot();
    expect_boot("repair", 1, 7, 1, '{0,1,2,3,3,4,5}, '{3});
    // 3: frame 1 carries the wrong number (rearranged image), repaired
    setup(-1, 1, 1, 1); reboot();
    expect_boot("renumber", 1, 7, 1, '{0,1,1,2,3,4,5}, '{1});
    // 4: frame 2 cannot be repaired: halt, core held
    setup(2, -1, 0, 0); reboot();
    expect_boot("unfixable", 0, 3, 0, '{0,1,2}, '{2});
    // 5: repair does not stick: halt after the second check
    setup(4, -1, 1, 0); reboot();
    expect_boot("relapse", 0, 6, 1, '{0,1,2,3,4,4}, '{4});
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
