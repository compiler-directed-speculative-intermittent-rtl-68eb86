// tb_recovery_ctrl: self-checking test of the power-on recovery sequence.
//
// For each check-bit pattern (fresh NVM, both set, isDrain only, isComplete
// only) the NVM model is preloaded with the check bits, a recovery PC and an
// adaptation record, and the controller is powered on. Checks: a phase-2 redo
// is requested exactly when isDrain=1 and isComplete=0, and sys_ready waits
// for it; the recovery PC and the record read from NVM are presented; the
// updated record (here produced by a simple stand-in function) is written
// back; boot_load pulses once; sys_ready stays high.
module tb_recovery_ctrl;
  import cospec_pkg::*;

  localparam int NREGS = 16;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic     rel_redo, rel_done = 1'b0, boot_load, sys_ready, ev_redo;
  addr_t    boot_pc, recovery_pc;
  data_t    rec_status, rec_pc, new_rec_status, new_rec_pc;
  mem_req_t nvm_req;
  mem_rsp_t nvm_rsp;

  recovery_ctrl #(.NREGS(NREGS)) dut (.*);
  nvm_model u_nvm (.clk, .pwr_ok (rst_n), .req (nvm_req), .rsp (nvm_rsp));

  // stand-in for the policy block
  assign new_rec_status = rec_status ^ 32'h0000_FFFF;
  assign new_rec_pc     = boot_pc + 32'd4;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0t: %s", $time, what); end
  endtask

  // release-engine stand-in: answers a redo after 25 cycles
  int n_redo = 0, n_load = 0;
  bit redo_busy = 0;
  always @(posedge clk) begin
    rel_done <= 1'b0;
    if (boot_load) n_load++;
    if (rel_redo) begin
      n_redo++;
      redo_busy = 1;
      repeat (25) @(posedge clk);
      rel_done <= 1'b1;
      redo_busy = 0;
    end
  end

  task automatic power_on(input data_t flags, input addr_t pc, input data_t st, input data_t spc);
    int redo0, load0;
    rst_n = 1'b0;
    u_nvm.mem[FLAG_ADDR >> 2]                 = flags;
    u_nvm.mem[(RF_CKPT_BASE >> 2) + NREGS]    = pc;
    u_nvm.mem[ADAPT_REC_ADDR >> 2]            = st;
    u_nvm.mem[ADAPT_PC_ADDR >> 2]             = spc;
    redo0 = n_redo; load0 = n_load;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    while (!sys_ready) begin
      @(negedge clk);
      if (sys_ready) check(!redo_busy, "ready only after the redo finished");
    end
    check((n_redo - redo0) == ((flags[0] && !flags[1]) ? 1 : 0),
          $sformatf("redo decision for check bits %0b", flags[1:0]));
    check(n_load - load0 == 1, "one policy load");
    check(recovery_pc == pc, "recovery PC read from checkpoint storage");
    check(rec_status == st && rec_pc == spc, "record presented to the policy");
    check(u_nvm.peek(ADAPT_REC_ADDR) == (st ^ 32'h0000_FFFF), "record status written back");
    check(u_nvm.peek(ADAPT_PC_ADDR) == pc + 32'd4, "record PC written back");
    repeat (20) @(negedge clk);
    check(sys_ready, "sys_ready stays high");
  endtask

  initial begin
    power_on(32'd0, 32'h0000_0000, 32'h0, 32'h0);
    power_on(32'd3, 32'h0005_0000, 32'h8000_0001, 32'h0004_0000);
    power_on(32'd1, 32'h0006_0000, 32'h8000_0002, 32'h0006_0000);
    power_on(32'd2, 32'h0007_0000, 32'hC000_0203, 32'h0007_0000);
    power_on(32'd1, 32'h0008_0003, 32'h8000_0001, 32'h0001_0000);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
