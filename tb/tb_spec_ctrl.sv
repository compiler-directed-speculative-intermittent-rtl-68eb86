// tb_spec_ctrl: self-checking test of the region-boundary sequencer.
//
// The release engine is replaced by a stand-in that stays busy for a set
// number of cycles after each start and then pulses done. A monitor logs
// every release start, invalidate and store-buffer write. Checks:
//   * store pass-through to the current half;
//   * ILP on: a boundary releases the ended half, the core continues at once
//     and the halves swap; the next boundary waits while the release is
//     still busy, then empties the older half;
//   * ILP off: the core waits for the release and the half is then emptied;
//   * watchdog: on expiry the core is held, NREGS registers and the PC are
//     written to the idle half at the checkpoint addresses, both halves are
//     released region-half first, both are emptied and the core resumes.
module tb_spec_ctrl;
  import cospec_pkg::*;

  localparam int NREGS = 16;
  localparam int SBE   = 40;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic       sys_ready = 1'b0, ilp_en = 1'b1, wdt_en = 1'b0;
  logic       rb_req = 1'b0, rb_done, core_hold, core_idle = 1'b1;
  data_t      core_regs [NREGS];
  addr_t      core_pc = 32'h0000_4440;
  logic       core_st_valid = 1'b0;
  addr_t      core_st_addr = '0;
  data_t      core_st_data = '0;
  logic       cur_half, sb_st_valid, sb_st_half;
  addr_t      sb_st_addr;
  data_t      sb_st_data;
  logic [1:0] sb_inv;
  logic       rel_start, rel_first, rel_busy = 1'b0, rel_done = 1'b0;
  logic [1:0] rel_mask;
  logic       wdt_expired = 1'b0, wdt_restart, wdt_pause;
  logic       ev_overlap, ev_ilp_wait, ev_noilp_wait, ev_timer_ckpt;

  spec_ctrl #(.NREGS(NREGS), .SB_ENTRIES(SBE)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0t: %s", $time, what); end
  endtask

  // release-engine stand-in
  int rel_len = 30;
  int rel_cnt = 0;
  always @(posedge clk) begin
    rel_done <= 1'b0;
    if (rel_start) begin
      rel_busy <= 1'b1; rel_cnt = rel_len;
    end else if (rel_busy) begin
      rel_cnt--;
      if (rel_cnt == 0) begin rel_busy <= 1'b0; rel_done <= 1'b1; end
    end
  end

  // monitor
  int          n_start = 0, n_store = 0, n_restart = 0;
  logic [1:0]  last_mask;
  logic        last_first;
  logic [1:0]  inv_seen;
  addr_t       st_a [64];
  data_t       st_d [64];
  logic        st_h [64];
  always @(posedge clk) begin
    if (rel_start) begin n_start++; last_mask = rel_mask; last_first = rel_first; end
    inv_seen |= sb_inv;
    if (wdt_restart) n_restart++;
    if (sb_st_valid && n_store < 64) begin
      st_a[n_store] = sb_st_addr; st_d[n_store] = sb_st_data; st_h[n_store] = sb_st_half;
      n_store++;
    end
  end

  // one region boundary; returns the cycles until rb_done
  task automatic boundary(output int cyc);
    @(negedge clk);
    rb_req = 1'b1; cyc = 0;
    do begin @(negedge clk); cyc++; end while (!rb_done && cyc < 1000);
    rb_req = 1'b0;
    @(negedge clk);
  endtask

  task automatic store(input addr_t a, input data_t d);
    @(negedge clk);
    core_st_valid = 1'b1; core_st_addr = a; core_st_data = d;
    #1;
    check(sb_st_valid && sb_st_half == cur_half && sb_st_addr == a && sb_st_data == d,
          "core store reaches the current half");
    @(negedge clk);
    core_st_valid = 1'b0;
  endtask

  initial begin
    int cyc, s0;
    bit h;
    for (int r = 0; r < NREGS; r++) core_regs[r] = 32'hA000_0000 + r;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    repeat (2) @(negedge clk);
    check(core_hold, "core held before recovery ends");
    sys_ready = 1'b1;
    @(negedge clk);
    check(!core_hold, "core released after recovery");

    // --- ILP on
    store(32'h2000, 32'h11);
    h = cur_half; inv_seen = '0; s0 = n_start;
    boundary(cyc);
    check(cyc <= 2, $sformatf("ILP boundary does not wait (%0d cycles)", cyc));
    check(n_start == s0 + 1 && last_mask == (2'b01 << h), "ended half released");
    check(cur_half == !h, "core continues in the other half");
    check(inv_seen == 2'b00, "no half emptied at the first switch");
    store(32'h2004, 32'h22);
    check(rel_busy, "release still running during the next region");
    inv_seen = '0;
    boundary(cyc);
    check(cyc > 10, $sformatf("next boundary waits for the pending release (%0d cycles)", cyc));
    check(inv_seen == (2'b01 << h), "older released half emptied at the switch");
    check(cur_half == h, "halves swap again");
    check(last_mask == (2'b01 << !h), "second region's half released");
    while (rel_busy) @(negedge clk);

    // --- ILP off
    ilp_en = 1'b0;
    store(32'h2008, 32'h33);
    h = cur_half; inv_seen = '0;
    boundary(cyc);
    check(cyc >= rel_len, $sformatf("non-ILP boundary waits for the release (%0d cycles)", cyc));
    check(!rel_busy, "release finished before the core goes on");
    check(inv_seen == 2'b11, "released half and the stale older half both emptied");
    check(cur_half == h, "no half swap without ILP");

    // --- watchdog checkpoint
    wdt_en = 1'b1;
    h = cur_half; inv_seen = '0; s0 = n_store;
    core_idle = 1'b0;
    @(negedge clk); wdt_expired = 1'b1;
    repeat (3) @(negedge clk);
    check(core_hold, "core held on watchdog expiry");
    check(n_store == s0, "no checkpoint store before the core is idle");
    core_idle = 1'b1;
    while (!rel_start) @(negedge clk);
    wdt_expired = 1'b0;
    check(n_store - s0 == NREGS + 1, $sformatf("%0d checkpoint stores", n_store - s0));
    for (int r = 0; r <= NREGS; r++) begin
      check(st_h[s0 + r] == !h && st_a[s0 + r] == RF_CKPT_BASE + 4 * r &&
            st_d[s0 + r] == ((r == NREGS) ? core_pc : core_regs[r]),
            $sformatf("checkpoint store %0d", r));
    end
    @(negedge clk);
    check(last_mask == 2'b11 && last_first == h, "both halves released, region half first");
    s0 = n_restart;
    while (core_hold) @(negedge clk);
    check(inv_seen == 2'b11, "both halves emptied after the checkpoint");
    check(n_restart > s0, "watchdog restarted");
    check(!rel_busy, "core resumes only after the release");

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
