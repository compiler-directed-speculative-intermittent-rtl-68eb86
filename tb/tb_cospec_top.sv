// tb_cospec_top: end-to-end test of the whole subsystem at its default
// parameters (40-entry store buffer, 16 registers, ILP and DMA on, watchdog
// period 16384 cycles, ILP re-enabled after 16 good regions).
//
// A small core model runs a synthetic compiler-partitioned program of
// NREGIONS regions. Each region is a sequence of stores, SB-searched loads,
// SB-bypass loads (to a read-only input area that no region writes) and
// compute delays, then the compiler's checkpoint store of the next region's
// PC and the region-boundary instruction. The PC is {region, op index}; the
// core resumes from the recovery PC after every power-on. Region LONG_R is
// made of long compute steps, longer than the on-time between failures.
//
// Power failures (rst_n low, NVM contents kept, in-flight NVM write lost)
// are injected: during a phase 2, during a phase 1, in the middle of a
// region, and repeatedly inside the long region (stagnation). Checks:
//   * every load returns the value of the program-order golden memory;
//   * after every power-on, the NVM data area equals the golden memory
//     replayed up to the recovery PC (crash consistency), and the recovery
//     PC never moves backwards;
//   * after a watchdog checkpoint, the checkpointed registers in NVM match
//     the core's registers at the checkpointed PC;
//   * at the end, the NVM data area equals the golden final state;
//   * each mechanism (bypass, forward, miss, ILP overlap, ILP wait, no-ILP
//     wait, phase-2 redo, phase-1 failure, watchdog checkpoint, watchdog
//     halving, ILP re-enable, DMA copy) happened at least once.
module tb_cospec_top;
  import cospec_pkg::*;

  localparam int NREGS     = 16;
  localparam int NREGIONS  = 100;
  localparam int LONG_R    = 60;
  localparam int LONG_OPS  = 12;
  localparam int LONG_CYC  = 5000;
  localparam int F_ON      = 20000;   // on-time between failures in LONG_R
  localparam int NDATA     = 16;
  localparam addr_t DATA_BASE = 32'h0000_2000;
  localparam addr_t IN_BASE   = 32'h0000_3000;
  localparam addr_t PC_WORD   = RF_CKPT_BASE + 4 * NREGS;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #20 clk = ~clk;   // 25 MHz

  // DUT ports
  logic     sys_ready, ld_done, rb_done, core_hold, ilp_en, wdt_en, sb_overflow;
  addr_t    recovery_pc;
  logic     st_valid, ld_req, rb_req, core_idle;
  addr_t    st_addr, ld_addr, core_pc;
  data_t    st_data, ld_data;
  data_t    core_regs [NREGS];
  mem_req_t nvm_req;
  mem_rsp_t nvm_rsp;
  events_t  events;

  cospec_top u_dut (
    .clk, .rst_n, .sys_ready, .recovery_pc,
    .st_valid, .st_addr, .st_data, .ld_req, .ld_addr, .ld_done, .ld_data,
    .rb_req, .rb_done, .core_hold, .core_idle, .core_regs, .core_pc,
    .nvm_req, .nvm_rsp, .ilp_en, .wdt_en, .sb_overflow, .events
  );

  nvm_model u_nvm (.clk, .pwr_ok (rst_n), .req (nvm_req), .rsp (nvm_rsp));

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL @%0t: %s", $time, what);
    end
  endtask

  // ---------------- synthetic program ----------------
  typedef enum logic [2:0] {OP_ST, OP_LD, OP_BYP, OP_COMP, OP_PCST, OP_END} op_kind_e;
  typedef struct packed {
    op_kind_e kind;
    addr_t    addr;
    data_t    data;
    int       cyc;
  } op_t;

  function automatic int nops(input int r);
    return (r == LONG_R) ? LONG_OPS : 6 + (r % 7) * 2;
  endfunction

  function automatic op_t get_op(input int r, input int i);
    op_t o;
    int unsigned h;
    h = (r * 2654435761) ^ (i * 40503) ^ (r << 7) ^ (i << 13);
    h = h ^ (h >> 11);
    o = '0;
    if (i == nops(r)) begin
      o.kind = OP_PCST; o.addr = PC_WORD; o.data = {16'(r + 1), 16'd0};
    end else if (i > nops(r)) begin
      o.kind = OP_END;
    end else if (r == LONG_R) begin
      if (i % 3 == 0) begin
        o.kind = OP_ST; o.addr = DATA_BASE + 4 * ((h >> 4) % NDATA);
        o.data = {16'(r), 16'(i)} ^ h;
      end else begin
        o.kind = OP_COMP; o.cyc = LONG_CYC;
      end
    end else begin
      unique case (h % 4)
        0: begin o.kind = OP_ST;  o.addr = DATA_BASE + 4 * ((h >> 4) % NDATA); o.data = {16'(r), 16'(i)} ^ h; end
        1: begin o.kind = OP_LD;  o.addr = DATA_BASE + 4 * ((h >> 5) % NDATA); end
        2: begin o.kind = OP_BYP; o.addr = IN_BASE + 4 * ((h >> 5) % 64); end
        default: begin o.kind = OP_COMP; o.cyc = 1 + int'((h >> 6) % 5); end
      endcase
    end
    return o;
  endfunction

  function automatic data_t in_word(input int k);
    return 32'hC0DE_0000 + k * 7;
  endfunction

  function automatic data_t reg_val(input addr_t pc, input int k);
    return pc ^ (32'h0101_0101 * k);
  endfunction

  data_t gold [NDATA];

  task automatic replay(input int r_end, input int i_end);
    op_t o;
    for (int k = 0; k < NDATA; k++) gold[k] = '0;
    for (int r = 0; r <= r_end && r < NREGIONS; r++)
      for (int i = 0; i <= nops(r); i++) begin
        if (r == r_end && i >= i_end) break;
        o = get_op(r, i);
        if (o.kind == OP_ST) gold[(o.addr - DATA_BASE) >> 2] = o.data;
      end
  endtask

  // ---------------- core model ----------------
  typedef enum logic [2:0] {K_BOOT, K_RUN, K_LD, K_COMP, K_RB, K_END} core_state_e;
  core_state_e ks;
  int    cur_r, cur_i, comp_left;
  op_t   cur_op;
  addr_t last_boot_pc;
  int    n_boot_checks = 0;
  bit    prog_done = 0;

  assign core_pc   = {16'(cur_r), 16'(cur_i)};
  assign core_idle = !st_valid && (ks != K_LD);
  always_comb for (int k = 0; k < NREGS; k++) core_regs[k] = reg_val(core_pc, k);

  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ks       <= K_BOOT;
      st_valid <= 1'b0;
      ld_req   <= 1'b0;
      rb_req   <= 1'b0;
    end else begin
      st_valid <= 1'b0;
      unique case (ks)
        K_BOOT: if (sys_ready) begin
          cur_r = int'(recovery_pc[31:16]);
          cur_i = int'(recovery_pc[15:0]);
          replay(cur_r, cur_i);
          for (int k = 0; k < NDATA; k++)
            check(u_nvm.peek(DATA_BASE + 4 * k) == gold[k],
                  $sformatf("crash consistency word %0d at pc %h", k, recovery_pc));
          check(recovery_pc >= last_boot_pc, "recovery PC moved backwards");
          last_boot_pc = recovery_pc;
          n_boot_checks++;
          ks <= (cur_r >= NREGIONS) ? K_END : K_RUN;
        end
        K_RUN: if (!core_hold) begin
          cur_op = get_op(cur_r, cur_i);
          unique case (cur_op.kind)
            OP_ST, OP_PCST: begin
              st_valid <= 1'b1;
              st_addr  <= cur_op.addr;
              st_data  <= cur_op.data;
              if (cur_op.kind == OP_ST) gold[(cur_op.addr - DATA_BASE) >> 2] = cur_op.data;
              cur_i = cur_i + 1;
            end
            OP_LD: begin
              ld_req <= 1'b1; ld_addr <= cur_op.addr; ks <= K_LD;
            end
            OP_BYP: begin
              ld_req <= 1'b1; ld_addr <= cur_op.addr | 32'd1; ks <= K_LD;
            end
            OP_COMP: begin
              comp_left = cur_op.cyc; ks <= K_COMP;
            end
            OP_END: begin
              rb_req <= 1'b1; ks <= K_RB;
            end
            default: ;
          endcase
        end
        K_LD: if (ld_done) begin
          ld_req <= 1'b0;
          if (cur_op.kind == OP_LD)
            check(ld_data == gold[(cur_op.addr - DATA_BASE) >> 2],
                  $sformatf("load %h r%0d i%0d got %h", cur_op.addr, cur_r, cur_i, ld_data));
          else
            check(ld_data == in_word(int'((cur_op.addr - IN_BASE) >> 2)),
                  $sformatf("bypass load %h got %h", cur_op.addr, ld_data));
          cur_i = cur_i + 1;
          ks <= K_RUN;
        end
        K_COMP: if (!core_hold) begin
          comp_left = comp_left - 1;
          if (comp_left <= 0) begin
            cur_i = cur_i + 1;
            ks <= K_RUN;
          end
        end
        K_RB: if (rb_done) begin
          rb_req <= 1'b0;
          cur_r = cur_r + 1;
          cur_i = 0;
          ks <= (cur_r >= NREGIONS) ? K_END : K_RUN;
        end
        K_END: prog_done = 1;
        default: ;
      endcase
    end
  end

  // ---------------- mechanism counters ----------------
  int n_byp, n_fwd, n_miss, n_ovl, n_ilpw, n_noilpw, n_tck, n_redo, n_relax, n_dma, n_halved;
  int n_p1_fail;
  int n_ovf = 0;
  bit after_tck;
  initial begin
    n_byp = 0; n_fwd = 0; n_miss = 0; n_ovl = 0; n_ilpw = 0; n_noilpw = 0;
    n_tck = 0; n_redo = 0; n_relax = 0; n_dma = 0; n_halved = 0; n_p1_fail = 0;
    after_tck = 0;
  end
  always @(posedge clk) if (rst_n) begin
    n_byp    += int'(events.ld_bypass);
    n_fwd    += int'(events.ld_fwd);
    n_miss   += int'(events.ld_miss);
    n_ovl    += int'(events.ilp_overlap);
    n_ilpw   += int'(events.ilp_wait);
    n_noilpw += int'(events.noilp_wait);
    n_tck    += int'(events.timer_ckpt);
    n_redo   += int'(events.redo_phase2);
    n_relax  += int'(events.policy_relax);
    n_dma    += int'(u_dut.dma_done);
    if (wdt_en && u_dut.wdt_period < 24'd16384) n_halved++;
    if (events.timer_ckpt) after_tck = 1;
    if (after_tck && events.rel_done) begin
      after_tck = 0;
      for (int k = 0; k < NREGS; k++)
        check(u_nvm.peek(RF_CKPT_BASE + 4 * k) == reg_val(u_nvm.peek(PC_WORD), k),
              $sformatf("watchdog checkpoint register %0d", k));
    end
    if (sb_overflow) n_ovf++;
  end

  // ---------------- power-failure schedule ----------------
  task automatic power_fail();
    rst_n <= 1'b0;
    repeat (5) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    wait (sys_ready);
  endtask

  int redo_before;
  initial begin
    for (int k = 0; k < 64; k++) u_nvm.mem[(IN_BASE >> 2) + k] = in_word(k);
    last_boot_pc = '0;
    repeat (5) @(posedge clk);
    rst_n <= 1'b1;
    // failure during phase 2 of a release: recovery must redo phase 2
    wait (cur_r >= 20);
    wait (events.rel_phase2);
    @(posedge clk);
    redo_before = n_redo;
    power_fail();
    check(n_redo == redo_before + 1, "phase-2 failure led to a phase-2 redo");
    // failure during phase 1: no redo
    wait (cur_r >= 40);
    wait (events.rel_phase1);
    repeat (3) @(posedge clk);
    redo_before = n_redo;
    power_fail();
    n_p1_fail++;
    check(n_redo == redo_before, "phase-1 failure led to no redo");
    // failure in the middle of a region
    wait (cur_r >= 50 && ks == K_COMP);
    power_fail();
    // stagnating region: fail every F_ON cycles while inside it
    wait (cur_r == LONG_R);
    for (int n = 0; n < 20 && cur_r == LONG_R; n++) begin
      for (int c = 0; c < F_ON && cur_r == LONG_R; c++) @(posedge clk);
      if (cur_r == LONG_R) power_fail();
    end
    check(cur_r > LONG_R, "escaped the stagnating region");
    wait (prog_done);
    repeat (5) @(posedge clk);
    wait (!u_dut.rel_busy);
    repeat (2) @(posedge clk);
    replay(NREGIONS, 0);
    for (int k = 0; k < NDATA; k++)
      check(u_nvm.peek(DATA_BASE + 4 * k) == gold[k], $sformatf("final NVM word %0d", k));
    check(u_nvm.peek(PC_WORD) == {16'(NREGIONS), 16'd0}, "final recovery PC");
    check(n_byp > 0,    "SB bypass loads happened");
    check(n_fwd > 0,    "store-to-load forwarding happened");
    check(n_miss > 0,   "SB search misses happened");
    check(n_ovl > 0,    "ILP overlap happened");
    check(n_ilpw > 0,   "ILP wait at region end happened");
    check(n_noilpw > 0, "no-ILP release wait happened");
    check(n_tck > 0,    "watchdog checkpoint happened");
    check(n_halved > 0, "watchdog period halving happened");
    check(n_relax > 0,  "ILP re-enable happened");
    check(n_redo > 0,   "phase-2 redo happened");
    check(n_p1_fail > 0, "phase-1 failure happened");
    check(n_dma > 0,    "DMA copies happened");
    check(n_ovf == 0, "no store buffer overflow");
    check(n_boot_checks > 5, "recoveries checked");
    $display("events: bypass=%0d fwd=%0d miss=%0d overlap=%0d ilp_wait_cyc=%0d noilp_wait_cyc=%0d timer_ckpt=%0d redo=%0d relax=%0d dma=%0d boots=%0d",
             n_byp, n_fwd, n_miss, n_ovl, n_ilpw, n_noilpw, n_tck, n_redo, n_relax, n_dma, n_boot_checks);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // watchdog
  initial begin
    repeat (3_000_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog timeout (region %0d op %0d)", cur_r, cur_i);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
