// tb_release_ctrl: self-checking test of the two-phase release engine.
//
// The engine is connected to a real store buffer, the DMA engine, the NVM
// arbiter and the behavioural NVM. For releases of one half (with and
// without DMA) and of both halves, it checks the proxy buffer contents and
// order, the entry count, the check-bit word after each phase, the final
// primary words (last store to an address wins) and the exact number of NVM
// reads and writes (phase 1: 2n+2 writes; phase 2: 2n reads, n+1 writes)
// and the length of phase 2: 9n+5 cycles copying itself, 7n+5 with the DMA
// channel (1-cycle reads, 3-cycle writes, 1-cycle DMA writes, each access
// plus one accept cycle).
// It then cuts power during phase 2 and checks isDrain=1/isComplete=0 and
// that a redo restores the primary words, and cuts power during phase 1 and
// checks that NVM primary data and check bits are untouched.
module tb_release_ctrl;
  import cospec_pkg::*;

  localparam int SBE  = 40;
  localparam int HALF = SBE / 2;
  localparam addr_t DBASE = 32'h0000_2000;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  // store buffer
  logic        st_valid = 1'b0, st_half = 1'b0;
  addr_t       st_addr = '0;
  data_t       st_data = '0;
  logic [$clog2(HALF+1)-1:0] cnt [2];
  logic [1:0]  inv = '0;
  logic        overflow, srch_busy, srch_done, srch_hit;
  data_t       srch_data;
  logic [$clog2(SBE)-1:0] drn_idx;
  sb_entry_t   drn_entry;

  store_buffer #(.SB_ENTRIES(SBE)) u_sb (
    .clk, .rst_n, .st_valid, .st_half, .st_addr, .st_data, .cnt, .inv, .overflow,
    .srch_start (1'b0), .srch_addr ('0), .srch_cur_half (1'b0),
    .srch_busy, .srch_done, .srch_hit, .srch_data, .drn_idx, .drn_entry
  );

  // release engine
  logic        dma_en = 1'b0, start = 1'b0, first_half = 1'b0, redo_p2 = 1'b0;
  logic [1:0]  mask = '0;
  logic        busy, done, in_phase1, in_phase2;
  logic        dma_valid, dma_done, dma_busy;
  addr_t       dma_src, dma_dst;
  logic [15:0] dma_len;
  mem_req_t    m_req [2];
  mem_rsp_t    m_rsp [2];
  mem_req_t    nvm_req;
  mem_rsp_t    nvm_rsp;

  release_ctrl #(.SB_ENTRIES(SBE)) dut (
    .clk, .rst_n, .dma_en, .start, .mask, .first_half, .redo_p2,
    .busy, .done, .in_phase1, .in_phase2, .cnt, .drn_idx, .drn_entry,
    .dma_valid, .dma_src, .dma_dst, .dma_len, .dma_done,
    .nvm_req (m_req[0]), .nvm_rsp (m_rsp[0])
  );

  dma_engine u_dma (
    .clk, .rst_n, .cmd_valid (dma_valid), .cmd_src (dma_src), .cmd_dst (dma_dst),
    .cmd_len (dma_len), .busy (dma_busy), .done (dma_done),
    .nvm_req (m_req[1]), .nvm_rsp (m_rsp[1])
  );

  nvm_arbiter #(.NM(2)) u_arb (.clk, .rst_n, .m_req, .m_rsp, .s_req (nvm_req), .s_rsp (nvm_rsp));
  nvm_model u_nvm (.clk, .pwr_ok (rst_n), .req (nvm_req), .rsp (nvm_rsp));

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0t: %s", $time, what); end
  endtask

  int p2_cyc = 0;
  always @(posedge clk) if (in_phase2) p2_cyc++;

  // reference: stores per half in order, and the expected primary words
  addr_t ra [2][HALF];
  data_t rd [2][HALF];
  int    rn [2];
  data_t prim [32];

  task automatic push(input bit h, input int n);
    for (int i = 0; i < n; i++) begin
      @(negedge clk);
      st_valid = 1'b1; st_half = h;
      st_addr = DBASE + 4 * ($urandom % 32); st_data = $urandom;
      ra[h][rn[h]] = st_addr; rd[h][rn[h]] = st_data; rn[h]++;
    end
    @(negedge clk);
    st_valid = 1'b0;
  endtask

  task automatic clear_sb();
    @(negedge clk); inv = 2'b11; @(negedge clk); inv = 2'b00;
    rn[0] = 0; rn[1] = 0;
  endtask

  task automatic check_primary(input string tag);
    for (int k = 0; k < 32; k++)
      check(u_nvm.peek(DBASE + 4 * k) == prim[k], $sformatf("%s primary word %0d", tag, k));
  endtask

  // run one release and check everything
  task automatic release_and_check(input bit dma, input logic [1:0] m, input bit first);
    int rd0, wr0, n, k;
    bit h;
    n = (m[0] ? rn[0] : 0) + (m[1] ? rn[1] : 0);
    rd0 = u_nvm.n_rd; wr0 = u_nvm.n_wr; p2_cyc = 0;
    @(negedge clk);
    dma_en = dma; mask = m; first_half = first; start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    while (!in_phase2) @(negedge clk);
    // phase 1 finished: the check bits say drained, not complete
    check(u_nvm.peek(FLAG_ADDR) == 32'd1, "isDrain=1 isComplete=0 after phase 1");
    while (!done) @(negedge clk);
    @(negedge clk);
    k = 0;
    for (int s = 0; s < 2; s++) begin
      h = (s == 0) ? first : !first;
      if (m[h])
        for (int i = 0; i < rn[h]; i++) begin
          check(u_nvm.peek(proxy_addr_word(k)) == ra[h][i] &&
                u_nvm.peek(proxy_data_word(k)) == rd[h][i],
                $sformatf("proxy entry %0d", k));
          prim[(ra[h][i] - DBASE) >> 2] = rd[h][i];
          k++;
        end
    end
    check(u_nvm.peek(PROXY_CNT_ADDR) == data_t'(n), "proxy count");
    check(u_nvm.peek(FLAG_ADDR) == 32'd3, "isDrain=1 isComplete=1 after phase 2");
    check_primary(dma ? "dma" : "cpu-copy");
    check(u_nvm.n_wr - wr0 == 3 * n + 3, $sformatf("NVM writes %0d for %0d entries", u_nvm.n_wr - wr0, n));
    check(u_nvm.n_rd - rd0 == 2 * n, $sformatf("NVM reads %0d for %0d entries", u_nvm.n_rd - rd0, n));
    check(p2_cyc == (dma ? 7 : 9) * n + 5,
          $sformatf("phase 2 took %0d cycles for %0d entries (dma=%0d)", p2_cyc, n, dma));
  endtask

  initial begin
    for (int k = 0; k < 32; k++) prim[k] = '0;
    rn[0] = 0; rn[1] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    // one half, plain copy
    push(0, 12);
    release_and_check(0, 2'b01, 0);
    // other half, DMA copy
    push(1, 9);
    release_and_check(1, 2'b10, 1);
    clear_sb();
    // both halves (watchdog case), older half 1 first
    push(1, 14);
    push(0, 17);
    release_and_check(1, 2'b11, 1);
    clear_sb();
    // power failure during phase 2, then redo
    push(0, 15);
    @(negedge clk);
    dma_en = 1'b1; mask = 2'b01; first_half = 1'b0; start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    while (!in_phase2) @(negedge clk);
    repeat (30) @(negedge clk);
    rst_n = 1'b0;
    for (int i = 0; i < rn[0]; i++) prim[(ra[0][i] - DBASE) >> 2] = rd[0][i];
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    check(u_nvm.peek(FLAG_ADDR) == 32'd1, "failure in phase 2 leaves isDrain=1 isComplete=0");
    check(cnt[0] == 0 && cnt[1] == 0, "store buffer lost at power failure");
    @(negedge clk); redo_p2 = 1'b1; @(negedge clk); redo_p2 = 1'b0;
    while (!done) @(negedge clk);
    @(negedge clk);
    check(u_nvm.peek(FLAG_ADDR) == 32'd3, "redo sets isComplete");
    check_primary("redo");
    // power failure during phase 1: nothing primary changes
    rn[0] = 0; rn[1] = 0;
    push(1, 16);
    @(negedge clk);
    dma_en = 1'b0; mask = 2'b10; first_half = 1'b1; start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    repeat (40) @(negedge clk);
    check(in_phase1, "still in phase 1 when power fails");
    rst_n = 1'b0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    check(u_nvm.peek(FLAG_ADDR) == 32'd3, "failure in phase 1 leaves both bits set");
    check_primary("phase-1 failure");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
