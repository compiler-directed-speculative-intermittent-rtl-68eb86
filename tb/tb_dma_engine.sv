// tb_dma_engine: self-checking test of the single-channel DMA copy engine.
//
// Programs several copies of random length between random word ranges of
// the behavioural NVM and compares the destination with the source words
// captured before the copy, checks that the words around the destination are
// untouched, that each copy takes len reads and len writes, all flagged as
// DMA transfers, and that done comes in the 4*len-th cycle after the
// command is accepted (1-cycle read and 1-cycle write at the memory's 4X
// DMA rate, each plus the memory's accept cycle).
module tb_dma_engine;
  import cospec_pkg::*;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic        cmd_valid = 1'b0;
  addr_t       cmd_src = '0, cmd_dst = '0;
  logic [15:0] cmd_len = '0;
  logic        busy, done;
  mem_req_t    nvm_req;
  mem_rsp_t    nvm_rsp;

  dma_engine dut (.*);
  nvm_model u_nvm (.clk, .pwr_ok (rst_n), .req (nvm_req), .rsp (nvm_rsp));

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0t: %s", $time, what); end
  endtask

  initial begin
    data_t src_copy [16];
    data_t w_prev, w_next;
    int rd0, wr0, dm0, cyc;
    for (int k = 0; k < 1024; k++) u_nvm.mem[k] = $urandom;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 8; t++) begin
      int s, d, n;
      s = $urandom % 256; d = 512 + $urandom % 256; n = 1 + $urandom % 8;
      for (int k = 0; k < n; k++) src_copy[k] = u_nvm.mem[s + k];
      w_prev = u_nvm.mem[d + n];
      rd0 = u_nvm.n_rd; wr0 = u_nvm.n_wr; dm0 = u_nvm.n_dma;
      @(negedge clk);
      cmd_valid = 1'b1; cmd_src = addr_t'(4 * s); cmd_dst = addr_t'(4 * d); cmd_len = 16'(n);
      @(negedge clk);
      cmd_valid = 1'b0;
      cyc = 0;
      while (!done) begin @(negedge clk); cyc++; end
      check(cyc == 4 * n - 1, $sformatf("copy of %0d words took %0d cycles", n, cyc));
      @(negedge clk);
      for (int k = 0; k < n; k++)
        check(u_nvm.mem[d + k] == src_copy[k], $sformatf("copy %0d word %0d", t, k));
      w_next = u_nvm.mem[d + n];
      check(w_next == w_prev, "word after the destination untouched");
      check(u_nvm.n_rd - rd0 == n && u_nvm.n_wr - wr0 == n, "one read and one write per word");
      check(!busy, "idle after done");
      check(u_nvm.n_dma - dm0 == 2 * n, "every transfer flagged as DMA");
    end
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
