// tb_load_path: self-checking test of the load path and its SB bypass.
//
// The store-buffer search port is answered by a small model that holds a
// table of buffered (address, data) pairs and replies after a fixed delay;
// the NVM is the behavioural model. Checks that a load with address bit 0
// set never starts a search and returns the NVM word at the cleared
// address; that an unmarked load is forwarded on a search hit and read from
// NVM on a miss; the event pulses; the bypass latency (read latency plus
// two cycles); and that a searched load overlaps the search with its NVM
// read, so a miss costs no more than a hit.
module tb_load_path;
  import cospec_pkg::*;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic     ld_req = 1'b0, cur_half = 1'b0;
  addr_t    ld_addr = '0;
  logic     ld_done;
  data_t    ld_data;
  logic     srch_start, srch_cur_half;
  addr_t    srch_addr;
  logic     srch_done = 1'b0, srch_hit = 1'b0;
  data_t    srch_data = '0;
  mem_req_t nvm_req;
  mem_rsp_t nvm_rsp;
  logic     ev_bypass, ev_fwd, ev_miss;

  load_path dut (.*);
  nvm_model u_nvm (.clk, .pwr_ok (rst_n), .req (nvm_req), .rsp (nvm_rsp));

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0t: %s", $time, what); end
  endtask

  // search-port model: addresses 0x400..0x43C are "in the SB"
  int n_search = 0;
  always @(posedge clk) begin
    srch_done <= 1'b0;
    if (srch_start) begin
      n_search++;
      repeat (3) @(posedge clk);
      srch_hit  <= (srch_addr >= 32'h400 && srch_addr < 32'h440);
      srch_data <= 32'h5B00_0000 | srch_addr;
      srch_done <= 1'b1;
    end
  end

  int n_byp = 0, n_fwd = 0, n_miss = 0;
  always @(posedge clk) begin
    n_byp  += int'(ev_bypass);
    n_fwd  += int'(ev_fwd);
    n_miss += int'(ev_miss);
  end

  task automatic load(input addr_t a, output data_t d, output int cyc);
    @(negedge clk);
    ld_req = 1'b1; ld_addr = a; cyc = 0;
    do begin @(negedge clk); cyc++; end while (!ld_done);
    d = ld_data;
    ld_req = 1'b0;
  endtask

  initial begin
    data_t d; int cyc, s0;
    for (int k = 0; k < 512; k++) u_nvm.mem[k] = 32'hF0F0_0000 + k;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 40; t++) begin
      addr_t a;
      a = 32'h400 + 4 * ($urandom % 32);   // half of these are "in the SB"
      s0 = n_search;
      if (t % 2 == 0) begin
        load(a | 32'd1, d, cyc);
        check(d == 32'hF0F0_0000 + (a >> 2), $sformatf("bypass load %h", a));
        check(n_search == s0, "bypass load started no search");
        check(cyc == 2 + 1, $sformatf("bypass latency %0d", cyc));
      end else begin
        load(a, d, cyc);
        if (a < 32'h440) check(d == (32'h5B00_0000 | a), $sformatf("forwarded load %h", a));
        else             check(d == 32'hF0F0_0000 + (a >> 2), $sformatf("missed load %h", a));
        check(n_search == s0 + 1, "searched load started one search");
        // search (4 cycles here) and NVM read overlap: 1 + 4 + 1 cycles,
        // for a hit and a miss alike
        check(cyc == 5, $sformatf("searched load latency %0d", cyc));
      end
    end
    check(n_byp == 20, "bypass events");
    check(n_fwd + n_miss == 20 && n_fwd > 0 && n_miss > 0, "forward/miss events");
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
