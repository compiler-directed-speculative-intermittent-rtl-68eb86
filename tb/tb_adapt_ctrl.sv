// tb_adapt_ctrl: self-checking test of the adaptive ILP / watchdog policy.
//
// Walks the policy through a sequence of power-on updates and compares the
// new adaptation record and the loaded policy with the rules: ILP off after
// every failure; watchdog on after the third failure in the same region;
// period halved on each failure while the watchdog is on, never below the
// minimum; a failure in another region restarts the count. Then counts
// region releases and checks that ILP comes back, the watchdog goes off and
// the relaxed record is written to NVM after GOOD_REGIONS releases.
module tb_adapt_ctrl;
  import cospec_pkg::*;

  localparam int WI = 1024, WM = 128, GOOD = 4;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic        boot_load = 1'b0, progress = 1'b0;
  addr_t       boot_pc = '0;
  data_t       rec_status_in = '0, rec_pc_in = '0;
  data_t       new_rec_status, new_rec_pc;
  logic        ilp_en, wdt_en, ev_relax;
  logic [23:0] wdt_period;
  mem_req_t    nvm_req;
  mem_rsp_t    nvm_rsp;

  adapt_ctrl #(.CNT_W(24), .WDT_INIT(WI), .WDT_MIN(WM), .GOOD_REGIONS(GOOD)) dut (.*);
  nvm_model u_nvm (.clk, .pwr_ok (rst_n), .req (nvm_req), .rsp (nvm_rsp));

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0t: %s", $time, what); end
  endtask

  function automatic data_t rec(input bit wdt, input int shift, input int cnt);
    return (data_t'(1) << 31) | (data_t'(wdt) << 30) | data_t'(shift << 8) | data_t'(cnt);
  endfunction

  // one power-on: present the stored record, check the update, load it
  task automatic boot(input addr_t pc, input data_t st, input addr_t st_pc,
                      input data_t exp_st, input bit exp_wdt, input int exp_period);
    @(negedge clk);
    rst_n = 1'b0; @(negedge clk); rst_n = 1'b1;
    boot_pc = pc; rec_status_in = st; rec_pc_in = st_pc;
    #1;
    check(new_rec_status == exp_st, $sformatf("record %h expected %h", new_rec_status, exp_st));
    check(new_rec_pc == pc, "record PC");
    @(negedge clk); boot_load = 1'b1; @(negedge clk); boot_load = 1'b0;
    check(!ilp_en, "ILP off after a power failure");
    check(wdt_en == exp_wdt, "watchdog enable");
    if (exp_wdt) check(wdt_period == 24'(exp_period), $sformatf("period %0d expected %0d", wdt_period, exp_period));
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    boot(32'h100, 32'h0, 32'h0,          rec(0, 0, 1), 0, 0);      // first boot
    boot(32'h100, rec(0, 0, 1), 32'h100, rec(0, 0, 2), 0, 0);      // 2nd in same region
    boot(32'h100, rec(0, 0, 2), 32'h100, rec(1, 0, 3), 1, WI);     // 3rd: watchdog on
    boot(32'h180, rec(1, 0, 3), 32'h100, rec(1, 1, 1), 1, WI / 2); // halve
    boot(32'h180, rec(1, 1, 1), 32'h180, rec(1, 2, 2), 1, WI / 4);
    boot(32'h180, rec(1, 2, 2), 32'h180, rec(1, 3, 3), 1, WM);     // minimum
    boot(32'h180, rec(1, 3, 3), 32'h180, rec(1, 3, 4), 1, WM);     // stays at minimum
    boot(32'h200, rec(0, 0, 2), 32'h180, rec(0, 0, 1), 0, 0);      // other region
    // sustained progress relaxes the policy
    boot(32'h200, rec(0, 0, 2), 32'h200, rec(1, 0, 3), 1, WI);
    for (int k = 0; k < GOOD; k++) begin
      check(!ilp_en && wdt_en, "policy unchanged before enough progress");
      @(negedge clk); progress = 1'b1; @(negedge clk); progress = 1'b0;
    end
    check(ilp_en && !wdt_en, "ILP back on and watchdog off after progress");
    repeat (10) @(negedge clk);
    check(u_nvm.peek(ADAPT_REC_ADDR) == (data_t'(1) << 31), "relaxed record written to NVM");
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
