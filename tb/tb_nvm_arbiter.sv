// tb_nvm_arbiter: self-checking test of the fixed-priority NVM arbiter.
//
// Five masters share the behavioural NVM. First all five request at once
// from idle: grants must come in index order. Then every master runs random
// write-then-read-back traffic to its own address range, holding each
// request until its done. Checks: exactly one done per slave completion and
// only to a requesting master, each master's read returns its own last
// write, and a master never waits while the slave is idle.
module tb_nvm_arbiter;
  import cospec_pkg::*;

  localparam int NM = 5;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  mem_req_t m_req [NM];
  mem_rsp_t m_rsp [NM];
  mem_req_t s_req;
  mem_rsp_t s_rsp;

  nvm_arbiter #(.NM(NM)) dut (.*);
  nvm_model u_nvm (.clk, .pwr_ok (rst_n), .req (s_req), .rsp (s_rsp));

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0t: %s", $time, what); end
  endtask

  // completion order log and done checks
  int order [$];
  always @(posedge clk) begin
    automatic int nd = 0;
    for (int m = 0; m < NM; m++)
      if (m_rsp[m].done) begin
        nd++;
        order.push_back(m);
        if (!m_req[m].req) begin failures++; $display("FAIL: done to idle master %0d", m); end
      end
    if (s_rsp.done) begin
      checks++;
      if (nd != 1) begin failures++; $display("FAIL: %0d dones for one completion", nd); end
    end
  end

  // one master's transfer: raise req at a falling edge, hold it until done
  task automatic xfer(input int m, input bit we, input addr_t a, input data_t d, output data_t q);
    @(negedge clk);
    m_req[m].req = 1'b1; m_req[m].we = we; m_req[m].addr = a; m_req[m].wdata = d;
    do @(posedge clk); while (!m_rsp[m].done);
    q = m_rsp[m].rdata;
    #1 m_req[m] = '0;
  endtask

  initial begin
    for (int m = 0; m < NM; m++) m_req[m] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    // simultaneous requests: index order
    for (int m = 0; m < NM; m++) begin
      automatic int mm = m;
      fork
        begin automatic data_t q; xfer(mm, 1'b1, addr_t'(32'h100 + 4 * mm), data_t'(mm), q); end
      join_none
    end
    wait fork;
    check(order.size() == NM, "all five granted");
    for (int m = 0; m < NM && m < order.size(); m++)
      check(order[m] == m, $sformatf("grant %0d went to master %0d", m, order[m]));
    // random concurrent traffic
    for (int m = 0; m < NM; m++) begin
      automatic int mm = m;
      fork
        for (int t = 0; t < 40; t++) begin
          automatic addr_t a; automatic data_t d, q;
          a = addr_t'(32'h1000 * (mm + 1) + 4 * ($urandom % 16));
          d = $urandom;
          repeat ($urandom % 4) @(posedge clk);
          xfer(mm, 1'b1, a, d, q);
          repeat ($urandom % 3) @(posedge clk);
          xfer(mm, 1'b0, a, '0, q);
          checks++;
          if (q != d) begin failures++; $display("FAIL: master %0d read %h expected %h", mm, q, d); end
        end
      join_none
    end
    wait fork;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // a pending request is always served when the slave is idle
  always @(posedge clk) if (rst_n) begin
    automatic bit any = 0;
    for (int m = 0; m < NM; m++) any |= m_req[m].req;
    if (any && !s_req.req) begin failures++; $display("FAIL @%0t: request pending, slave idle", $time); end
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
