// tb_watchdog_timer: self-checking test of the region watchdog.
//
// Checks that expired rises exactly `period` counting cycles after a
// restart, that pause cycles are not counted, that restart and disable clear
// it, and that a halved period expires in half the time.
module tb_watchdog_timer;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic        en = 1'b0, pause = 1'b0, restart = 1'b0;
  logic [23:0] period = 24'd100;
  logic        expired;

  watchdog_timer #(.CNT_W(24)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0t: %s", $time, what); end
  endtask

  task automatic measure(input int p, input int pause_cyc, output int cyc);
    @(negedge clk);
    period = 24'(p); restart = 1'b1;
    @(negedge clk);
    restart = 1'b0; cyc = 0;
    for (int k = 0; k < pause_cyc; k++) begin
      pause = 1'b1; @(negedge clk); cyc++;
    end
    pause = 1'b0;
    while (!expired && cyc < 100000) begin @(negedge clk); cyc++; end
  endtask

  initial begin
    int cyc;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    en = 1'b1;
    measure(100, 0, cyc);
    check(cyc == 100, $sformatf("period 100 expired after %0d cycles", cyc));
    measure(50, 0, cyc);
    check(cyc == 50, $sformatf("halved period expired after %0d cycles", cyc));
    measure(40, 17, cyc);
    check(cyc == 57, $sformatf("paused cycles not counted (%0d)", cyc));
    repeat (5) @(negedge clk);
    check(expired, "expired holds until restart");
    restart = 1'b1; @(negedge clk); restart = 1'b0;
    check(!expired, "restart clears expired");
    en = 1'b0;
    repeat (200) @(negedge clk);
    check(!expired, "disabled timer never expires");
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
