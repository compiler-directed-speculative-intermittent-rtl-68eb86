// tb_cospec_configs: end-to-end test of the subsystem in the three
// configurations of its evaluation, side by side: ILP with DMA (the
// default), ILP without DMA (the release engine copies phase 2 itself) and
// neither ILP nor DMA (every region end waits for its whole release). Each
// runs the full program, power-failure schedule and checks of the
// end-to-end environment at the default sizes (40-entry store buffer, 16
// registers). The run also prints each configuration's cycle count and
// checks their order: DMA shortens phase 2, so ILP+DMA finishes before ILP
// alone, and overlapping releases with execution finishes before waiting at
// every region end.
module tb_cospec_configs;

  cospec_e2e_bench #(.USE_ILP (1'b1), .USE_DMA (1'b1)) u_dma   ();
  cospec_e2e_bench #(.USE_ILP (1'b1), .USE_DMA (1'b0)) u_ilp   ();
  cospec_e2e_bench #(.USE_ILP (1'b0), .USE_DMA (1'b0)) u_noilp ();

  int checks = 0, failures = 0;

  initial begin
    wait (u_dma.finished && u_ilp.finished && u_noilp.finished);
    checks   = u_dma.checks + u_ilp.checks + u_noilp.checks + 2;
    failures = u_dma.failures + u_ilp.failures + u_noilp.failures;
    if (!(u_dma.cycles < u_ilp.cycles)) begin
      failures++;
      $display("FAIL: ILP+DMA run (%0d cycles) not faster than ILP alone (%0d cycles)",
               u_dma.cycles, u_ilp.cycles);
    end
    if (!(u_ilp.cycles < u_noilp.cycles)) begin
      failures++;
      $display("FAIL: ILP run (%0d cycles) not faster than the run without ILP (%0d cycles)",
               u_ilp.cycles, u_noilp.cycles);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // watchdog
  initial begin
    repeat (6_000_000) @(posedge u_ilp.clk);
    $display("FAIL: watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", u_dma.checks + u_ilp.checks + u_noilp.checks,
             u_dma.failures + u_ilp.failures + u_noilp.failures + 1);
    $finish;
  end

endmodule
