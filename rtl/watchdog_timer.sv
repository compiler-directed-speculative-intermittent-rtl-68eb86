// watchdog_timer: the region watchdog used against stagnation.
//
// When a region is so long that power keeps failing before its end, the
// program would re-execute it forever. With the watchdog enabled, the timer
// counts clock cycles since the start of the current region (or since the
// last timer checkpoint); when it reaches the programmed period it raises
// expired, and the speculation controller checkpoints the registers into
// the idle store-buffer half and releases the whole buffer. The paper gives
// this function and that the timer is paused during a store-buffer release
// and that its period is halved by the adaptive policy; the counter itself
// is this design's own.
//
// Interface: en enables counting; pause holds the count; restart clears it
// and clears expired. expired stays high until restart. period is sampled
// every cycle, so a new period takes effect at once.
module watchdog_timer #(
  parameter int unsigned CNT_W = 24
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             en,
  input  logic             pause,
  input  logic             restart,
  input  logic [CNT_W-1:0] period,
  output logic             expired
);

  logic [CNT_W-1:0] cnt_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt_q   <= '0;
      expired <= 1'b0;
    end else if (restart || !en) begin
      cnt_q   <= '0;
      expired <= 1'b0;
    end else if (!pause && !expired) begin
      if (cnt_q + 1'b1 >= period) expired <= 1'b1;
      cnt_q <= cnt_q + 1'b1;
    end
  end

endmodule
