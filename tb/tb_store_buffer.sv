// tb_store_buffer: self-checking test of the two-half store buffer.
//
// Fills both halves with random stores (some to repeated addresses), then
// searches random addresses and compares hit/data with a reference model
// that looks for the youngest matching store in the current half, then in
// the other half. Also checks that a search over n valid entries ends within
// n+3 cycles (one comparison per cycle), that the drain port returns every
// entry in append order, and that emptying one half leaves the other intact.
module tb_store_buffer;
  import cospec_pkg::*;

  localparam int SBE  = 40;
  localparam int HALF = SBE / 2;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic        st_valid = 1'b0, st_half = 1'b0;
  addr_t       st_addr = '0;
  data_t       st_data = '0;
  logic [$clog2(HALF+1)-1:0] cnt [2];
  logic [1:0]  inv = '0;
  logic        overflow;
  logic        srch_start = 1'b0, srch_cur_half = 1'b0;
  addr_t       srch_addr = '0;
  logic        srch_busy, srch_done, srch_hit;
  data_t       srch_data;
  logic [$clog2(SBE)-1:0] drn_idx = '0;
  sb_entry_t   drn_entry;

  store_buffer #(.SB_ENTRIES(SBE)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0t: %s", $time, what); end
  endtask

  // reference
  addr_t ref_a [2][HALF];
  data_t ref_d [2][HALF];
  int    ref_n [2];

  task automatic push(input bit h, input addr_t a, input data_t d);
    @(negedge clk);
    st_valid = 1'b1; st_half = h; st_addr = a; st_data = d;
    @(negedge clk);
    st_valid = 1'b0;
    ref_a[h][ref_n[h]] = a; ref_d[h][ref_n[h]] = d; ref_n[h]++;
  endtask

  task automatic search(input bit cur, input addr_t a);
    bit exp_hit; data_t exp_d; int cyc; bit found;
    exp_hit = 0; exp_d = '0; found = 0;
    for (int i = ref_n[cur] - 1; i >= 0 && !found; i--)
      if (ref_a[cur][i] == a) begin exp_hit = 1; exp_d = ref_d[cur][i]; found = 1; end
    for (int i = ref_n[!cur] - 1; i >= 0 && !found; i--)
      if (ref_a[!cur][i] == a) begin exp_hit = 1; exp_d = ref_d[!cur][i]; found = 1; end
    @(negedge clk);
    srch_start = 1'b1; srch_addr = a; srch_cur_half = cur;
    @(negedge clk);
    srch_start = 1'b0;
    cyc = 1;
    while (!srch_done) begin @(negedge clk); cyc++; end
    check(srch_hit == exp_hit, $sformatf("hit for %h (cur %0d)", a, cur));
    if (exp_hit) check(srch_data == exp_d, $sformatf("data for %h", a));
    check(cyc <= ref_n[0] + ref_n[1] + 3, $sformatf("search latency %0d cycles", cyc));
  endtask

  initial begin
    ref_n[0] = 0; ref_n[1] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    check(cnt[0] == 0 && cnt[1] == 0, "empty after reset");
    for (int i = 0; i < HALF; i++) push(0, 32'h100 + 4 * ($urandom % 12), $urandom);
    for (int i = 0; i < 15; i++)   push(1, 32'h100 + 4 * ($urandom % 12), $urandom);
    check(cnt[0] == HALF && cnt[1] == 15, "fill counts");
    check(!overflow, "no overflow");
    for (int k = 0; k < 60; k++) search($urandom % 2, 32'h100 + 4 * ($urandom % 16));
    // drain port
    for (int h = 0; h < 2; h++)
      for (int i = 0; i < ref_n[h]; i++) begin
        drn_idx = 6'(h * HALF + i);
        #1;
        check(drn_entry.addr == ref_a[h][i] && drn_entry.data == ref_d[h][i],
              $sformatf("drain entry %0d.%0d", h, i));
      end
    // empty half 0, half 1 still searchable
    @(negedge clk); inv = 2'b01; @(negedge clk); inv = 2'b00;
    ref_n[0] = 0;
    check(cnt[0] == 0 && cnt[1] == 15, "invalidate one half");
    for (int k = 0; k < 30; k++) search($urandom % 2, 32'h100 + 4 * ($urandom % 16));
    // refill half 0 after emptying: youngest store wins
    push(0, 32'h200, 32'hAAAA_0001);
    push(0, 32'h200, 32'hAAAA_0002);
    search(0, 32'h200);
    check(srch_data == 32'hAAAA_0002, "youngest store forwarded");
    // power failure empties everything
    rst_n = 1'b0; #1;
    check(cnt[0] == 0 && cnt[1] == 0, "reset empties the buffer");
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
