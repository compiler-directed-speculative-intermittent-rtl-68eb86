// adapt_ctrl: adaptive execution policy against stagnation.
//
// Overlapping a release with the next region (ILP) costs power, and a region
// that is longer than the energy of one charge would be re-executed
// forever. The policy therefore reacts to power failures:
//   * after any power failure, ILP is off;
//   * once power has failed more than twice in the same region, the
//     watchdog checkpoint is turned on with its initial period;
//   * every further failure while the watchdog is on halves its period;
//   * after GOOD_REGIONS region releases without a failure, ILP is turned
//     back on and the watchdog off.
// These rules are the paper's. The state that must survive a failure is kept
// in a two-word adaptation record in NVM (status word and the recovery PC of
// the last failure); "same region" is judged by equal recovery PCs. The
// record, GOOD_REGIONS, the periods and the PC test are this design's own.
//
// Interface: at power-on the recovery controller reads the record and the
// recovery PC, presents them on rec_status_in/rec_pc_in/boot_pc, writes back
// new_rec_status/new_rec_pc (computed here combinationally) and pulses
// boot_load, which loads the new policy. progress pulses once per completed
// region release. When the policy is relaxed at run time this block writes
// the new status word to NVM through its own mem_req_t master port.
// wdt_period = WDT_INIT >> halvings, never below WDT_MIN.
module adapt_ctrl
  import cospec_pkg::*;
#(
  parameter int unsigned CNT_W        = 24,
  parameter int unsigned WDT_INIT     = 16384,
  parameter int unsigned WDT_MIN      = 256,
  parameter int unsigned GOOD_REGIONS = 16,
  parameter bit          ILP_ALLOWED  = 1'b1
) (
  input  logic             clk,
  input  logic             rst_n,
  // boot-time update
  input  logic             boot_load,
  input  addr_t            boot_pc,
  input  data_t            rec_status_in,
  input  data_t            rec_pc_in,
  output data_t            new_rec_status,
  output data_t            new_rec_pc,
  // run time
  input  logic             progress,
  output logic             ilp_en,
  output logic             wdt_en,
  output logic [CNT_W-1:0] wdt_period,
  output logic             ev_relax,
  // NVM master port (record update at run time)
  output mem_req_t         nvm_req,
  input  mem_rsp_t         nvm_rsp
);

  localparam int unsigned MAX_SHIFT = $clog2(WDT_INIT / WDT_MIN);

  logic       ilp_q, wdt_q, wr_pend_q;
  logic [4:0] shift_q;
  logic [7:0] good_q;

  // boot-time rules
  logic       rec_valid, rec_wdt, same;
  logic [4:0] rec_shift, n_shift;
  logic [7:0] rec_cnt, n_cnt;
  logic       n_wdt;

  always_comb begin
    rec_valid = rec_status_in[REC_VALID_BIT];
    rec_wdt   = rec_status_in[REC_WDT_BIT];
    rec_shift = rec_status_in[12:8];
    rec_cnt   = rec_status_in[7:0];
    same      = rec_valid && (rec_pc_in == boot_pc);
    n_cnt     = same ? ((rec_cnt == 8'hFF) ? rec_cnt : rec_cnt + 1'b1) : 8'd1;
    if (rec_valid && rec_wdt) begin
      n_wdt   = 1'b1;
      n_shift = (rec_shift >= 5'(MAX_SHIFT)) ? 5'(MAX_SHIFT) : rec_shift + 1'b1;
    end else if (n_cnt > 8'd2) begin
      n_wdt   = 1'b1;
      n_shift = '0;
    end else begin
      n_wdt   = 1'b0;
      n_shift = '0;
    end
    new_rec_status = '0;
    new_rec_status[REC_VALID_BIT] = 1'b1;
    new_rec_status[REC_WDT_BIT]   = n_wdt;
    new_rec_status[12:8]          = n_shift;
    new_rec_status[7:0]           = n_cnt;
    new_rec_pc = boot_pc;
  end

  logic relax;
  assign relax = progress && (good_q == 8'(GOOD_REGIONS - 1)) && (!ilp_q || wdt_q);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ilp_q     <= 1'b0;
      wdt_q     <= 1'b0;
      shift_q   <= '0;
      good_q    <= '0;
      wr_pend_q <= 1'b0;
    end else begin
      if (boot_load) begin
        ilp_q   <= 1'b0;
        wdt_q   <= n_wdt;
        shift_q <= n_shift;
        good_q  <= '0;
      end else begin
        if (progress && good_q != 8'(GOOD_REGIONS)) good_q <= good_q + 1'b1;
        if (relax) begin
          ilp_q     <= ILP_ALLOWED;
          wdt_q     <= 1'b0;
          shift_q   <= '0;
          wr_pend_q <= 1'b1;
        end
      end
      if (wr_pend_q && nvm_rsp.done) wr_pend_q <= 1'b0;
    end
  end

  always_comb begin
    nvm_req       = '0;
    nvm_req.req   = wr_pend_q;
    nvm_req.we    = 1'b1;
    nvm_req.addr  = ADAPT_REC_ADDR;
    nvm_req.wdata = data_t'(1) << REC_VALID_BIT;
  end

  assign ilp_en     = ilp_q;
  assign wdt_en     = wdt_q;
  assign ev_relax   = relax;
  assign wdt_period = (CNT_W'(WDT_INIT) >> shift_q) < CNT_W'(WDT_MIN)
                    ? CNT_W'(WDT_MIN) : (CNT_W'(WDT_INIT) >> shift_q);

endmodule
