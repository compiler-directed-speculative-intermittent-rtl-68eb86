// cospec_top: memory-side subsystem for speculative intermittent computation.
//
// This is everything the scheme adds between an unmodified in-order core
// and its nonvolatile main memory: the two-half store buffer, the load path
// with compiler-directed SB bypass, the region-boundary sequencer (ILP
// overlap, waits, watchdog register checkpoint), the two-phase release
// engine with its DMA channel, the watchdog timer, the adaptive policy, the
// power-on recovery controller and an arbiter for the single NVM port.
//
//   core ports --> spec_ctrl --(stores)--> store_buffer <--(search)-- load_path
//                     |  \                     | drain                  |
//                     |   \--> release_ctrl <--/                        |
//                     |            |   \--> dma_engine                  |
//   watchdog_timer <--/            |            |                       |
//   adapt_ctrl <--> recovery_ctrl  |            |                       |
//        |              |          v            v                       v
//        +--------------+------> nvm_arbiter (0 load, 1 release, 2 DMA,
//                                  3 recovery, 4 record) --> NVM port
//
// A power failure is a reset (rst_n low): all state here is volatile, as in
// the paper; NVM keeps its contents. After reset the recovery controller runs
// first and raises sys_ready; the core then restores its registers from the
// checkpoint storage (words RF_CKPT_BASE + 4*i, recovery PC after the last
// register; recovery_pc gives that PC) and resumes.
//
// Core interface (this design's own handshakes):
//   st_valid/st_addr/st_data  one store per cycle; none once core_idle
//                             has been given to a core_hold
//   ld_req/ld_addr            held until the one-cycle ld_done with ld_data;
//                             ld_addr bit 0 set marks an SB-bypass load
//   rb_req                    region-boundary instruction, held until rb_done
//   core_hold / core_idle     stop request for the watchdog checkpoint and
//                             the core's answer; core_regs/core_pc are read
//                             while holding
// NVM interface: one mem_req_t / mem_rsp_t port (see cospec_pkg).
//
// The default configuration is the paper's main one: 40-entry SB, 16
// registers, ILP allowed, DMA used for phase 2.
module cospec_top
  import cospec_pkg::*;
#(
  parameter int unsigned SB_ENTRIES   = 40,
  parameter int unsigned NREGS        = 16,
  parameter bit          USE_ILP      = 1'b1,
  parameter bit          USE_DMA      = 1'b1,
  parameter int unsigned WDT_CNT_W    = 24,
  parameter int unsigned WDT_INIT     = 16384,
  parameter int unsigned WDT_MIN      = 256,
  parameter int unsigned GOOD_REGIONS = 16
) (
  input  logic     clk,
  input  logic     rst_n,
  // core
  output logic     sys_ready,
  output addr_t    recovery_pc,
  input  logic     st_valid,
  input  addr_t    st_addr,
  input  data_t    st_data,
  input  logic     ld_req,
  input  addr_t    ld_addr,
  output logic     ld_done,
  output data_t    ld_data,
  input  logic     rb_req,
  output logic     rb_done,
  output logic     core_hold,
  input  logic     core_idle,
  input  data_t    core_regs [NREGS],
  input  addr_t    core_pc,
  // NVM
  output mem_req_t nvm_req,
  input  mem_rsp_t nvm_rsp,
  // status
  output logic     ilp_en,
  output logic     wdt_en,
  output logic     sb_overflow,
  output events_t  events
);

  localparam int unsigned NM = 5;
  localparam int unsigned CW = $clog2(SB_ENTRIES / 2 + 1);
  localparam int unsigned IW = $clog2(SB_ENTRIES);

  mem_req_t m_req [NM];
  mem_rsp_t m_rsp [NM];

  // store buffer wires
  logic          sb_st_valid, sb_st_half, cur_half;
  addr_t         sb_st_addr;
  data_t         sb_st_data;
  logic [CW-1:0] sb_cnt [2];
  logic [1:0]    sb_inv;
  logic          srch_start, srch_cur_half, srch_busy, srch_done, srch_hit;
  addr_t         srch_addr;
  data_t         srch_data;
  logic [IW-1:0] drn_idx;
  sb_entry_t     drn_entry;

  // release / DMA wires
  logic        rel_start, rel_first, rel_redo, rel_busy, rel_done, rel_p1, rel_p2;
  logic [1:0]  rel_mask;
  logic        dma_valid, dma_busy, dma_done;
  addr_t       dma_src, dma_dst;
  logic [15:0] dma_len;

  // watchdog / policy / recovery wires
  logic                 wdt_expired, wdt_restart, wdt_pause;
  logic [WDT_CNT_W-1:0] wdt_period;
  addr_t                boot_pc;
  data_t                rec_status, rec_pc, new_rec_status, new_rec_pc;
  logic                 boot_load;

  logic ev_bypass, ev_fwd, ev_miss, ev_overlap, ev_ilp_wait, ev_noilp_wait;
  logic ev_timer_ckpt, ev_redo, ev_relax;

  store_buffer #(.SB_ENTRIES(SB_ENTRIES)) u_sb (
    .clk, .rst_n,
    .st_valid (sb_st_valid), .st_half (sb_st_half),
    .st_addr  (sb_st_addr),  .st_data (sb_st_data),
    .cnt      (sb_cnt), .inv (sb_inv), .overflow (sb_overflow),
    .srch_start, .srch_addr, .srch_cur_half, .srch_busy, .srch_done, .srch_hit, .srch_data,
    .drn_idx, .drn_entry
  );

  load_path u_ld (
    .clk, .rst_n,
    .ld_req, .ld_addr, .cur_half, .ld_done, .ld_data,
    .srch_start, .srch_addr, .srch_cur_half, .srch_done, .srch_hit, .srch_data,
    .nvm_req (m_req[0]), .nvm_rsp (m_rsp[0]),
    .ev_bypass, .ev_fwd, .ev_miss
  );

  spec_ctrl #(.NREGS(NREGS), .SB_ENTRIES(SB_ENTRIES)) u_spec (
    .clk, .rst_n, .sys_ready, .ilp_en, .wdt_en,
    .rb_req, .rb_done, .core_hold, .core_idle, .core_regs, .core_pc,
    .core_st_valid (st_valid), .core_st_addr (st_addr), .core_st_data (st_data),
    .cur_half, .sb_st_valid, .sb_st_half, .sb_st_addr, .sb_st_data, .sb_inv,
    .rel_start, .rel_mask, .rel_first, .rel_busy, .rel_done,
    .wdt_expired, .wdt_restart, .wdt_pause,
    .ev_overlap, .ev_ilp_wait, .ev_noilp_wait, .ev_timer_ckpt
  );

  release_ctrl #(.SB_ENTRIES(SB_ENTRIES)) u_rel (
    .clk, .rst_n, .dma_en (USE_DMA),
    .start (rel_start), .mask (rel_mask), .first_half (rel_first), .redo_p2 (rel_redo),
    .busy (rel_busy), .done (rel_done), .in_phase1 (rel_p1), .in_phase2 (rel_p2),
    .cnt (sb_cnt), .drn_idx, .drn_entry,
    .dma_valid, .dma_src, .dma_dst, .dma_len, .dma_done,
    .nvm_req (m_req[1]), .nvm_rsp (m_rsp[1])
  );

  dma_engine u_dma (
    .clk, .rst_n,
    .cmd_valid (dma_valid), .cmd_src (dma_src), .cmd_dst (dma_dst), .cmd_len (dma_len),
    .busy (dma_busy), .done (dma_done),
    .nvm_req (m_req[2]), .nvm_rsp (m_rsp[2])
  );

  recovery_ctrl #(.NREGS(NREGS)) u_rec (
    .clk, .rst_n,
    .rel_redo, .rel_done,
    .boot_pc, .rec_status, .rec_pc, .new_rec_status, .new_rec_pc, .boot_load,
    .sys_ready, .recovery_pc, .ev_redo,
    .nvm_req (m_req[3]), .nvm_rsp (m_rsp[3])
  );

  adapt_ctrl #(
    .CNT_W (WDT_CNT_W), .WDT_INIT (WDT_INIT), .WDT_MIN (WDT_MIN),
    .GOOD_REGIONS (GOOD_REGIONS), .ILP_ALLOWED (USE_ILP)
  ) u_adapt (
    .clk, .rst_n,
    .boot_load, .boot_pc, .rec_status_in (rec_status), .rec_pc_in (rec_pc),
    .new_rec_status, .new_rec_pc,
    .progress (rel_done && sys_ready), .ilp_en, .wdt_en, .wdt_period, .ev_relax,
    .nvm_req (m_req[4]), .nvm_rsp (m_rsp[4])
  );

  watchdog_timer #(.CNT_W(WDT_CNT_W)) u_wdt (
    .clk, .rst_n, .en (wdt_en), .pause (wdt_pause), .restart (wdt_restart),
    .period (wdt_period), .expired (wdt_expired)
  );

  nvm_arbiter #(.NM(NM)) u_arb (
    .clk, .rst_n, .m_req, .m_rsp, .s_req (nvm_req), .s_rsp (nvm_rsp)
  );

  always_comb begin
    events              = '0;
    events.ld_bypass    = ev_bypass;
    events.ld_fwd       = ev_fwd;
    events.ld_miss      = ev_miss;
    events.ilp_overlap  = ev_overlap;
    events.ilp_wait     = ev_ilp_wait;
    events.noilp_wait   = ev_noilp_wait;
    events.timer_ckpt   = ev_timer_ckpt;
    events.redo_phase2  = ev_redo;
    events.policy_relax = ev_relax;
    events.rel_phase1   = rel_p1;
    events.rel_phase2   = rel_p2;
    events.rel_done     = rel_done;
  end

endmodule
