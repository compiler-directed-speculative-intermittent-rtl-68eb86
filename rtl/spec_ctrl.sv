// spec_ctrl: region-boundary sequencer for power-failure speculation.
//
// The compiler cuts the program into regions of at most half a store buffer
// of stores and marks each region end. This controller decides, at each
// region end, which store-buffer half is released and when the core may go
// on:
//   * With ILP on, the half of the region that just ended is handed to the
//     release engine and the core continues at once with the next region in
//     the other half. The released half stays valid (loads can still be
//     forwarded from it) until the end of that next region. If that next
//     region ends while the release is still pending, the core waits; then
//     the old half is emptied and the roles swap again.
//   * With ILP off, the core waits at each region end until both release
//     phases are done, and the released half is then emptied.
//   * With the watchdog on and expired, the core is held at an instruction
//     boundary, all NREGS registers and the PC are written as stores into
//     the idle half (addresses of the register-file checkpoint storage),
//     both halves are released (region half first, so the register values
//     land last), then both are emptied and the core resumes.
// These sequences follow the paper. Handshakes, the one-cycle switch and the
// order of the two halves in a watchdog release are this design's own.
//
// Interface: the core holds rb_req (region-boundary instruction) until the
// one-cycle rb_done pulse. core_hold asks the core to stop issuing; the
// core answers with core_idle when it has no memory operation in flight.
// Core stores pass through this block to the store buffer, tagged with the
// current half; a store already issued when core_hold rises is still taken
// (the core keeps core_idle low for it), so the hold only has to wait for
// core_idle. Nothing runs before sys_ready (end of recovery).
module spec_ctrl
  import cospec_pkg::*;
#(
  parameter int unsigned NREGS = 16,
  parameter int unsigned SB_ENTRIES = 40
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       sys_ready,
  input  logic       ilp_en,
  input  logic       wdt_en,
  // core
  input  logic       rb_req,
  output logic       rb_done,
  output logic       core_hold,
  input  logic       core_idle,
  input  data_t      core_regs [NREGS],
  input  addr_t      core_pc,
  input  logic       core_st_valid,
  input  addr_t      core_st_addr,
  input  data_t      core_st_data,
  // store buffer
  output logic       cur_half,
  output logic       sb_st_valid,
  output logic       sb_st_half,
  output addr_t      sb_st_addr,
  output data_t      sb_st_data,
  output logic [1:0] sb_inv,
  // release engine
  output logic       rel_start,
  output logic [1:0] rel_mask,
  output logic       rel_first,
  input  logic       rel_busy,
  input  logic       rel_done,
  // watchdog
  input  logic       wdt_expired,
  output logic       wdt_restart,
  output logic       wdt_pause,
  // events
  output logic       ev_overlap,
  output logic       ev_ilp_wait,
  output logic       ev_noilp_wait,
  output logic       ev_timer_ckpt
);

  localparam int unsigned HALF = SB_ENTRIES / 2;
  localparam int unsigned RW   = $clog2(NREGS + 1);

  typedef enum logic [3:0] {
    C_IDLE, C_WAITPREV, C_SWITCH, C_REL_NOILP, C_WAITREL,
    C_HOLD, C_CKINV, C_CKPT, C_CKREL, C_CKWAIT
  } ctl_state_e;

  ctl_state_e    st_q;
  logic          cur_q;
  logic          other_live_q;   // other half still holds a released region
  logic [RW-1:0] r_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q         <= C_IDLE;
      cur_q        <= 1'b0;
      other_live_q <= 1'b0;
      r_q          <= '0;
    end else begin
      unique case (st_q)
        C_IDLE: if (sys_ready) begin
          if (rb_req) begin
            if (rel_busy)    st_q <= C_WAITPREV;
            else if (ilp_en) st_q <= C_SWITCH;
            else             st_q <= C_REL_NOILP;
          end else if (wdt_en && wdt_expired && !rel_busy) begin
            st_q <= C_HOLD;
          end
        end
        C_WAITPREV: if (!rel_busy) st_q <= C_IDLE;
        C_SWITCH: begin
          cur_q        <= !cur_q;
          other_live_q <= 1'b1;
          st_q         <= C_IDLE;
        end
        C_REL_NOILP: begin
          other_live_q <= 1'b0;
          st_q         <= C_WAITREL;
        end
        C_WAITREL: if (rel_done) st_q <= C_IDLE;
        C_HOLD: if (core_idle) st_q <= C_CKINV;
        C_CKINV: begin
          other_live_q <= 1'b0;
          r_q          <= '0;
          st_q         <= C_CKPT;
        end
        C_CKPT: begin
          r_q <= r_q + 1'b1;
          if (r_q == RW'(NREGS)) st_q <= C_CKREL;
        end
        C_CKREL: st_q <= C_CKWAIT;
        C_CKWAIT: if (rel_done) st_q <= C_IDLE;
        default: st_q <= C_IDLE;
      endcase
    end
  end

  // value checkpointed in step r_q: register r_q, or the PC after the last
  data_t reg_sel;
  always_comb begin
    reg_sel = core_pc;
    for (int i = 0; i < NREGS; i++)
      if (r_q == RW'(i)) reg_sel = core_regs[i];
  end

  // store path: core stores go to the current half, watchdog checkpoint
  // stores to the idle half
  always_comb begin
    if (st_q == C_CKPT) begin
      sb_st_valid = 1'b1;
      sb_st_half  = !cur_q;
      sb_st_addr  = RF_CKPT_BASE + addr_t'({r_q, 2'b00});
      sb_st_data  = reg_sel;
    end else begin
      sb_st_valid = core_st_valid;
      sb_st_half  = cur_q;
      sb_st_addr  = core_st_addr;
      sb_st_data  = core_st_data;
    end
  end

  always_comb begin
    sb_inv    = '0;
    rel_start = 1'b0;
    rel_mask  = '0;
    rel_first = cur_q;
    unique case (st_q)
      C_SWITCH: begin
        sb_inv[!cur_q]  = other_live_q;
        rel_start       = 1'b1;
        rel_mask[cur_q] = 1'b1;
      end
      C_REL_NOILP: begin
        sb_inv[!cur_q]  = other_live_q;
        rel_start       = 1'b1;
        rel_mask[cur_q] = 1'b1;
      end
      C_WAITREL: sb_inv[cur_q] = rel_done;
      C_CKINV:   sb_inv[!cur_q] = 1'b1;
      C_CKREL: begin
        rel_start = 1'b1;
        rel_mask  = 2'b11;
      end
      C_CKWAIT: sb_inv = {2{rel_done}};
      default: ;
    endcase
  end

  assign rb_done     = (st_q == C_SWITCH) || (st_q == C_WAITREL && rel_done);
  assign core_hold   = (st_q inside {C_HOLD, C_CKINV, C_CKPT, C_CKREL, C_CKWAIT}) || !sys_ready;
  assign cur_half    = cur_q;
  assign wdt_restart = rb_done || (st_q == C_CKWAIT && rel_done);
  assign wdt_pause   = rel_busy || core_hold;

  assign ev_overlap    = (st_q == C_SWITCH);
  assign ev_ilp_wait   = (st_q == C_WAITPREV) && ilp_en;
  assign ev_noilp_wait = (st_q == C_WAITREL);
  assign ev_timer_ckpt = (st_q == C_CKREL);

  initial begin
    assert (NREGS + 1 <= HALF)
      else $error("register checkpoint (%0d stores) does not fit one SB half", NREGS + 1);
  end

endmodule
