// recovery_ctrl: power-on recovery sequence.
//
// Every power-on follows a power failure. The store buffer and all other
// volatile state are gone; NVM holds the primary data, the proxy buffer, the
// register-file checkpoint storage and the check bits. The controller reads
// the check-bit word and acts on it as the paper's recovery protocol says:
//   * isDrain set and isComplete clear: the failure hit phase 2 of a release.
//     The release engine is started in redo mode to copy the proxy buffer to
//     the primary locations again; the recovery PC saved by the finished
//     region is then part of the checkpoint storage.
//   * otherwise (failure inside a region, or inside phase 1): nothing in NVM
//     needs repair; whatever phase 1 had written to the proxy buffer is
//     ignored.
// It then reads the recovery PC from the checkpoint storage and the
// adaptation record, writes back the record updated by adapt_ctrl, loads the
// new policy and raises sys_ready. From then on the core restores its
// registers from the checkpoint storage and jumps to the recovery PC; that
// restore is ordinary core code and not part of this block.
//
// Interface: mem_req_t master port; rel_redo is a one-cycle pulse to the
// release engine and rel_done its completion; sys_ready stays high until the
// next reset. NREGS registers precede the recovery PC in the checkpoint
// storage. The record handling is this design's own.
module recovery_ctrl
  import cospec_pkg::*;
#(
  parameter int unsigned NREGS = 16
) (
  input  logic     clk,
  input  logic     rst_n,
  // release engine
  output logic     rel_redo,
  input  logic     rel_done,
  // adaptation record
  output addr_t    boot_pc,
  output data_t    rec_status,
  output data_t    rec_pc,
  input  data_t    new_rec_status,
  input  data_t    new_rec_pc,
  output logic     boot_load,
  // core
  output logic     sys_ready,
  output addr_t    recovery_pc,
  output logic     ev_redo,
  // NVM master port
  output mem_req_t nvm_req,
  input  mem_rsp_t nvm_rsp
);

  typedef enum logic [3:0] {
    B_RFLAG, B_REDO, B_WAITREL, B_RPC, B_RREC, B_RRPC, B_WRPC, B_WREC, B_LOAD, B_READY
  } boot_state_e;

  boot_state_e st_q;
  addr_t       pc_q;
  data_t       rs_q, rp_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q <= B_RFLAG;
      pc_q <= '0;
      rs_q <= '0;
      rp_q <= '0;
    end else begin
      unique case (st_q)
        B_RFLAG: if (nvm_rsp.done) begin
          if (nvm_rsp.rdata[FLAG_IS_DRAIN] && !nvm_rsp.rdata[FLAG_IS_COMPLETE])
            st_q <= B_REDO;
          else
            st_q <= B_RPC;
        end
        B_REDO:    st_q <= B_WAITREL;
        B_WAITREL: if (rel_done) st_q <= B_RPC;
        B_RPC: if (nvm_rsp.done) begin
          pc_q <= nvm_rsp.rdata;
          st_q <= B_RREC;
        end
        B_RREC: if (nvm_rsp.done) begin
          rs_q <= nvm_rsp.rdata;
          st_q <= B_RRPC;
        end
        B_RRPC: if (nvm_rsp.done) begin
          rp_q <= nvm_rsp.rdata;
          st_q <= B_WRPC;
        end
        B_WRPC:  if (nvm_rsp.done) st_q <= B_WREC;
        B_WREC:  if (nvm_rsp.done) st_q <= B_LOAD;
        B_LOAD:  st_q <= B_READY;
        B_READY: st_q <= B_READY;
        default: st_q <= B_RFLAG;
      endcase
    end
  end

  always_comb begin
    nvm_req = '0;
    unique case (st_q)
      B_RFLAG: begin nvm_req.req = 1'b1; nvm_req.addr = FLAG_ADDR; end
      B_RPC:   begin nvm_req.req = 1'b1; nvm_req.addr = RF_CKPT_BASE + addr_t'(4 * NREGS); end
      B_RREC:  begin nvm_req.req = 1'b1; nvm_req.addr = ADAPT_REC_ADDR; end
      B_RRPC:  begin nvm_req.req = 1'b1; nvm_req.addr = ADAPT_PC_ADDR; end
      B_WRPC:  begin
        nvm_req.req = 1'b1; nvm_req.we = 1'b1;
        nvm_req.addr = ADAPT_PC_ADDR; nvm_req.wdata = new_rec_pc;
      end
      B_WREC:  begin
        nvm_req.req = 1'b1; nvm_req.we = 1'b1;
        nvm_req.addr = ADAPT_REC_ADDR; nvm_req.wdata = new_rec_status;
      end
      default: ;
    endcase
  end

  assign rel_redo    = (st_q == B_REDO);
  assign ev_redo     = (st_q == B_REDO);
  assign boot_pc     = pc_q;
  assign rec_status  = rs_q;
  assign rec_pc      = rp_q;
  assign boot_load   = (st_q == B_LOAD);
  assign sys_ready   = (st_q == B_READY);
  assign recovery_pc = pc_q;

endmodule
