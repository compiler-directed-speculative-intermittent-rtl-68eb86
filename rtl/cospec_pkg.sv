// cospec_pkg: types and constants shared by the speculative store-buffer
// subsystem.
//
// The subsystem sits between an in-order core and a byte-addressable
// nonvolatile main memory (NVM, FRAM in the target MCU). All agents that
// touch the NVM use one request/response pair, mem_req_t / mem_rsp_t:
// a master raises req with we/addr/wdata and holds them unchanged until the
// slave answers with a one-cycle done pulse (rdata valid in that cycle for a
// read). The slave ignores req in the cycle it pulses done, so a master may
// present its next request straight after. The dma flag marks a transfer
// issued by the DMA channel; the MCU's memory system serves those at its
// faster DMA rate (the paper puts DMA copies at about 4X the speed of a
// normal read-write copy). How much faster is a property of the memory, not
// of this subsystem.
//
// The NVM map below places the proxy buffer, the register-file checkpoint
// storage, the two check bits and the adaptation record. The paper names
// these areas but gives no addresses; the addresses are this design's own.
// Addresses are byte addresses of 32-bit words (word granularity, so bit 0
// of a word address is free; the load path uses it as the SB-bypass mark).
package cospec_pkg;

  localparam int unsigned ADDR_W = 32;
  localparam int unsigned DATA_W = 32;

  typedef logic [ADDR_W-1:0] addr_t;
  typedef logic [DATA_W-1:0] data_t;

  typedef struct packed {
    logic  req;
    logic  we;
    logic  dma;
    addr_t addr;
    data_t wdata;
  } mem_req_t;

  typedef struct packed {
    logic  done;
    data_t rdata;
  } mem_rsp_t;

  // One buffered store.
  typedef struct packed {
    addr_t addr;
    data_t data;
  } sb_entry_t;

  // Event signals brought out of the top level for monitoring.
  typedef struct packed {
    logic ld_bypass;     // load skipped the SB search (address bit 0 set)
    logic ld_fwd;        // load served from the SB
    logic ld_miss;       // searched load missed the SB, read NVM
    logic ilp_overlap;   // release started while the core went on (ILP)
    logic ilp_wait;      // cycle stalled at a region end, previous release pending
    logic noilp_wait;    // cycle stalled at a region end, ILP off
    logic timer_ckpt;    // watchdog register checkpoint released
    logic redo_phase2;   // recovery redid phase 2
    logic policy_relax;  // ILP re-enabled after sustained progress
    logic rel_phase1;    // release engine in phase 1 (level)
    logic rel_phase2;    // release engine in phase 2 (level)
    logic rel_done;      // a release (both phases) finished
  } events_t;

  // ---- NVM map (this design's choice) ----
  // Register-file checkpoint storage: word i holds register i, the word after
  // the last register holds the recovery PC.
  localparam addr_t RF_CKPT_BASE   = 32'h0000_1000;
  // Check-bit word: bit 0 isDrain, bit 1 isComplete. Both bits share one
  // word so that setting isDrain clears isComplete in the same write.
  localparam addr_t FLAG_ADDR      = 32'h0000_1100;
  // Number of valid proxy entries written by the last phase 1.
  localparam addr_t PROXY_CNT_ADDR = 32'h0000_1104;
  // Adaptation record: status word and the recovery PC of the last failure.
  localparam addr_t ADAPT_REC_ADDR = 32'h0000_1108;
  localparam addr_t ADAPT_PC_ADDR  = 32'h0000_110C;
  // Proxy buffer: entry k is two words, target address then data.
  localparam addr_t PROXY_BASE     = 32'h0000_1200;

  localparam int unsigned FLAG_IS_DRAIN    = 0;
  localparam int unsigned FLAG_IS_COMPLETE = 1;

  // Adaptation record status word layout.
  localparam int unsigned REC_VALID_BIT = 31;
  localparam int unsigned REC_WDT_BIT   = 30;
  // bits [12:8] watchdog halving count, bits [7:0] failure count

  function automatic addr_t proxy_addr_word(input int unsigned k);
    return PROXY_BASE + addr_t'(8 * k);
  endfunction

  function automatic addr_t proxy_data_word(input int unsigned k);
    return PROXY_BASE + addr_t'(8 * k + 4);
  endfunction

endpackage
