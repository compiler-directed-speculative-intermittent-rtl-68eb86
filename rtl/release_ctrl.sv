// release_ctrl: the two-phase, failure-atomic store-buffer release engine.
//
// When a region ends, its buffered stores must reach their primary NVM
// locations without a power failure ever leaving NVM half-updated. The
// release therefore goes through a proxy buffer in NVM:
//
//   Phase 1  Every entry of the selected half (or of both halves after a
//            watchdog checkpoint) is written to the proxy buffer as a
//            (target address, data) word pair, oldest first. The entry
//            count is written, then the check-bit word is written with
//            isDrain=1, isComplete=0.
//   Phase 2  Each proxy entry is copied to its target address, either by
//            reading the data word and writing it (dma_en=0), or by
//            programming the DMA channel once per entry (dma_en=1). Then the
//            check-bit word is written with isDrain=1, isComplete=1.
//
// A failure in phase 1 leaves the check bits as the previous release left
// them (both set, or both clear on a fresh NVM): recovery ignores the proxy
// buffer, and the primary data is untouched. A failure in phase 2 leaves
// isDrain=1, isComplete=0: recovery starts this engine with redo_p2, which
// reads the entry count back and repeats phase 2 (copies are idempotent).
// The two phases, the check bits and their meaning follow the paper. The
// proxy layout, the count word and keeping both bits in one word (so that
// one write sets isDrain and clears isComplete) are this design's choices.
//
// Interface: start with mask/first_half (or redo_p2) is accepted when busy
// is low; done pulses for one cycle at the end. The engine reads store
// buffer entries through the drain port (drn_idx/drn_entry) and uses the
// counts cnt[]; it does not empty the halves (the speculation controller
// does). in_phase1 / in_phase2 show progress.
//
// Timing: phase 1 costs two NVM writes per entry plus two; phase 2 costs,
// per entry, two reads and one write (or one read plus the DMA copy), plus
// one write (and one read of the count in a redo). Each access costs its
// latency plus one accept cycle; with 1-cycle reads and 3-cycle writes
// phase 2 takes 9n + 5 cycles copying itself and 7n + 5 with the DMA
// channel (4X DMA rate: 1-cycle DMA write), counted from its first cycle to
// the check-word write done.
module release_ctrl
  import cospec_pkg::*;
#(
  parameter int unsigned SB_ENTRIES = 40
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      dma_en,
  // commands
  input  logic      start,
  input  logic [1:0] mask,
  input  logic      first_half,
  input  logic      redo_p2,
  output logic      busy,
  output logic      done,
  output logic      in_phase1,
  output logic      in_phase2,
  // store buffer drain port
  input  logic [$clog2(SB_ENTRIES/2+1)-1:0] cnt [2],
  output logic [$clog2(SB_ENTRIES)-1:0] drn_idx,
  input  sb_entry_t drn_entry,
  // DMA channel
  output logic      dma_valid,
  output addr_t     dma_src,
  output addr_t     dma_dst,
  output logic [15:0] dma_len,
  input  logic      dma_done,
  // NVM master port
  output mem_req_t  nvm_req,
  input  mem_rsp_t  nvm_rsp
);

  localparam int unsigned HALF = SB_ENTRIES / 2;
  localparam int unsigned CW   = $clog2(HALF + 1);
  localparam int unsigned KW   = $clog2(SB_ENTRIES + 1);
  localparam int unsigned IW   = $clog2(SB_ENTRIES);

  typedef enum logic [3:0] {
    R_IDLE, P1_SEL, P1_WA, P1_WD, P1_CNT, P1_FLAG,
    P2_RCNT, P2_NEXT, P2_RA, P2_RD, P2_WR, P2_DMA_WAIT, P2_FLAG,
    R_DONE
  } rel_state_e;

  rel_state_e    st_q;
  logic [1:0]    mask_q;
  logic          half_q;     // half being drained
  logic          second_q;   // 1 once the second half of the order is reached
  logic [CW-1:0] i_q;        // entry index within the half
  logic [KW-1:0] k_q;        // proxy entries written / to copy
  logic [KW-1:0] j_q;        // proxy entry being copied
  addr_t         tgt_q;
  data_t         dat_q;

  logic [KW-1:0] cnt_rd;
  assign cnt_rd = (nvm_rsp.rdata > data_t'(SB_ENTRIES)) ? KW'(SB_ENTRIES) : KW'(nvm_rsp.rdata);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q     <= R_IDLE;
      mask_q   <= '0;
      half_q   <= 1'b0;
      second_q <= 1'b0;
      i_q      <= '0;
      k_q      <= '0;
      j_q      <= '0;
      tgt_q    <= '0;
      dat_q    <= '0;
    end else begin
      unique case (st_q)
        R_IDLE: begin
          if (redo_p2) begin
            st_q <= P2_RCNT;
          end else if (start) begin
            mask_q   <= mask;
            half_q   <= first_half;
            second_q <= 1'b0;
            i_q      <= '0;
            k_q      <= '0;
            st_q     <= P1_SEL;
          end
        end
        P1_SEL: begin
          if (mask_q[half_q] && i_q < cnt[half_q]) begin
            st_q <= P1_WA;
          end else if (!second_q) begin
            half_q   <= !half_q;
            second_q <= 1'b1;
            i_q      <= '0;
          end else begin
            st_q <= P1_CNT;
          end
        end
        P1_WA: if (nvm_rsp.done) st_q <= P1_WD;
        P1_WD: if (nvm_rsp.done) begin
          i_q  <= i_q + 1'b1;
          k_q  <= k_q + 1'b1;
          st_q <= P1_SEL;
        end
        P1_CNT:  if (nvm_rsp.done) st_q <= P1_FLAG;
        P1_FLAG: if (nvm_rsp.done) begin
          j_q  <= '0;
          st_q <= P2_NEXT;
        end
        P2_RCNT: if (nvm_rsp.done) begin
          k_q  <= cnt_rd;
          j_q  <= '0;
          st_q <= P2_NEXT;
        end
        P2_NEXT: st_q <= (j_q < k_q) ? P2_RA : P2_FLAG;
        P2_RA: if (nvm_rsp.done) begin
          tgt_q <= nvm_rsp.rdata;
          st_q  <= dma_en ? P2_DMA_WAIT : P2_RD;
        end
        P2_RD: if (nvm_rsp.done) begin
          dat_q <= nvm_rsp.rdata;
          st_q  <= P2_WR;
        end
        P2_WR: if (nvm_rsp.done) begin
          j_q  <= j_q + 1'b1;
          st_q <= P2_NEXT;
        end
        P2_DMA_WAIT: if (dma_done) begin
          j_q  <= j_q + 1'b1;
          st_q <= P2_NEXT;
        end
        P2_FLAG: if (nvm_rsp.done) st_q <= R_DONE;
        R_DONE:  st_q <= R_IDLE;
        default: st_q <= R_IDLE;
      endcase
    end
  end

  assign drn_idx = IW'(half_q ? HALF : 0) + IW'(i_q);

  always_comb begin
    nvm_req = '0;
    unique case (st_q)
      P1_WA: begin
        nvm_req.req = 1'b1; nvm_req.we = 1'b1;
        nvm_req.addr = proxy_addr_word(int'(k_q)); nvm_req.wdata = drn_entry.addr;
      end
      P1_WD: begin
        nvm_req.req = 1'b1; nvm_req.we = 1'b1;
        nvm_req.addr = proxy_data_word(int'(k_q)); nvm_req.wdata = drn_entry.data;
      end
      P1_CNT: begin
        nvm_req.req = 1'b1; nvm_req.we = 1'b1;
        nvm_req.addr = PROXY_CNT_ADDR; nvm_req.wdata = data_t'(k_q);
      end
      P1_FLAG: begin
        nvm_req.req = 1'b1; nvm_req.we = 1'b1;
        nvm_req.addr = FLAG_ADDR; nvm_req.wdata = data_t'(1) << FLAG_IS_DRAIN;
      end
      P2_RCNT: begin
        nvm_req.req = 1'b1; nvm_req.addr = PROXY_CNT_ADDR;
      end
      P2_RA: begin
        nvm_req.req = 1'b1; nvm_req.addr = proxy_addr_word(int'(j_q));
      end
      P2_RD: begin
        nvm_req.req = 1'b1; nvm_req.addr = proxy_data_word(int'(j_q));
      end
      P2_WR: begin
        nvm_req.req = 1'b1; nvm_req.we = 1'b1;
        nvm_req.addr = tgt_q; nvm_req.wdata = dat_q;
      end
      P2_FLAG: begin
        nvm_req.req = 1'b1; nvm_req.we = 1'b1;
        nvm_req.addr = FLAG_ADDR;
        nvm_req.wdata = (data_t'(1) << FLAG_IS_DRAIN) | (data_t'(1) << FLAG_IS_COMPLETE);
      end
      default: ;
    endcase
  end

  // the DMA command goes out in the cycle the target address arrives
  assign dma_valid = (st_q == P2_RA) && nvm_rsp.done && dma_en;
  assign dma_src   = proxy_data_word(int'(j_q));
  assign dma_dst   = nvm_rsp.rdata;
  assign dma_len   = 16'd1;

  assign busy      = (st_q != R_IDLE);
  assign done      = (st_q == R_DONE);
  assign in_phase1 = (st_q inside {P1_SEL, P1_WA, P1_WD, P1_CNT, P1_FLAG});
  assign in_phase2 = (st_q inside {P2_RCNT, P2_NEXT, P2_RA, P2_RD, P2_WR,
                                   P2_DMA_WAIT, P2_FLAG});

endmodule
