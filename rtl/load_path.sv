// load_path: serves the core's loads from the store buffer or from NVM.
//
// The compiler marks a load that cannot alias any store of the current or
// the previous region by setting bit 0 of its (word-aligned) address. Such
// a load skips the store-buffer search: the bit is cleared and the word is
// read from NVM directly. Any other load searches the store buffer (current
// half, then the half of the previous region, whose entries stay valid while
// they are being released) and, at the same time, reads the word from NVM;
// when both have finished, a hit returns the buffered data and a miss the
// NVM word. Running the two side by side is what lets the search cost
// nothing as long as it ends within the NVM access time, as the paper
// argues. A miss in both halves means NVM already holds the latest value:
// a release only writes addresses that are still in the buffer. The
// marking scheme and the search order follow the paper; the handshakes are
// this design's own.
//
// Core side: the core raises ld_req with ld_addr and holds both until the
// one-cycle ld_done pulse, which carries ld_data. NVM side: a mem_req_t
// master port (see cospec_pkg). Event pulses ev_bypass / ev_fwd / ev_miss
// count how each load was served.
//
// Timing: a bypass load takes the NVM read latency plus 2 cycles; a searched
// load takes the longer of the store-buffer scan (one entry per cycle) and
// the NVM read, plus 2 cycles. The NVM read of a searched load is always
// completed, even after a hit, because a started NVM request may not be
// withdrawn.
module load_path
  import cospec_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  // core load port
  input  logic     ld_req,
  input  addr_t    ld_addr,
  input  logic     cur_half,
  output logic     ld_done,
  output data_t    ld_data,
  // store-buffer search port
  output logic     srch_start,
  output addr_t    srch_addr,
  output logic     srch_cur_half,
  input  logic     srch_done,
  input  logic     srch_hit,
  input  data_t    srch_data,
  // NVM master port
  output mem_req_t nvm_req,
  input  mem_rsp_t nvm_rsp,
  // events
  output logic     ev_bypass,
  output logic     ev_fwd,
  output logic     ev_miss
);

  typedef enum logic [2:0] {L_IDLE, L_SEARCH, L_NVM, L_RESP} ld_state_e;
  ld_state_e st_q;
  addr_t     addr_q;
  data_t     data_q;
  logic      s_ok_q, n_ok_q, hit_q;   // search / NVM read finished, hit
  data_t     sdata_q, ndata_q;

  // results of this cycle or of an earlier one
  logic  s_fin, n_fin, hit_now;
  data_t sdata_now, ndata_now;
  assign s_fin     = s_ok_q || srch_done;
  assign n_fin     = n_ok_q || nvm_rsp.done;
  assign hit_now   = s_ok_q ? hit_q : srch_hit;
  assign sdata_now = s_ok_q ? sdata_q : srch_data;
  assign ndata_now = n_ok_q ? ndata_q : nvm_rsp.rdata;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q    <= L_IDLE;
      addr_q  <= '0;
      data_q  <= '0;
      s_ok_q  <= 1'b0;
      n_ok_q  <= 1'b0;
      hit_q   <= 1'b0;
      sdata_q <= '0;
      ndata_q <= '0;
    end else begin
      unique case (st_q)
        L_IDLE: if (ld_req) begin
          addr_q <= {ld_addr[ADDR_W-1:1], 1'b0};
          s_ok_q <= 1'b0;
          n_ok_q <= 1'b0;
          st_q   <= ld_addr[0] ? L_NVM : L_SEARCH;
        end
        L_SEARCH: begin
          if (srch_done) begin
            s_ok_q  <= 1'b1;
            hit_q   <= srch_hit;
            sdata_q <= srch_data;
          end
          if (nvm_rsp.done) begin
            n_ok_q  <= 1'b1;
            ndata_q <= nvm_rsp.rdata;
          end
          if (s_fin && n_fin) begin
            data_q <= hit_now ? sdata_now : ndata_now;
            st_q   <= L_RESP;
          end
        end
        L_NVM: if (nvm_rsp.done) begin
          data_q <= nvm_rsp.rdata;
          st_q   <= L_RESP;
        end
        L_RESP: st_q <= L_IDLE;
        default: st_q <= L_IDLE;
      endcase
    end
  end

  assign srch_start    = (st_q == L_IDLE) && ld_req && !ld_addr[0];
  assign srch_addr     = {ld_addr[ADDR_W-1:1], 1'b0};
  assign srch_cur_half = cur_half;

  always_comb begin
    nvm_req       = '0;
    nvm_req.req   = (st_q == L_NVM) || (st_q == L_SEARCH && !n_ok_q);
    nvm_req.we    = 1'b0;
    nvm_req.addr  = addr_q;
  end

  assign ld_done = (st_q == L_RESP);
  assign ld_data = data_q;

  assign ev_bypass = (st_q == L_IDLE) && ld_req && ld_addr[0];
  assign ev_fwd    = (st_q == L_SEARCH) && srch_done && srch_hit;
  assign ev_miss   = (st_q == L_SEARCH) && srch_done && !srch_hit;

endmodule
