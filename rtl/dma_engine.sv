// dma_engine: single-channel memory-to-memory copy engine.
//
// The release engine uses it for phase 2 of the store-buffer release: one
// channel is programmed once per proxy-buffer entry with the entry's data
// word as source and the entry's target address as destination, so the
// number of DMA operations equals the number of proxy entries, as the paper
// describes. The engine itself is the commodity MCU DMA; the paper gives its
// function only, and this is the simplest engine with that function: for
// each of len words it reads the source word and writes it to the
// destination; done pulses in the cycle the last write completes, so the
// caller can go on at once.
//
// Interface: cmd_valid with src/dst/len is accepted when busy is low. The
// NVM port is a mem_req_t master. Every transfer carries the dma flag, so
// the memory serves it at its DMA rate. Each access costs one cycle for
// the memory to accept it plus the memory's latency, so a word costs
// (1 + read latency) + (1 + write latency) cycles: 4 cycles with the 1-cycle
// DMA read and write of the reference memory (3-cycle normal write divided
// by the 4X DMA rate, rounded up), against 6 for a normal copy. done is
// high in the 4*len-th cycle after the command was accepted.
module dma_engine
  import cospec_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        cmd_valid,
  input  addr_t       cmd_src,
  input  addr_t       cmd_dst,
  input  logic [15:0] cmd_len,
  output logic        busy,
  output logic        done,
  output mem_req_t    nvm_req,
  input  mem_rsp_t    nvm_rsp
);

  typedef enum logic [1:0] {D_IDLE, D_RD, D_WR, D_DONE} dma_state_e;
  dma_state_e  st_q;
  addr_t       src_q, dst_q;
  logic [15:0] left_q;
  data_t       buf_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q   <= D_IDLE;
      src_q  <= '0;
      dst_q  <= '0;
      left_q <= '0;
      buf_q  <= '0;
    end else begin
      unique case (st_q)
        D_IDLE: if (cmd_valid) begin
          src_q  <= cmd_src;
          dst_q  <= cmd_dst;
          left_q <= cmd_len;
          st_q   <= (cmd_len == 16'd0) ? D_DONE : D_RD;
        end
        D_RD: if (nvm_rsp.done) begin
          buf_q <= nvm_rsp.rdata;
          st_q  <= D_WR;
        end
        D_WR: if (nvm_rsp.done) begin
          src_q  <= src_q + addr_t'(4);
          dst_q  <= dst_q + addr_t'(4);
          left_q <= left_q - 1'b1;
          st_q   <= (left_q == 16'd1) ? D_IDLE : D_RD;
        end
        D_DONE: st_q <= D_IDLE;
        default: st_q <= D_IDLE;
      endcase
    end
  end

  always_comb begin
    nvm_req       = '0;
    nvm_req.req   = (st_q == D_RD) || (st_q == D_WR);
    nvm_req.we    = (st_q == D_WR);
    nvm_req.dma   = 1'b1;
    nvm_req.addr  = (st_q == D_WR) ? dst_q : src_q;
    nvm_req.wdata = buf_q;
  end

  assign busy = (st_q != D_IDLE);
  // done comes with the last write's completion (D_DONE only for len 0)
  assign done = (st_q == D_DONE) || (st_q == D_WR && nvm_rsp.done && left_q == 16'd1);

endmodule
