// nvm_model: behavioural model of the FRAM main memory (testbench only).
//
// Word-addressed array of WORDS 32-bit words (byte address bits [1:0] are
// ignored, addresses wrap). A request is accepted when the model is idle;
// done pulses RD_CYC cycles (read) or WR_CYC cycles (write) after
// acceptance. At 25 MHz the 20 ns read and 120 ns write of the modelled
// FRAM give RD_CYC=1 and WR_CYC=3. A write takes effect only at its done
// cycle, so a power loss (pwr_ok low) during a write leaves the old word:
// each word write is atomic. The contents survive pwr_ok low. Accesses are
// counted in n_rd / n_wr for the testbenches. Requests flagged dma are
// served DMA_X times faster (latency divided by DMA_X, rounded up, at least
// one cycle), modelling the MCU's DMA transfer rate; the default 4 is the
// paper's default DMA speed. n_dma counts those transfers.
module nvm_model
  import cospec_pkg::*;
#(
  parameter int unsigned WORDS  = 16384,
  parameter int unsigned RD_CYC = 1,
  parameter int unsigned WR_CYC = 3,
  parameter int unsigned DMA_X  = 4
) (
  input  logic     clk,
  input  logic     pwr_ok,
  input  mem_req_t req,
  output mem_rsp_t rsp
);

  localparam int unsigned AW = $clog2(WORDS);

  function automatic logic [7:0] lat(input logic we, input logic dma);
    int unsigned c;
    c = we ? WR_CYC : RD_CYC;
    if (dma) c = (c + DMA_X - 1) / DMA_X;
    if (c == 0) c = 1;
    return 8'(c);
  endfunction

  data_t       mem [WORDS];
  logic        busy;
  logic [7:0]  left;
  mem_req_t    cur;
  int unsigned n_rd, n_wr, n_dma;

  initial begin
    for (int i = 0; i < WORDS; i++) mem[i] = '0;
    busy = 1'b0;
    left = '0;
    cur  = '0;
    n_rd = 0;
    n_wr = 0;
    n_dma = 0;
  end

  always_ff @(posedge clk) begin
    if (!pwr_ok) begin
      busy <= 1'b0;
    end else if (!busy) begin
      if (req.req) begin
        busy <= 1'b1;
        cur  <= req;
        if (req.dma) n_dma <= n_dma + 1;
        left <= lat(req.we, req.dma);
      end
    end else begin
      left <= left - 1'b1;
      if (left == 8'd1) begin
        busy <= 1'b0;
        if (cur.we) begin
          mem[cur.addr[AW+1:2]] <= cur.wdata;
          n_wr <= n_wr + 1;
        end else begin
          n_rd <= n_rd + 1;
        end
      end
    end
  end

  assign rsp.done  = pwr_ok && busy && (left == 8'd1);
  assign rsp.rdata = mem[cur.addr[AW+1:2]];

  function automatic data_t peek(input addr_t a);
    return mem[a[AW+1:2]];
  endfunction

endmodule
