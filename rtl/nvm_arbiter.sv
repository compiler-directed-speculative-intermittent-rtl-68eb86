// nvm_arbiter: shares the single NVM port among the subsystem's masters.
//
// With ILP the release of one region runs while the core executes the next,
// so the core's NVM loads, the release engine, the DMA channel and, at
// power-on, the recovery controller all need the one NVM port. The paper
// does not describe this arbitration; this design uses a fixed priority,
// master 0 highest, and keeps a grant until the slave's done pulse, so
// every transfer is atomic at word level. Master order in the top level:
// 0 load path, 1 release engine, 2 DMA, 3 recovery, 4 adaptation record.
//
// Interface: per-master mem_req_t / mem_rsp_t (see cospec_pkg) and one
// mem_req_t / mem_rsp_t slave-side pair. Arbitration costs no cycle: a
// request from an idle arbiter reaches the slave in the same cycle.
module nvm_arbiter
  import cospec_pkg::*;
#(
  parameter int unsigned NM = 5
) (
  input  logic     clk,
  input  logic     rst_n,
  input  mem_req_t m_req [NM],
  output mem_rsp_t m_rsp [NM],
  output mem_req_t s_req,
  input  mem_rsp_t s_rsp
);

  localparam int unsigned GW = (NM > 1) ? $clog2(NM) : 1;

  logic          lock_q;
  logic [GW-1:0] gnt_q;
  logic [GW-1:0] sel;
  logic          any;

  // fixed-priority pick among current requests
  always_comb begin
    any = 1'b0;
    sel = '0;
    for (int m = NM - 1; m >= 0; m--) begin
      if (m_req[m].req) begin
        any = 1'b1;
        sel = GW'(m);
      end
    end
  end

  logic [GW-1:0] cur;
  assign cur = lock_q ? gnt_q : sel;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lock_q <= 1'b0;
      gnt_q  <= '0;
    end else if (lock_q) begin
      if (s_rsp.done) lock_q <= 1'b0;
    end else if (any && !s_rsp.done) begin
      lock_q <= 1'b1;
      gnt_q  <= sel;
    end
  end

  always_comb begin
    s_req = '0;
    if (lock_q || any) s_req = m_req[cur];
    for (int m = 0; m < NM; m++) begin
      m_rsp[m].rdata = s_rsp.rdata;
      m_rsp[m].done  = s_rsp.done && (lock_q || any) && (cur == GW'(m));
    end
  end

endmodule
