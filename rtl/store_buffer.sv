// store_buffer: the volatile store buffer (SB) split into two halves.
//
// Every committed store is held here rather than written to NVM, as if it
// were speculative, until its region ends without a power failure. The
// buffer is split into two halves of SB_ENTRIES/2 entries; consecutive
// regions use alternate halves (the half is chosen by st_half), so the half
// of a finished region can be released while the next region fills the
// other one. Because the buffer is volatile, a power failure (reset) simply
// empties it.
//
// Entries of a half are valid below that half's fill count; a half is
// emptied as a whole by inv[h]. Stores append at the fill count in one
// cycle. The compiler bounds a region to at most one half of stores; a
// store into a full half is dropped and raises the sticky overflow flag.
//
// Loads are served by a sequential search with one address comparator
// instead of a CAM: srch_start begins a scan of the current half from the
// youngest entry down, then of the other half (which may still hold the
// previous region's stores while they are being released). One entry is
// compared per cycle; the scan stops at the first (youngest) match. A scan
// over n valid entries ends after n+2 cycles at most with srch_done for
// one cycle and srch_hit/srch_data. The paper prescribes a sequential
// search and the 40-entry size; one comparison per cycle, the scan order and
// the overflow flag are this design's choices.
//
// The drain port (drn_idx, global index h*HALF+i) reads any entry
// combinationally for the release engine; cnt[h] gives the fill counts.
module store_buffer
  import cospec_pkg::*;
#(
  parameter int unsigned SB_ENTRIES = 40
) (
  input  logic      clk,
  input  logic      rst_n,
  // store append
  input  logic      st_valid,
  input  logic      st_half,
  input  addr_t     st_addr,
  input  data_t     st_data,
  // per-half fill counts and empty-half commands
  output logic [$clog2(SB_ENTRIES/2+1)-1:0] cnt [2],
  input  logic [1:0] inv,
  output logic      overflow,
  // sequential search
  input  logic      srch_start,
  input  addr_t     srch_addr,
  input  logic      srch_cur_half,
  output logic      srch_busy,
  output logic      srch_done,
  output logic      srch_hit,
  output data_t     srch_data,
  // drain read port
  input  logic [$clog2(SB_ENTRIES)-1:0] drn_idx,
  output sb_entry_t drn_entry
);

  localparam int unsigned HALF = SB_ENTRIES / 2;
  localparam int unsigned CW   = $clog2(HALF + 1);
  localparam int unsigned IW   = $clog2(SB_ENTRIES);

  sb_entry_t mem_q [SB_ENTRIES];
  logic [CW-1:0] cnt_q [2];

  // search state
  typedef enum logic [1:0] {S_IDLE, S_SCAN, S_DONE} srch_state_e;
  srch_state_e s_q;
  logic          s_half_q;   // half being scanned
  logic          s_other_q;  // 1 once the scan moved to the other half
  logic [CW-1:0] s_idx_q;    // entries left to compare in this half
  addr_t         s_addr_q;
  logic          s_hit_q;
  data_t         s_data_q;

  function automatic logic [IW-1:0] gidx(input logic h, input logic [CW-1:0] i);
    return IW'(h ? HALF : 0) + IW'(i);
  endfunction

  // storage and fill counts
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt_q[0] <= '0;
      cnt_q[1] <= '0;
      overflow <= 1'b0;
    end else begin
      for (int h = 0; h < 2; h++)
        if (inv[h]) cnt_q[h] <= '0;
      if (st_valid) begin
        if (cnt_q[st_half] == CW'(HALF)) begin
          overflow <= 1'b1;
        end else begin
          cnt_q[st_half] <= cnt_q[st_half] + 1'b1;
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (st_valid && cnt_q[st_half] != CW'(HALF))
      mem_q[gidx(st_half, cnt_q[st_half])] <= '{addr: st_addr, data: st_data};
  end

  // sequential search
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s_q       <= S_IDLE;
      s_half_q  <= 1'b0;
      s_other_q <= 1'b0;
      s_idx_q   <= '0;
      s_addr_q  <= '0;
      s_hit_q   <= 1'b0;
      s_data_q  <= '0;
    end else begin
      unique case (s_q)
        S_IDLE: if (srch_start) begin
          s_q       <= S_SCAN;
          s_half_q  <= srch_cur_half;
          s_other_q <= 1'b0;
          s_idx_q   <= cnt_q[srch_cur_half];
          s_addr_q  <= srch_addr;
          s_hit_q   <= 1'b0;
        end
        S_SCAN: begin
          if (s_idx_q == '0) begin
            if (!s_other_q) begin
              s_half_q  <= !s_half_q;
              s_other_q <= 1'b1;
              s_idx_q   <= cnt_q[!s_half_q];
            end else begin
              s_q <= S_DONE;
            end
          end else if (mem_q[gidx(s_half_q, s_idx_q - 1'b1)].addr == s_addr_q) begin
            s_hit_q  <= 1'b1;
            s_data_q <= mem_q[gidx(s_half_q, s_idx_q - 1'b1)].data;
            s_q      <= S_DONE;
          end else begin
            s_idx_q <= s_idx_q - 1'b1;
          end
        end
        S_DONE: s_q <= S_IDLE;
        default: s_q <= S_IDLE;
      endcase
    end
  end

  assign srch_busy = (s_q != S_IDLE);
  assign srch_done = (s_q == S_DONE);
  assign srch_hit  = s_hit_q;
  assign srch_data = s_data_q;

  assign drn_entry = mem_q[drn_idx];
  assign cnt[0]    = cnt_q[0];
  assign cnt[1]    = cnt_q[1];

  // A region never holds more stores than one half (compiler guarantee).
  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
    st_valid |-> cnt_q[st_half] != CW'(HALF))
    else $error("store buffer half %0d overflow", st_half);

endmodule
