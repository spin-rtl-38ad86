// me_table: list of matching entries (MEs) with header-packet matching.
//
// Every message is steered by the first ME, in list order, whose portal
// index equals the packet's and whose match bits equal the packet's match
// bits in every position not set in the ME's ignore bits (64-bit masked
// match, as in Portals 4). An ME carries the three sPIN handlers, the HPU
// memory they run in and the host memory they may reach. Only header
// packets search the list; later packets use the channel CAM.
//
// Interface: the host writes an entry with wr_valid/wr_idx/wr_me (list
// order is index order). A lookup is started with lk_valid while
// lk_busy is low; lk_done is high for one cycle MATCH_CYCLES later with
// lk_hit, lk_idx and a copy of the entry. unlink_valid removes an entry
// when its message completes (the scheduler skips this for PENDING).
//
// Timing: the compare is done on all entries at once when the lookup is
// accepted; the result is held back to MATCH_CYCLES, the paper's 30 ns
// header-match time. An entry written or unlinked while a lookup is in
// flight does not change that lookup's result. The parallel compare is
// this design's choice; the paper gives only the match time.
module me_table
  import spin_pkg::*;
#(
  parameter int unsigned N_ME    = NUM_ME,
  parameter int unsigned LATENCY = MATCH_CYCLES
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // host side
  input  logic                     wr_valid,
  input  logic [$clog2(N_ME)-1:0]  wr_idx,
  input  me_t                      wr_me,
  input  logic                     unlink_valid,
  input  logic [$clog2(N_ME)-1:0]  unlink_idx,
  // lookup
  input  logic                     lk_valid,
  input  logic [PTW-1:0]           lk_pt,
  input  logic [63:0]              lk_bits,
  output logic                     lk_busy,
  output logic                     lk_done,
  output logic                     lk_hit,
  output logic [$clog2(N_ME)-1:0]  lk_idx,
  output me_t                      lk_me,
  // read-back for the host
  input  logic [$clog2(N_ME)-1:0]  rd_idx,
  output me_t                      rd_me
);
  localparam int unsigned IW = $clog2(N_ME);

  me_t                 tbl [N_ME];
  logic                hit_c;
  logic [IW-1:0]       idx_c;
  logic [15:0]         wait_cnt;

  // priority compare over all entries
  always_comb begin
    hit_c = 1'b0;
    idx_c = '0;
    for (int i = N_ME - 1; i >= 0; i--) begin
      if (tbl[i].valid && tbl[i].pt_index == lk_pt &&
          ((tbl[i].match_bits ^ lk_bits) & ~tbl[i].ignore_bits) == 64'd0) begin
        hit_c = 1'b1;
        idx_c = IW'(i);
      end
    end
  end

  assign rd_me = tbl[rd_idx];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < N_ME; i++) tbl[i] <= '0;
      lk_busy  <= 1'b0;
      lk_done  <= 1'b0;
      lk_hit   <= 1'b0;
      lk_idx   <= '0;
      lk_me    <= '0;
      wait_cnt <= '0;
    end else begin
      lk_done <= 1'b0;
      if (lk_valid && !lk_busy) begin
        lk_hit  <= hit_c;
        lk_idx  <= idx_c;
        lk_me   <= tbl[idx_c];
        if (LATENCY <= 1) lk_done <= 1'b1;
        else begin
          lk_busy  <= 1'b1;
          wait_cnt <= 16'(LATENCY - 2);
        end
      end else if (lk_busy) begin
        if (wait_cnt == 0) begin
          lk_busy <= 1'b0;
          lk_done <= 1'b1;
        end else wait_cnt <= wait_cnt - 1'b1;
      end
      if (unlink_valid) tbl[unlink_idx].valid <= 1'b0;
      if (wr_valid)     tbl[wr_idx]           <= wr_me;
    end
  end
endmodule
