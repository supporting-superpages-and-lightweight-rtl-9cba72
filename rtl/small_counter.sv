// small_counter: stage-2 access counting for the top-N hot superpages.
//
// After stage 1, the OS loads the PSNs of the N hottest superpages into the
// N_SLOTS slots (ld_*). Each slot owns PAGES 16-bit counters, one per 4 KB
// page of its superpage. Every NVM reference is compared with all slot PSNs
// in parallel; on a match, the counter of its small page (PA bits 20..12)
// gains RD_WEIGHT or WR_WEIGHT. A counter is a 15-bit value plus an
// overflow flag (bit 15): when the value would pass 32767 it stays at 32767
// and the flag is set, marking the page (and superpage) as certainly hot.
// The OS reads a counter with rd_* (slot, page); the value comes one cycle
// later and the counter is cleared, ready for the next interval.
//
// After reset, the counter array is cleared over N_SLOTS*PAGES cycles
// (init_done low); the slots start empty.
//
// From the source: a 4-byte PSN and 512 two-byte counters per monitored
// superpage, 15-bit value with 1-bit overflow flag, N = 100. This design's
// choices: the CAM-style parallel PSN match, weights (as in stage 1),
// saturation of the value under the flag, and clear-on-read.
module small_counter
  import rainbow_pkg::*;
#(
  parameter int unsigned N_SLOTS   = 100,
  parameter int unsigned PAGES     = 512,
  parameter int unsigned RD_WEIGHT = 1,
  parameter int unsigned WR_WEIGHT = 8
) (
  input  logic                       clk,
  input  logic                       rst_n,
  output logic                       init_done,
  // NVM reference stream
  input  logic                       acc_valid,
  input  logic [SP_W-1:0]            acc_psn,
  input  logic [$clog2(PAGES)-1:0]   acc_idx,
  input  logic                       acc_write,
  output logic                       acc_match,
  // OS: load a slot
  input  logic                       ld_valid,
  input  logic [$clog2(N_SLOTS)-1:0] ld_slot,
  input  logic [SP_W-1:0]            ld_psn,
  input  logic                       ld_enable,
  // OS: read and clear a counter
  input  logic                       rd_valid,
  input  logic [$clog2(N_SLOTS)-1:0] rd_slot,
  input  logic [$clog2(PAGES)-1:0]   rd_idx,
  output logic                       rd_resp_valid,
  output logic [15:0]                rd_data
);
  localparam int unsigned CELLS  = N_SLOTS * PAGES;
  localparam int unsigned CELL_W = $clog2(CELLS);
  localparam int unsigned SLOT_W = $clog2(N_SLOTS);

  logic [SP_W-1:0]    slot_psn_q [N_SLOTS];
  logic [N_SLOTS-1:0] slot_en_q;
  logic [15:0]        cnt_mem [CELLS];

  logic [CELL_W-1:0] init_idx;

  // Parallel PSN match.
  logic [SLOT_W-1:0] mslot;
  always_comb begin
    acc_match = 1'b0;
    mslot     = '0;
    for (int s = 0; s < N_SLOTS; s++)
      if (slot_en_q[s] && slot_psn_q[s] == acc_psn) begin
        acc_match = 1'b1;
        mslot     = SLOT_W'(s);
      end
  end

  logic [CELL_W-1:0] acell, rcell;
  assign acell = CELL_W'(mslot * PAGES + acc_idx);
  assign rcell = CELL_W'(rd_slot * PAGES + rd_idx);

  logic [15:0] cur, nxt;
  logic [15:0] weight;
  always_comb begin
    logic [16:0] sum;
    weight = acc_write ? 16'(WR_WEIGHT) : 16'(RD_WEIGHT);
    cur    = (rd_valid && rcell == acell) ? 16'h0 : cnt_mem[acell];
    sum    = {2'b00, cur[14:0]} + {1'b0, weight};
    if (sum > 17'h7FFF) nxt = 16'hFFFF;           // flag set, value held at max
    else                nxt = {cur[15], sum[14:0]};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      init_done     <= 1'b0;
      init_idx      <= '0;
      slot_en_q     <= '0;
      rd_resp_valid <= 1'b0;
      rd_data       <= '0;
    end else begin
      if (!init_done) begin
        init_idx <= init_idx + 1'b1;
        if (32'(init_idx) == CELLS - 1) init_done <= 1'b1;
      end
      if (ld_valid) slot_en_q[ld_slot] <= ld_enable;
      rd_resp_valid <= rd_valid && init_done;
      if (rd_valid && init_done) rd_data <= cnt_mem[rcell];
    end
  end

  always_ff @(posedge clk) begin
    if (ld_valid) slot_psn_q[ld_slot] <= ld_psn;
  end

  always_ff @(posedge clk) begin
    if (!init_done) begin
      cnt_mem[init_idx] <= '0;
    end else begin
      if (rd_valid) cnt_mem[rcell] <= '0;
      if (acc_valid && acc_match) cnt_mem[acell] <= nxt;
    end
  end

endmodule
