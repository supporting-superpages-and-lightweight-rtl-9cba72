// bitmap_cache: the migration bitmap cache of the hybrid memory controller.
//
// Every 2 MB NVM superpage has a 512-bit migration bitmap, one flag per
// 4 KB page, set while that page is cached in DRAM. All bitmaps live in
// main memory (64 bytes per superpage at BITMAP_BASE + PSN*64); this cache
// keeps those of recently used superpages. It is WAYS-way set-associative
// with ENTRIES entries; each entry is a PSN tag and a 512-bit bitmap, and
// physical-address bits 20..12 (q_idx) select the flag inside the bitmap.
//
// Operation: a request (q_valid & q_ready) names a superpage, a small-page
// index and an operation: BM_LOOKUP returns the flag, BM_SET / BM_CLEAR
// change it (and return the new value). The set is PSN mod SETS; all ways
// are compared. On a hit the response (r_valid, r_flag, r_hit=1, r_id)
// comes exactly HIT_LATENCY cycles after the request was accepted. On a
// miss the victim (first invalid way, else the set's round-robin way) is
// written back to memory if dirty, the superpage's bitmap line is read, and
// the response follows the fill with r_hit=0. Set/clear mark the line dirty.
// One request is handled at a time (q_ready is low while busy).
//
// Memory side: m_req_* carries one 64-byte line read or write (valid/ready);
// reads return on m_resp_*; a write is complete when accepted.
//
// From the source: 8 ways, 4000 entries (so 500 sets), PSN tags, 512-bit
// bitmaps, bits 20..12 as flag index, 9-cycle latency, whole bitmaps kept in
// main memory, fill on a superpage-translation miss. This design's choices:
// PSN-mod-500 set index, round-robin replacement, write-back of dirty lines,
// the bitmap's memory address and the one-at-a-time request handling.
module bitmap_cache
  import rainbow_pkg::*;
#(
  parameter int unsigned     ENTRIES     = 4000,
  parameter int unsigned     WAYS        = 8,
  parameter int unsigned     HIT_LATENCY = 9,
  parameter logic [PA_W-1:0] BITMAP_BASE = 48'h0000_F000_0000
) (
  input  logic              clk,
  input  logic              rst_n,
  // request / response
  input  logic              q_valid,
  output logic              q_ready,
  input  bm_op_e            q_op,
  input  logic [SP_W-1:0]   q_psn,
  input  logic [SIDX_W-1:0] q_idx,
  input  logic [ID_W-1:0]   q_id,
  output logic              r_valid,
  output logic              r_flag,
  output logic              r_hit,
  output logic [ID_W-1:0]   r_id,
  // bitmap backing store
  output logic              m_req_valid,
  input  logic              m_req_ready,
  output logic [PA_W-1:0]   m_req_addr,
  output logic              m_req_we,
  output logic [LINE_W-1:0] m_req_wdata,
  input  logic              m_resp_valid,
  input  logic [LINE_W-1:0] m_resp_data
);
  localparam int unsigned SETS  = ENTRIES / WAYS;
  localparam int unsigned SET_W = $clog2(SETS);
  localparam int unsigned WAY_W = $clog2(WAYS);
  localparam int unsigned LAT_W = $clog2(HIT_LATENCY + 1) + 1;

  typedef enum logic [2:0] {C_IDLE, C_TAG, C_HITWAIT, C_WB, C_FETCH, C_FWAIT, C_APPLY} cstate_e;

  // Storage: one tag word per set, one bitmap word per entry.
  logic [WAYS-1:0][SP_W-1:0] tag_mem [SETS];
  logic [LINE_W-1:0]         bm_mem  [SETS*WAYS];
  logic [WAYS-1:0]           valid_q [SETS];
  logic [WAYS-1:0]           dirty_q [SETS];
  logic [WAY_W-1:0]          rr_q    [SETS];

  cstate_e           state_q;
  bm_op_e            op_q;
  logic [SP_W-1:0]   psn_q;
  logic [SIDX_W-1:0] idx_q;
  logic [ID_W-1:0]   id_q;
  logic [SET_W-1:0]  set_q;
  logic [WAY_W-1:0]  way_q;
  logic              hit_q;
  logic [LAT_W-1:0]  lat_q;

  assign q_ready = state_q == C_IDLE;

  // Tag compare (state C_TAG) and victim choice.
  logic [WAYS-1:0][SP_W-1:0] set_tags;
  logic             tag_hit;
  logic [WAY_W-1:0] hit_way, victim;
  always_comb begin
    set_tags = tag_mem[set_q];
    tag_hit  = 1'b0;
    hit_way  = '0;
    victim   = rr_q[set_q];
    for (int w = WAYS-1; w >= 0; w--)
      if (!valid_q[set_q][w]) victim = WAY_W'(w);
    for (int w = 0; w < WAYS; w++)
      if (valid_q[set_q][w] && set_tags[w] == psn_q) begin
        tag_hit = 1'b1;
        hit_way = WAY_W'(w);
      end
  end

  logic [$clog2(SETS*WAYS)-1:0] entry;
  assign entry = ($bits(entry))'(set_q * WAYS + way_q);
  logic [LINE_W-1:0] cur_line, new_line;
  assign cur_line = bm_mem[entry];
  always_comb begin
    new_line = cur_line;
    if (op_q == BM_SET)   new_line[idx_q] = 1'b1;
    if (op_q == BM_CLEAR) new_line[idx_q] = 1'b0;
  end

  // Memory requests: write-back of the victim, then read of the new bitmap.
  assign m_req_valid = state_q == C_WB || state_q == C_FETCH;
  assign m_req_we    = state_q == C_WB;
  assign m_req_addr  = (state_q == C_WB)
                     ? BITMAP_BASE + PA_W'({set_tags[way_q], 6'b0})
                     : BITMAP_BASE + PA_W'({psn_q, 6'b0});
  assign m_req_wdata = cur_line;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= C_IDLE;
      op_q    <= BM_LOOKUP;
      psn_q   <= '0;
      idx_q   <= '0;
      id_q    <= '0;
      set_q   <= '0;
      way_q   <= '0;
      hit_q   <= 1'b0;
      lat_q   <= '0;
      for (int s = 0; s < SETS; s++) begin
        valid_q[s] <= '0;
        dirty_q[s] <= '0;
        rr_q[s]    <= '0;
      end
    end else begin
      if (state_q != C_IDLE) lat_q <= lat_q + 1'b1;
      case (state_q)
        C_IDLE: if (q_valid) begin
          op_q    <= q_op;
          psn_q   <= q_psn;
          idx_q   <= q_idx;
          id_q    <= q_id;
          set_q   <= SET_W'(q_psn % SP_W'(SETS));
          lat_q   <= LAT_W'(1);
          state_q <= C_TAG;
        end
        C_TAG: begin
          hit_q <= tag_hit;
          if (tag_hit) begin
            way_q   <= hit_way;
            state_q <= C_HITWAIT;
          end else begin
            way_q   <= victim;
            if (victim == rr_q[set_q]) rr_q[set_q] <= WAY_W'((int'(victim) + 1) % WAYS);
            state_q <= (valid_q[set_q][victim] && dirty_q[set_q][victim]) ? C_WB : C_FETCH;
          end
        end
        C_HITWAIT: if (lat_q == LAT_W'(HIT_LATENCY - 1)) state_q <= C_APPLY;
        C_WB:      if (m_req_ready) state_q <= C_FETCH;
        C_FETCH:   if (m_req_ready) begin
          valid_q[set_q][way_q] <= 1'b0;
          state_q <= C_FWAIT;
        end
        C_FWAIT:   if (m_resp_valid) begin
          valid_q[set_q][way_q] <= 1'b1;
          dirty_q[set_q][way_q] <= 1'b0;
          state_q <= C_APPLY;
        end
        C_APPLY: begin
          if (op_q != BM_LOOKUP) dirty_q[set_q][way_q] <= 1'b1;
          state_q <= C_IDLE;
        end
        default: state_q <= C_IDLE;
      endcase
    end
  end

  // Array writes: tag and bitmap on a fill, bitmap on a set/clear.
  always_ff @(posedge clk) begin
    if (state_q == C_FWAIT && m_resp_valid) begin
      tag_mem[set_q][way_q] <= psn_q;
      bm_mem[entry]         <= m_resp_data;
    end else if (state_q == C_APPLY && op_q != BM_LOOKUP) begin
      bm_mem[entry] <= new_line;
    end
  end

  assign r_valid = state_q == C_APPLY;
  assign r_flag  = new_line[idx_q];
  assign r_hit   = hit_q;
  assign r_id    = id_q;

endmodule
