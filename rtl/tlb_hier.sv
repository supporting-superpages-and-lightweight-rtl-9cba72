// tlb_hier: two-level TLB for one page size, the building block of the
// split TLBs (one instance for 2 MB superpages, one for 4 KB pages, per core).
//
// L1: L1_ENTRIES entries, L1_WAYS-way, answer one cycle after the request.
// L2: L2_ENTRIES entries, L2_WAYS-way, looked up after an L1 miss and
// answering L2_LATENCY cycles later. An L2 hit is copied into L1. A fill
// (from a page walk or a remap) is written into both levels, and an
// invalidate (shootdown) removes the page from both.
//
// Interface: req_valid/req_tag start a lookup when busy is low; exactly one
// resp_valid pulse follows, with resp_hit and resp_data. Latency: 1 cycle
// on an L1 hit, 1 + L2_LATENCY cycles otherwise.
//
// Sizes and latencies are the evaluated configuration (L1 32 entries 4-way
// 1 cycle; L2 512 entries 8-way 8 cycles). The source calls the L2 TLB
// unified; only the data side is modelled, so each page size has its own
// L2 here, and fills going to both levels is this design's choice.
module tlb_hier #(
  parameter int unsigned L1_ENTRIES = 32,
  parameter int unsigned L1_WAYS    = 4,
  parameter int unsigned L2_ENTRIES = 512,
  parameter int unsigned L2_WAYS    = 8,
  parameter int unsigned L2_LATENCY = 8,
  parameter int unsigned TAG_W      = 36,
  parameter int unsigned DATA_W     = 36
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              req_valid,
  input  logic [TAG_W-1:0]  req_tag,
  output logic              busy,
  output logic              resp_valid,
  output logic              resp_hit,
  output logic [DATA_W-1:0] resp_data,
  input  logic              fill_valid,
  input  logic [TAG_W-1:0]  fill_tag,
  input  logic [DATA_W-1:0] fill_data,
  input  logic              inv_valid,
  input  logic [TAG_W-1:0]  inv_tag
);
  typedef enum logic [1:0] {S_IDLE, S_L1, S_L2WAIT} state_e;
  state_e state_q;
  logic [TAG_W-1:0] tag_q;
  logic [$clog2(L2_LATENCY+1)-1:0] cnt_q;

  logic l1_rv, l1_hit, l2_rv, l2_hit, l2_lk;
  logic [DATA_W-1:0] l1_data, l2_data;
  logic [DATA_W-1:0] l2_data_q;
  logic l2_hit_q;

  logic start;
  assign start = req_valid && state_q == S_IDLE;
  assign busy  = state_q != S_IDLE;

  // L2 is probed in the cycle the L1 miss is known.
  assign l2_lk = state_q == S_L1 && l1_rv && !l1_hit;

  // L1 refill on an L2 hit, otherwise the external fill.
  logic l1_fill;
  logic [TAG_W-1:0]  l1_fill_tag;
  logic [DATA_W-1:0] l1_fill_data;
  always_comb begin
    l1_fill      = fill_valid;
    l1_fill_tag  = fill_tag;
    l1_fill_data = fill_data;
    if (state_q == S_L2WAIT && cnt_q == 1 && l2_hit_q) begin
      l1_fill      = 1'b1;
      l1_fill_tag  = tag_q;
      l1_fill_data = l2_data_q;
    end
  end

  tlb #(.ENTRIES(L1_ENTRIES), .WAYS(L1_WAYS), .TAG_W(TAG_W), .DATA_W(DATA_W)) u_l1 (
    .clk, .rst_n,
    .lk_valid(start), .lk_tag(req_tag),
    .lk_resp_valid(l1_rv), .lk_hit(l1_hit), .lk_data(l1_data),
    .fill_valid(l1_fill), .fill_tag(l1_fill_tag), .fill_data(l1_fill_data),
    .inv_valid, .inv_tag
  );

  tlb #(.ENTRIES(L2_ENTRIES), .WAYS(L2_WAYS), .TAG_W(TAG_W), .DATA_W(DATA_W)) u_l2 (
    .clk, .rst_n,
    .lk_valid(l2_lk), .lk_tag(tag_q),
    .lk_resp_valid(l2_rv), .lk_hit(l2_hit), .lk_data(l2_data),
    .fill_valid, .fill_tag, .fill_data,
    .inv_valid, .inv_tag
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q   <= S_IDLE;
      tag_q     <= '0;
      cnt_q     <= '0;
      l2_hit_q  <= 1'b0;
      l2_data_q <= '0;
    end else begin
      case (state_q)
        S_IDLE: if (req_valid) begin
          state_q <= S_L1;
          tag_q   <= req_tag;
        end
        S_L1: begin
          if (l1_hit) state_q <= S_IDLE;
          else begin
            state_q <= S_L2WAIT;
            cnt_q   <= ($bits(cnt_q))'(L2_LATENCY);
          end
        end
        S_L2WAIT: begin
          if (l2_rv) begin
            l2_hit_q  <= l2_hit;
            l2_data_q <= l2_data;
          end
          if (cnt_q == 1) state_q <= S_IDLE;
          cnt_q <= cnt_q - 1'b1;
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

  always_comb begin
    resp_valid = 1'b0;
    resp_hit   = 1'b0;
    resp_data  = '0;
    if (state_q == S_L1 && l1_hit) begin
      resp_valid = 1'b1;
      resp_hit   = 1'b1;
      resp_data  = l1_data;
    end else if (state_q == S_L2WAIT && cnt_q == 1) begin
      resp_valid = 1'b1;
      resp_hit   = l2_hit_q;
      resp_data  = l2_data_q;
    end
  end

endmodule
