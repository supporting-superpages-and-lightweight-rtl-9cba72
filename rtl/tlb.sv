// tlb: one level of a set-associative translation lookaside buffer for a
// single page size.
//
// Each of the SETS = ENTRIES/WAYS sets holds WAYS entries of {valid, tag,
// data}; the tag is the full virtual page number and the data the physical
// page number. A lookup presented in cycle t is compared against every way
// of the indexed set and answered in cycle t+1 (lk_resp_valid, lk_hit,
// lk_data), which is the 1-cycle L1 TLB latency. Fills and invalidates take
// effect at the next clock edge. A fill first reuses a way already holding
// the tag, then an invalid way, then the way named by the set's round-robin
// pointer. inv_valid removes the entry of inv_tag (TLB shootdown).
//
// The sizes default to the L1 data TLB (32 entries, 4-way). The set index
// (low bits of the tag) and round-robin replacement are this design's own
// choices; the source only gives entries, ways and latency.
module tlb #(
  parameter int unsigned ENTRIES = 32,
  parameter int unsigned WAYS    = 4,
  parameter int unsigned TAG_W   = 36,
  parameter int unsigned DATA_W  = 36
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              lk_valid,
  input  logic [TAG_W-1:0]  lk_tag,
  output logic              lk_resp_valid,
  output logic              lk_hit,
  output logic [DATA_W-1:0] lk_data,
  input  logic              fill_valid,
  input  logic [TAG_W-1:0]  fill_tag,
  input  logic [DATA_W-1:0] fill_data,
  input  logic              inv_valid,
  input  logic [TAG_W-1:0]  inv_tag
);
  localparam int unsigned SETS  = ENTRIES / WAYS;
  localparam int unsigned SET_W = (SETS > 1) ? $clog2(SETS) : 1;
  localparam int unsigned WAY_W = (WAYS > 1) ? $clog2(WAYS) : 1;

  logic [WAYS-1:0]  valid_q [SETS];
  logic [TAG_W-1:0] tag_q   [SETS][WAYS];
  logic [DATA_W-1:0] data_q [SETS][WAYS];
  logic [WAY_W-1:0] rr_q    [SETS];

  function automatic logic [SET_W-1:0] set_of(input logic [TAG_W-1:0] t);
    return (SETS > 1) ? SET_W'(t % SETS) : '0;
  endfunction

  // Registered lookup request.
  logic             req_q;
  logic [TAG_W-1:0] req_tag_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      req_q     <= 1'b0;
      req_tag_q <= '0;
    end else begin
      req_q     <= lk_valid;
      req_tag_q <= lk_tag;
    end
  end

  // Parallel compare of all ways of the set.
  always_comb begin
    logic [SET_W-1:0] s;
    s       = set_of(req_tag_q);
    lk_hit  = 1'b0;
    lk_data = '0;
    for (int w = 0; w < WAYS; w++) begin
      if (valid_q[s][w] && tag_q[s][w] == req_tag_q) begin
        lk_hit  = 1'b1;
        lk_data = data_q[s][w];
      end
    end
  end
  assign lk_resp_valid = req_q;

  // Fill-way selection.
  logic [SET_W-1:0] fset, iset;
  logic [WAY_W-1:0] fway;
  always_comb begin
    fset  = set_of(fill_tag);
    iset  = set_of(inv_tag);
    fway  = rr_q[fset];
    for (int w = WAYS-1; w >= 0; w--) begin
      if (!valid_q[fset][w]) begin
        fway  = WAY_W'(w);
      end
    end
    for (int w = 0; w < WAYS; w++) begin
      if (valid_q[fset][w] && tag_q[fset][w] == fill_tag) fway = WAY_W'(w);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < SETS; s++) begin
        valid_q[s] <= '0;
        rr_q[s]    <= '0;
      end
    end else begin
      if (inv_valid) begin
        for (int w = 0; w < WAYS; w++)
          if (tag_q[iset][w] == inv_tag) valid_q[iset][w] <= 1'b0;
      end
      if (fill_valid) begin
        valid_q[fset][fway] <= 1'b1;
        if (fway == rr_q[fset]) rr_q[fset] <= WAY_W'((int'(fway) + 1) % WAYS);
      end
    end
  end

  // Tag and data arrays need no reset: the valid bits guard them.
  always_ff @(posedge clk) begin
    if (fill_valid) begin
      tag_q[fset][fway]  <= fill_tag;
      data_q[fset][fway] <= fill_data;
    end
  end

endmodule
