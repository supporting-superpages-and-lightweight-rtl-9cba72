// xlate: per-core address translation with NVM-to-DRAM remapping.
//
// Each core has split TLBs: a two-level TLB for 2 MB superpages (NVM) and
// a two-level TLB for 4 KB pages (hot pages cached in DRAM). Both are
// consulted in parallel with the virtual address, giving four cases:
//   1, 2. 4 KB TLB hit (superpage TLB hit or miss): the 4 KB translation is
//         used; the data is in DRAM (path 1, XC_SMALL_HIT).
//   3.    4 KB miss, superpage hit: the migration flag of the small page is
//         read from the bitmap cache. Flag clear: the superpage translation
//         is used (path 3, XC_SUPERPAGE). Flag set: the first 8 bytes of the
//         small page in NVM hold the DRAM page number; they are read, the
//         4 KB TLB is filled with it and the DRAM address is used (path 2,
//         XC_REMAP).
//   4.    both miss: the superpage table is walked (three reads), the
//         superpage TLB is filled, and case 3 follows.
// A 4 KB TLB hit answers as soon as it is known, even while the superpage
// TLB is still searching its L2.
//
// Interface: req_valid/req_ready/req_va; resp_valid pulses with resp_pa,
// resp_case, and the TLB outcome (resp_small_hit, resp_sp_hit, resp_walked)
// for statistics. bm_* queries the memory controller's bitmap cache
// (lookup only); mem_* reads memory lines for the walker and for the DRAM
// page number; inv_* is a 4 KB TLB shootdown. One translation at a time.
//
// From the source: the four cases, parallel split-TLB lookup, the bitmap
// check, the 8-byte DRAM address stored in the NVM page, and filling the
// 4 KB TLB on first access after migration. This design's choices: the DRAM
// page number sits in bits 35..0 of that 8-byte word, translation faults are
// reported (XC_FAULT) and left to software, one outstanding translation.
module xlate
  import rainbow_pkg::*;
#(
  parameter int unsigned L1_ENTRIES = 32,
  parameter int unsigned L1_WAYS    = 4,
  parameter int unsigned L2_ENTRIES = 512,
  parameter int unsigned L2_WAYS    = 8,
  parameter int unsigned L2_LATENCY = 8
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [PA_W-1:0]   cr3,
  // translation request / response
  input  logic              req_valid,
  output logic              req_ready,
  input  logic [VA_W-1:0]   req_va,
  output logic              resp_valid,
  output logic [PA_W-1:0]   resp_pa,
  output xcase_e            resp_case,
  output logic              resp_small_hit,
  output logic              resp_sp_hit,
  output logic              resp_walked,
  // bitmap cache query
  output logic              bm_q_valid,
  input  logic              bm_q_ready,
  output logic [SP_W-1:0]   bm_q_psn,
  output logic [SIDX_W-1:0] bm_q_idx,
  input  logic              bm_r_valid,
  input  logic              bm_r_flag,
  // memory line reads
  output logic              mem_req_valid,
  input  logic              mem_req_ready,
  output logic [PA_W-1:0]   mem_req_addr,
  input  logic              mem_resp_valid,
  input  logic [LINE_W-1:0] mem_resp_data,
  // 4 KB TLB shootdown
  input  logic              inv_valid,
  input  logic [PN_W-1:0]   inv_vpn
);
  typedef enum logic [2:0] {X_IDLE, X_TLB, X_WALK, X_BMQ, X_BMW, X_MREQ, X_MWAIT} xstate_e;
  xstate_e state_q;

  logic [VA_W-1:0] va_q;
  logic [SP_W-1:0] psn_q;
  logic            sp_done_q, sm_done_q, sp_hit_q, walked_q;
  logic [SP_W-1:0] sp_data_q;

  logic [SP_W-1:0] vsn;
  logic [PN_W-1:0] vpn;
  assign vsn = va_q[VA_W-1:21];
  assign vpn = va_q[VA_W-1:12];

  // Walker signals.
  logic            walk_start, walk_busy, walk_done, walk_fault;
  logic [SP_W-1:0] walk_psn;
  logic            w_req_valid;
  logic [PA_W-1:0] w_req_addr;

  // Split TLBs.
  logic sp_busy, sp_rv, sp_hit, sm_busy, sm_rv, sm_hit;
  logic [SP_W-1:0] sp_data;
  logic [PN_W-1:0] sm_data;
  logic sp_fill, sm_fill;
  logic [PN_W-1:0] sm_fill_data;
  logic start;

  assign req_ready = state_q == X_IDLE && !sp_busy && !sm_busy;
  assign start     = req_valid && req_ready;

  tlb_hier #(.L1_ENTRIES(L1_ENTRIES), .L1_WAYS(L1_WAYS), .L2_ENTRIES(L2_ENTRIES),
             .L2_WAYS(L2_WAYS), .L2_LATENCY(L2_LATENCY), .TAG_W(SP_W), .DATA_W(SP_W)) u_sp_tlb (
    .clk, .rst_n,
    .req_valid(start), .req_tag(req_va[VA_W-1:21]), .busy(sp_busy),
    .resp_valid(sp_rv), .resp_hit(sp_hit), .resp_data(sp_data),
    .fill_valid(sp_fill), .fill_tag(vsn), .fill_data(walk_psn),
    .inv_valid(1'b0), .inv_tag('0)
  );

  tlb_hier #(.L1_ENTRIES(L1_ENTRIES), .L1_WAYS(L1_WAYS), .L2_ENTRIES(L2_ENTRIES),
             .L2_WAYS(L2_WAYS), .L2_LATENCY(L2_LATENCY), .TAG_W(PN_W), .DATA_W(PN_W)) u_sm_tlb (
    .clk, .rst_n,
    .req_valid(start), .req_tag(req_va[VA_W-1:12]), .busy(sm_busy),
    .resp_valid(sm_rv), .resp_hit(sm_hit), .resp_data(sm_data),
    .fill_valid(sm_fill), .fill_tag(vpn), .fill_data(sm_fill_data),
    .inv_valid, .inv_tag(inv_vpn)
  );

  // Superpage table walker.

  sp_walker u_walker (
    .clk, .rst_n,
    .start(walk_start), .vsn, .cr3, .busy(walk_busy),
    .mem_req_valid(w_req_valid), .mem_req_ready(mem_req_ready && state_q == X_WALK),
    .mem_req_addr(w_req_addr),
    .mem_resp_valid(mem_resp_valid && state_q == X_WALK), .mem_resp_data,
    .done(walk_done), .psn(walk_psn), .fault(walk_fault)
  );

  // The walker accepts a start only when idle; xlate starts it only from X_TLB.
  always_comb if (walk_start) assert (!walk_busy);

  // Combined view of the two TLB answers within X_TLB.
  logic sp_known, sm_known, sp_h, sm_h;
  logic [SP_W-1:0] sp_psn;
  assign sp_known = sp_done_q || sp_rv;
  assign sm_known = sm_done_q || sm_rv;
  assign sp_h     = sp_done_q ? sp_hit_q : sp_hit;
  assign sp_psn   = sp_done_q ? sp_data_q : sp_data;
  assign sm_h     = sm_rv && sm_hit;

  assign walk_start   = state_q == X_TLB && sp_known && sm_known && !sm_h && !sp_h;
  assign sp_fill      = state_q == X_WALK && walk_done && !walk_fault;
  logic [63:0] remap_word;
  assign remap_word   = line_word(mem_resp_data, mem_req_addr);
  assign sm_fill_data = remap_word[PN_W-1:0];
  assign sm_fill      = state_q == X_MWAIT && mem_resp_valid;

  assign bm_q_valid = state_q == X_BMQ;
  assign bm_q_psn   = psn_q;
  assign bm_q_idx   = va_q[20:12];

  assign mem_req_valid = (state_q == X_WALK) ? w_req_valid : (state_q == X_MREQ);
  assign mem_req_addr  = (state_q == X_WALK) ? w_req_addr
                       : {psn_q, va_q[20:12], 12'h000};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q   <= X_IDLE;
      va_q      <= '0;
      psn_q     <= '0;
      sp_done_q <= 1'b0;
      sm_done_q <= 1'b0;
      sp_hit_q  <= 1'b0;
      sp_data_q <= '0;
      walked_q  <= 1'b0;
    end else begin
      case (state_q)
        X_IDLE: if (start) begin
          va_q      <= req_va;
          sp_done_q <= 1'b0;
          sm_done_q <= 1'b0;
          walked_q  <= 1'b0;
          state_q   <= X_TLB;
        end
        X_TLB: begin
          if (sp_rv) begin
            sp_done_q <= 1'b1;
            sp_hit_q  <= sp_hit;
            sp_data_q <= sp_data;
          end
          if (sm_rv) sm_done_q <= 1'b1;
          if (sm_h) state_q <= X_IDLE;                 // path 1
          else if (sp_known && sm_known) begin
            if (sp_h) begin
              psn_q   <= sp_psn;                       // case 3
              state_q <= X_BMQ;
            end else begin
              walked_q <= 1'b1;                        // case 4
              state_q  <= X_WALK;
            end
          end
        end
        X_WALK: if (walk_done) begin
          psn_q   <= walk_psn;
          state_q <= walk_fault ? X_IDLE : X_BMQ;
        end
        X_BMQ:   if (bm_q_ready) state_q <= X_BMW;
        X_BMW:   if (bm_r_valid) state_q <= bm_r_flag ? X_MREQ : X_IDLE;
        X_MREQ:  if (mem_req_ready) state_q <= X_MWAIT;
        X_MWAIT: if (mem_resp_valid) state_q <= X_IDLE;
        default: state_q <= X_IDLE;
      endcase
    end
  end

  // Response.
  always_comb begin
    resp_valid     = 1'b0;
    resp_pa        = '0;
    resp_case      = XC_SMALL_HIT;
    resp_small_hit = 1'b0;
    resp_sp_hit    = sp_known && sp_h;
    resp_walked    = walked_q;
    if (state_q == X_TLB && sm_h) begin
      resp_valid     = 1'b1;
      resp_small_hit = 1'b1;
      resp_pa        = {sm_data, va_q[11:0]};
      resp_case      = XC_SMALL_HIT;
    end else if (state_q == X_WALK && walk_done && walk_fault) begin
      resp_valid = 1'b1;
      resp_case  = XC_FAULT;
    end else if (state_q == X_BMW && bm_r_valid && !bm_r_flag) begin
      resp_valid  = 1'b1;
      resp_pa     = {psn_q, va_q[20:0]};
      resp_case   = XC_SUPERPAGE;
      resp_sp_hit = !walked_q;
    end else if (state_q == X_MWAIT && mem_resp_valid) begin
      resp_valid  = 1'b1;
      resp_pa     = {remap_word[PN_W-1:0], va_q[11:0]};
      resp_case   = XC_REMAP;
      resp_sp_hit = !walked_q;
    end
  end

endmodule
