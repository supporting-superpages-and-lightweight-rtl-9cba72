// rainbow_top: the Rainbow hardware of a multi-core hybrid DRAM/NVM system.
//
// NCORES translation units (xlate), one per core, each with split two-level
// TLBs for 2 MB superpages and 4 KB pages and a superpage table walker,
// share one hybrid memory controller (hybrid_mc) that routes requests to
// DRAM or NVM, counts NVM references in two stages and holds the migration
// bitmap cache.
//
// Ports, per core i: core_req_*[i] gives a virtual address, core_resp_*[i]
// returns the physical address and the addressing path taken; cr3[i] is the
// root of that core's superpage table. llc_* carries the last-level cache's
// misses (any physical line request; its responses come back on
// llc_resp_* in completion order). dram_*, nvm_* and bmm_* go to the DRAM
// controller, the PCM controller and the bitmap backing store. os_* is the
// interface of the OS modules (hot page identification, migration, DRAM
// management), which run in software: counter read-out, top-N load, flag
// updates and the 4 KB TLB shootdown broadcast to all cores.
//
// Arbitration (round robin) and request ids are this design's own: core i
// uses id i, the LLC id NCORES, the OS id 15. The cores, caches, memory
// devices and OS are outside this module.
module rainbow_top
  import rainbow_pkg::*;
#(
  parameter int unsigned NCORES     = 8,
  parameter int unsigned L1_ENTRIES = 32,
  parameter int unsigned L1_WAYS    = 4,
  parameter int unsigned L2_ENTRIES = 512,
  parameter int unsigned L2_WAYS    = 8,
  parameter int unsigned L2_LATENCY = 8,
  parameter int unsigned INTERVAL   = 100_000_000,
  parameter int unsigned NUM_SP     = 16384,
  parameter int unsigned N_SLOTS    = 100,
  parameter int unsigned BM_ENTRIES = 4000,
  parameter int unsigned BM_WAYS    = 8,
  parameter int unsigned BM_LATENCY = 9
) (
  input  logic              clk,
  input  logic              rst_n,
  output logic              init_done,
  output logic              interval_tick,
  output logic              nvm_monitored,
  output logic              bm_lookup_done,   // a core's bitmap lookup finished
  output logic              bm_lookup_hit,    // ... and hit in the bitmap cache
  // cores
  input  logic [PA_W-1:0]   cr3            [NCORES],
  input  logic              core_req_valid [NCORES],
  output logic              core_req_ready [NCORES],
  input  logic [VA_W-1:0]   core_req_va    [NCORES],
  output logic              core_resp_valid[NCORES],
  output logic [PA_W-1:0]   core_resp_pa   [NCORES],
  output xcase_e            core_resp_case [NCORES],
  output logic              core_resp_small_hit[NCORES],
  output logic              core_resp_sp_hit   [NCORES],
  output logic              core_resp_walked   [NCORES],
  // last-level cache misses
  input  logic              llc_req_valid,
  output logic              llc_req_ready,
  input  logic [PA_W-1:0]   llc_req_addr,
  input  logic              llc_req_we,
  input  logic [LINE_W-1:0] llc_req_wdata,
  output logic              llc_resp_valid,
  output logic [LINE_W-1:0] llc_resp_data,
  // DRAM controller
  output logic              dram_req_valid,
  input  logic              dram_req_ready,
  output mem_req_t          dram_req,
  input  logic              dram_resp_valid,
  output logic              dram_resp_ready,
  input  mem_resp_t         dram_resp,
  // NVM controller
  output logic              nvm_req_valid,
  input  logic              nvm_req_ready,
  output mem_req_t          nvm_req,
  input  logic              nvm_resp_valid,
  output logic              nvm_resp_ready,
  input  mem_resp_t         nvm_resp,
  // bitmap backing store
  output logic              bmm_req_valid,
  input  logic              bmm_req_ready,
  output logic [PA_W-1:0]   bmm_req_addr,
  output logic              bmm_req_we,
  output logic [LINE_W-1:0] bmm_req_wdata,
  input  logic              bmm_resp_valid,
  input  logic [LINE_W-1:0] bmm_resp_data,
  // OS interface
  input  logic              os_bm_valid,
  output logic              os_bm_ready,
  input  logic              os_bm_set,
  input  logic [SP_W-1:0]   os_bm_psn,
  input  logic [SIDX_W-1:0] os_bm_idx,
  output logic              os_bm_done,
  input  logic                      os_sp_rd_valid,
  input  logic [$clog2(NUM_SP)-1:0] os_sp_rd_idx,
  output logic                      os_sp_rd_resp_valid,
  output logic [15:0]               os_sp_rd_data,
  input  logic                       os_ld_valid,
  input  logic [$clog2(N_SLOTS)-1:0] os_ld_slot,
  input  logic [SP_W-1:0]            os_ld_psn,
  input  logic                       os_ld_enable,
  input  logic                       os_sc_rd_valid,
  input  logic [$clog2(N_SLOTS)-1:0] os_sc_rd_slot,
  input  logic [SIDX_W-1:0]          os_sc_rd_idx,
  output logic                       os_sc_rd_resp_valid,
  output logic [15:0]                os_sc_rd_data,
  input  logic              os_shootdown_valid,
  input  logic [PN_W-1:0]   os_shootdown_vpn
);
  localparam int unsigned NREQ = NCORES + 1;   // cores + LLC
  localparam int unsigned RW   = $clog2(NREQ);
  localparam int unsigned CW   = $clog2(NCORES);

  // Per-core translation units.
  logic              x_mem_valid [NCORES];
  logic              x_mem_ready [NCORES];
  logic [PA_W-1:0]   x_mem_addr  [NCORES];
  logic              x_mem_rv    [NCORES];
  logic              x_bm_valid  [NCORES];
  logic              x_bm_ready  [NCORES];
  logic [SP_W-1:0]   x_bm_psn    [NCORES];
  logic [SIDX_W-1:0] x_bm_idx    [NCORES];
  logic              x_bm_rv     [NCORES];

  logic      mc_resp_valid;
  mem_resp_t mc_resp;
  logic      mc_bm_r_valid, mc_bm_r_flag, mc_bm_r_hit;
  logic [ID_W-1:0] mc_bm_r_id;

  for (genvar c = 0; c < NCORES; c++) begin : g_core
    assign x_mem_rv[c] = mc_resp_valid && mc_resp.id == ID_W'(c);
    assign x_bm_rv[c]  = mc_bm_r_valid && mc_bm_r_id == ID_W'(c);
    xlate #(.L1_ENTRIES(L1_ENTRIES), .L1_WAYS(L1_WAYS), .L2_ENTRIES(L2_ENTRIES),
            .L2_WAYS(L2_WAYS), .L2_LATENCY(L2_LATENCY)) u_xlate (
      .clk, .rst_n, .cr3(cr3[c]),
      .req_valid(core_req_valid[c]), .req_ready(core_req_ready[c]), .req_va(core_req_va[c]),
      .resp_valid(core_resp_valid[c]), .resp_pa(core_resp_pa[c]), .resp_case(core_resp_case[c]),
      .resp_small_hit(core_resp_small_hit[c]), .resp_sp_hit(core_resp_sp_hit[c]),
      .resp_walked(core_resp_walked[c]),
      .bm_q_valid(x_bm_valid[c]), .bm_q_ready(x_bm_ready[c]), .bm_q_psn(x_bm_psn[c]),
      .bm_q_idx(x_bm_idx[c]), .bm_r_valid(x_bm_rv[c]), .bm_r_flag(mc_bm_r_flag),
      .mem_req_valid(x_mem_valid[c]), .mem_req_ready(x_mem_ready[c]), .mem_req_addr(x_mem_addr[c]),
      .mem_resp_valid(x_mem_rv[c]), .mem_resp_data(mc_resp.rdata),
      .inv_valid(os_shootdown_valid), .inv_vpn(os_shootdown_vpn)
    );
  end

  // Memory request arbitration: cores 0..NCORES-1, LLC = NCORES.
  logic [NREQ-1:0] mreq;
  logic            mgnt_valid, mc_req_ready;
  logic [RW-1:0]   mgnt;
  mem_req_t        mc_req;

  always_comb begin
    for (int c = 0; c < NCORES; c++) mreq[c] = x_mem_valid[c];
    mreq[NCORES] = llc_req_valid;
  end

  rr_arb #(.N(NREQ)) u_mem_arb (
    .clk, .rst_n, .req(mreq), .accept(mc_req_ready), .gnt_valid(mgnt_valid), .gnt_idx(mgnt)
  );

  always_comb begin
    mc_req.addr  = llc_req_addr;
    mc_req.we    = llc_req_we;
    mc_req.wdata = llc_req_wdata;
    mc_req.id    = ID_W'(NCORES);
    for (int c = 0; c < NCORES; c++) begin
      if (int'(mgnt) == c) begin
        mc_req.addr  = x_mem_addr[c];
        mc_req.we    = 1'b0;
        mc_req.wdata = '0;
        mc_req.id    = ID_W'(c);
      end
    end
    for (int c = 0; c < NCORES; c++) x_mem_ready[c] = mc_req_ready && mgnt_valid && int'(mgnt) == c;
    llc_req_ready = mc_req_ready && mgnt_valid && int'(mgnt) == NCORES;
  end

  assign llc_resp_valid = mc_resp_valid && mc_resp.id == ID_W'(NCORES);
  assign llc_resp_data  = mc_resp.rdata;

  assign bm_lookup_done = mc_bm_r_valid;
  assign bm_lookup_hit  = mc_bm_r_hit;

  // Bitmap query arbitration.
  logic [NCORES-1:0] breq;
  logic              bgnt_valid, mc_bm_q_ready;
  logic [CW-1:0]     bgnt;
  always_comb for (int c = 0; c < NCORES; c++) breq[c] = x_bm_valid[c];

  rr_arb #(.N(NCORES)) u_bm_arb (
    .clk, .rst_n, .req(breq), .accept(mc_bm_q_ready), .gnt_valid(bgnt_valid), .gnt_idx(bgnt)
  );
  always_comb for (int c = 0; c < NCORES; c++)
    x_bm_ready[c] = mc_bm_q_ready && bgnt_valid && bgnt == CW'(c);

  hybrid_mc #(.INTERVAL(INTERVAL), .NUM_SP(NUM_SP), .N_SLOTS(N_SLOTS),
              .BM_ENTRIES(BM_ENTRIES), .BM_WAYS(BM_WAYS), .BM_LATENCY(BM_LATENCY)) u_mc (
    .clk, .rst_n, .init_done, .interval_tick, .nvm_monitored,
    .req_valid(mgnt_valid), .req_ready(mc_req_ready), .req(mc_req),
    .resp_valid(mc_resp_valid), .resp(mc_resp),
    .dram_req_valid, .dram_req_ready, .dram_req, .dram_resp_valid, .dram_resp_ready, .dram_resp,
    .nvm_req_valid, .nvm_req_ready, .nvm_req, .nvm_resp_valid, .nvm_resp_ready, .nvm_resp,
    .bm_q_valid(bgnt_valid), .bm_q_ready(mc_bm_q_ready), .bm_q_psn(x_bm_psn[bgnt]),
    .bm_q_idx(x_bm_idx[bgnt]), .bm_q_id(ID_W'(bgnt)),
    .bm_r_valid(mc_bm_r_valid), .bm_r_flag(mc_bm_r_flag), .bm_r_hit(mc_bm_r_hit), .bm_r_id(mc_bm_r_id),
    .bmm_req_valid, .bmm_req_ready, .bmm_req_addr, .bmm_req_we, .bmm_req_wdata,
    .bmm_resp_valid, .bmm_resp_data,
    .os_bm_valid, .os_bm_ready, .os_bm_set, .os_bm_psn, .os_bm_idx, .os_bm_done,
    .os_sp_rd_valid, .os_sp_rd_idx, .os_sp_rd_resp_valid, .os_sp_rd_data,
    .os_ld_valid, .os_ld_slot, .os_ld_psn, .os_ld_enable,
    .os_sc_rd_valid, .os_sc_rd_slot, .os_sc_rd_idx, .os_sc_rd_resp_valid, .os_sc_rd_data
  );

endmodule
