// hybrid_mc: front end of the hybrid DRAM/NVM main-memory controller.
//
// Physical line requests (from the cores' translation units and from the
// last-level cache) arrive on req_*. Addresses below NVM_BASE go to the
// DRAM controller port, the rest to the NVM (PCM) controller port; the
// responses of both are merged back onto resp_* with their request id
// (DRAM first when both are ready). Every request accepted by the NVM port
// is also counted: by its superpage in the stage-1 counters (sp_counter)
// and, when the superpage is one of the top-N loaded by the OS, by its 4 KB
// page in the stage-2 counters (small_counter).
//
// The controller also holds the migration bitmap cache (bitmap_cache).
// Cores query it on bm_*; the OS sets or clears flags on os_bm_* after it
// migrates a page to DRAM or writes one back, and has priority over the
// cores. Responses to OS operations carry id OS_ID and raise os_bm_done.
// The bitmap cache reads and writes its backing copy on bmm_*.
//
// interval_tick pulses every INTERVAL cycles (the monitoring interval,
// 10^8 cycles) to tell the OS to read the counters (os_sp_*, os_sc_*) and
// load the next top-N list (os_ld_*).
//
// From the source: counting NVM references in the memory controller in two
// stages, the bitmap cache in the controller, the interval length. This
// design's choices: the address map (DRAM 4 GB at 0, PCM 32 GB above),
// request ids, OS priority and the interface details.
module hybrid_mc
  import rainbow_pkg::*;
#(
  parameter int unsigned     INTERVAL    = 100_000_000,
  parameter int unsigned     NUM_SP      = 16384,
  parameter int unsigned     N_SLOTS     = 100,
  parameter int unsigned     BM_ENTRIES  = 4000,
  parameter int unsigned     BM_WAYS     = 8,
  parameter int unsigned     BM_LATENCY  = 9,
  parameter logic [ID_W-1:0] OS_ID       = '1
) (
  input  logic              clk,
  input  logic              rst_n,
  output logic              init_done,
  output logic              interval_tick,
  output logic              nvm_monitored,    // an NVM reference hit a top-N superpage
  // requests from cores / LLC
  input  logic              req_valid,
  output logic              req_ready,
  input  mem_req_t          req,
  output logic              resp_valid,
  output mem_resp_t         resp,
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
  // bitmap queries from the cores
  input  logic              bm_q_valid,
  output logic              bm_q_ready,
  input  logic [SP_W-1:0]   bm_q_psn,
  input  logic [SIDX_W-1:0] bm_q_idx,
  input  logic [ID_W-1:0]   bm_q_id,
  output logic              bm_r_valid,
  output logic              bm_r_flag,
  output logic              bm_r_hit,
  output logic [ID_W-1:0]   bm_r_id,
  // bitmap backing store
  output logic              bmm_req_valid,
  input  logic              bmm_req_ready,
  output logic [PA_W-1:0]   bmm_req_addr,
  output logic              bmm_req_we,
  output logic [LINE_W-1:0] bmm_req_wdata,
  input  logic              bmm_resp_valid,
  input  logic [LINE_W-1:0] bmm_resp_data,
  // OS: migration flag updates
  input  logic              os_bm_valid,
  output logic              os_bm_ready,
  input  logic              os_bm_set,        // 1 = set flag, 0 = clear
  input  logic [SP_W-1:0]   os_bm_psn,
  input  logic [SIDX_W-1:0] os_bm_idx,
  output logic              os_bm_done,
  // OS: stage-1 counters
  input  logic                      os_sp_rd_valid,
  input  logic [$clog2(NUM_SP)-1:0] os_sp_rd_idx,
  output logic                      os_sp_rd_resp_valid,
  output logic [15:0]               os_sp_rd_data,
  // OS: stage-2 table
  input  logic                       os_ld_valid,
  input  logic [$clog2(N_SLOTS)-1:0] os_ld_slot,
  input  logic [SP_W-1:0]            os_ld_psn,
  input  logic                       os_ld_enable,
  input  logic                       os_sc_rd_valid,
  input  logic [$clog2(N_SLOTS)-1:0] os_sc_rd_slot,
  input  logic [SIDX_W-1:0]          os_sc_rd_idx,
  output logic                       os_sc_rd_resp_valid,
  output logic [15:0]                os_sc_rd_data
);
  // ---------------- request routing ----------------
  logic to_nvm;
  assign to_nvm = req.addr >= NVM_BASE;

  logic ctr_ready, sp_init, sc_init;
  assign ctr_ready = sp_init && sc_init;
  assign init_done = ctr_ready;

  assign dram_req_valid = req_valid && !to_nvm && ctr_ready;
  assign nvm_req_valid  = req_valid &&  to_nvm && ctr_ready;
  assign dram_req       = req;
  assign nvm_req        = req;
  assign req_ready      = ctr_ready && (to_nvm ? nvm_req_ready : dram_req_ready);

  // Read responses: writes produce none.
  assign dram_resp_ready = 1'b1;
  assign nvm_resp_ready  = !dram_resp_valid;
  assign resp_valid      = dram_resp_valid || nvm_resp_valid;
  assign resp            = dram_resp_valid ? dram_resp : nvm_resp;

  // ---------------- two-stage access counting ----------------
  logic nvm_acc;
  logic [PA_W-1:0] nvm_off;
  assign nvm_acc = nvm_req_valid && nvm_req_ready;
  assign nvm_off = req.addr - NVM_BASE;

  sp_counter #(.NUM_SP(NUM_SP)) u_sp_counter (
    .clk, .rst_n,
    .acc_valid(nvm_acc), .acc_sp(nvm_off[21 +: $clog2(NUM_SP)]), .acc_write(req.we),
    .rd_valid(os_sp_rd_valid), .rd_idx(os_sp_rd_idx),
    .rd_resp_valid(os_sp_rd_resp_valid), .rd_data(os_sp_rd_data),
    .init_done(sp_init)
  );

  logic sc_match;
  small_counter #(.N_SLOTS(N_SLOTS)) u_small_counter (
    .clk, .rst_n, .init_done(sc_init),
    .acc_valid(nvm_acc), .acc_psn(req.addr[PA_W-1:21]), .acc_idx(req.addr[20:12]),
    .acc_write(req.we), .acc_match(sc_match),
    .ld_valid(os_ld_valid), .ld_slot(os_ld_slot), .ld_psn(os_ld_psn), .ld_enable(os_ld_enable),
    .rd_valid(os_sc_rd_valid), .rd_slot(os_sc_rd_slot), .rd_idx(os_sc_rd_idx),
    .rd_resp_valid(os_sc_rd_resp_valid), .rd_data(os_sc_rd_data)
  );

  // ---------------- migration bitmap cache ----------------
  logic              c_valid, c_ready, r_valid, r_flag, r_hit;
  bm_op_e            c_op;
  logic [SP_W-1:0]   c_psn;
  logic [SIDX_W-1:0] c_idx;
  logic [ID_W-1:0]   c_id, r_id;

  always_comb begin
    if (os_bm_valid) begin
      c_valid = 1'b1;
      c_op    = os_bm_set ? BM_SET : BM_CLEAR;
      c_psn   = os_bm_psn;
      c_idx   = os_bm_idx;
      c_id    = OS_ID;
    end else begin
      c_valid = bm_q_valid;
      c_op    = BM_LOOKUP;
      c_psn   = bm_q_psn;
      c_idx   = bm_q_idx;
      c_id    = bm_q_id;
    end
  end
  assign os_bm_ready = c_ready;
  assign bm_q_ready  = c_ready && !os_bm_valid;

  bitmap_cache #(.ENTRIES(BM_ENTRIES), .WAYS(BM_WAYS), .HIT_LATENCY(BM_LATENCY)) u_bitmap_cache (
    .clk, .rst_n,
    .q_valid(c_valid), .q_ready(c_ready), .q_op(c_op), .q_psn(c_psn), .q_idx(c_idx), .q_id(c_id),
    .r_valid, .r_flag, .r_hit, .r_id,
    .m_req_valid(bmm_req_valid), .m_req_ready(bmm_req_ready), .m_req_addr(bmm_req_addr),
    .m_req_we(bmm_req_we), .m_req_wdata(bmm_req_wdata),
    .m_resp_valid(bmm_resp_valid), .m_resp_data(bmm_resp_data)
  );

  assign bm_r_valid = r_valid && r_id != OS_ID;
  assign bm_r_flag  = r_flag;
  assign bm_r_hit   = r_hit;
  assign bm_r_id    = r_id;
  assign os_bm_done = r_valid && r_id == OS_ID;

  // ---------------- monitoring interval ----------------
  logic [$clog2(INTERVAL)-1:0] icnt_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      icnt_q        <= '0;
      interval_tick <= 1'b0;
    end else begin
      interval_tick <= 1'b0;
      if (32'(icnt_q) == INTERVAL - 1) begin
        icnt_q        <= '0;
        interval_tick <= 1'b1;
      end else begin
        icnt_q <= icnt_q + 1'b1;
      end
    end
  end

  assign nvm_monitored = nvm_acc && sc_match;

endmodule
