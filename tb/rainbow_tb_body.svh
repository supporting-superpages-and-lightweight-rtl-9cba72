// Body shared by the end-to-end testbenches of rainbow_top. The including
// module uses the declarations below, instantiates rainbow_top as dut
// and defines SHORT_INTERVAL (1: monitoring interval ticks are expected).
//
// The testbench plays the parts outside the hardware: eight cores issuing
// virtual addresses, the last-level cache (every translated address is
// then read or written through the LLC port), DRAM and PCM controllers
// (one sparse line store, fixed latencies), the bitmap backing store and
// the OS (page tables, hot superpage sorting, hot page classification,
// migration, writeback with TLB shootdown). Every translation and every
// data read is checked against a reference model.

  import rainbow_pkg::*;
  localparam int unsigned NC = 8;
  localparam int unsigned NSP = 16;               // superpages mapped
  localparam int unsigned HOT_THRESH = 24;        // OS hot-page threshold (weighted count)

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic              init_done, interval_tick, nvm_monitored, bm_lookup_done, bm_lookup_hit;
  logic [PA_W-1:0]   cr3            [NC];
  logic              core_req_valid [NC];
  logic              core_req_ready [NC];
  logic [VA_W-1:0]   core_req_va    [NC];
  logic              core_resp_valid[NC];
  logic [PA_W-1:0]   core_resp_pa   [NC];
  xcase_e            core_resp_case [NC];
  logic              core_resp_small_hit[NC];
  logic              core_resp_sp_hit   [NC];
  logic              core_resp_walked   [NC];
  logic              llc_req_valid = 0, llc_req_ready, llc_req_we = 0, llc_resp_valid;
  logic [PA_W-1:0]   llc_req_addr = '0;
  logic [LINE_W-1:0] llc_req_wdata = '0, llc_resp_data;
  logic              dram_req_valid, dram_req_ready, dram_resp_valid, dram_resp_ready;
  logic              nvm_req_valid, nvm_req_ready, nvm_resp_valid, nvm_resp_ready;
  mem_req_t          dram_req, nvm_req;
  mem_resp_t         dram_resp, nvm_resp;
  logic              bmm_req_valid, bmm_req_ready, bmm_req_we, bmm_resp_valid;
  logic [PA_W-1:0]   bmm_req_addr;
  logic [LINE_W-1:0] bmm_req_wdata, bmm_resp_data;
  logic              os_bm_valid = 0, os_bm_ready, os_bm_set = 0, os_bm_done;
  logic [SP_W-1:0]   os_bm_psn = '0;
  logic [SIDX_W-1:0] os_bm_idx = '0;
  logic              os_sp_rd_valid = 0, os_sp_rd_resp_valid;
  logic [13:0]       os_sp_rd_idx = '0;
  logic [15:0]       os_sp_rd_data, os_sc_rd_data;
  logic              os_ld_valid = 0, os_ld_enable = 0, os_sc_rd_valid = 0, os_sc_rd_resp_valid;
  logic [6:0]        os_ld_slot = '0, os_sc_rd_slot = '0;
  logic [SP_W-1:0]   os_ld_psn = '0;
  logic [SIDX_W-1:0] os_sc_rd_idx = '0;
  logic              os_shootdown_valid = 0;
  logic [PN_W-1:0]   os_shootdown_vpn = '0;

  int checks = 0, failures = 0;
  // mechanism counters
  int n_path1 = 0, n_remap = 0, n_super = 0, n_walk = 0, n_bm_hit = 0, n_bm_miss = 0;
  int n_bm_wb = 0, n_mon = 0, n_ticks = 0, n_mig = 0, n_wb = 0, n_ovf = 0, n_fault = 0;

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ---------------- memory: one sparse line store ----------------
  logic [LINE_W-1:0] store [logic [PA_W-7:0]];
  function automatic logic [LINE_W-1:0] pat(logic [PA_W-1:0] a);
    logic [LINE_W-1:0] l;
    for (int w = 0; w < 8; w++) l[w*64 +: 64] = {16'hA5A5, a[PA_W-1:6], 3'(w), 3'b0} ^ 64'h1234_0000_0000_0000;
    return l;
  endfunction
  function automatic logic [LINE_W-1:0] rd_line(logic [PA_W-1:0] a);
    return store.exists(a[PA_W-1:6]) ? store[a[PA_W-1:6]] : pat({a[PA_W-1:6], 6'b0});
  endfunction
  function automatic void wr_word(logic [PA_W-1:0] a, logic [63:0] d);
    logic [LINE_W-1:0] l;
    l = rd_line(a);
    l[a[5:3]*64 +: 64] = d;
    store[a[PA_W-1:6]] = l;
  endfunction
  function automatic logic [63:0] rd_word(logic [PA_W-1:0] a);
    logic [LINE_W-1:0] l;
    l = rd_line(a);
    return l[a[5:3]*64 +: 64];
  endfunction

  task automatic device(ref logic rv, ref logic rr, ref mem_req_t rq,
                        ref logic sv, ref mem_resp_t sp, ref logic sready, input int lat);
    rr = 1; sv = 0; sp = '0;
    forever begin
      @(posedge clk);
      if (rv && rr) begin
        mem_req_t r;
        r = rq;
        if (r.we) store[r.addr[PA_W-1:6]] = r.wdata;
        else begin
          #1 rr = 0;
          repeat (lat) @(posedge clk);
          #1 sv = 1; sp.rdata = rd_line(r.addr); sp.id = r.id;
          do @(posedge clk); while (!sready);
          #1 sv = 0; rr = 1;
        end
      end
    end
  endtask
  initial device(dram_req_valid, dram_req_ready, dram_req, dram_resp_valid, dram_resp, dram_resp_ready, 4);
  initial device(nvm_req_valid, nvm_req_ready, nvm_req, nvm_resp_valid, nvm_resp, nvm_resp_ready, 8);

  // bitmap backing store (all flags clear at start)
  logic [LINE_W-1:0] bstore [logic [PA_W-1:0]];
  assign bmm_req_ready = 1'b1;
  initial begin
    bmm_resp_valid = 0; bmm_resp_data = '0;
    forever begin
      @(posedge clk);
      if (bmm_req_valid) begin
        if (bmm_req_we) begin bstore[bmm_req_addr] = bmm_req_wdata; n_bm_wb++; end
        else begin
          logic [PA_W-1:0] a;
          a = bmm_req_addr;
          repeat (3) @(posedge clk);
          #1 bmm_resp_valid = 1; bmm_resp_data = bstore.exists(a) ? bstore[a] : '0;
          @(posedge clk); #1 bmm_resp_valid = 0;
        end
      end
    end
  end

  always @(posedge clk) begin
    if (interval_tick) n_ticks++;
    if (nvm_monitored) n_mon++;
    if (bm_lookup_done) begin
      if (bm_lookup_hit) n_bm_hit++; else n_bm_miss++;
    end
  end

  // ---------------- OS state: page tables and migrations ----------------
  localparam logic [PA_W-1:0] ROOT = 48'h0000_0010_0000;
  logic [PA_W-1:0] next_tbl = 48'h0000_0020_0000;
  logic [SP_W-1:0] vsn_of [NSP];
  logic [SP_W-1:0] psn_of [NSP];
  logic [PN_W-1:0] dram_of [logic [SP_W+8:0]];    // migrated {psn, idx} -> DRAM PPN
  logic [PN_W-1:0] next_dram = 36'h0_0004_0000;   // DRAM pages from 1 GB up

  function automatic logic [PA_W-1:0] ea(logic [PA_W-1:0] tbl, logic [8:0] idx);
    return {tbl[PA_W-1:12], idx, 3'b000};
  endfunction
  function automatic void map(logic [SP_W-1:0] v, logic [SP_W-1:0] p);
    logic [PA_W-1:0] t, a;
    a = ea(ROOT, v[26:18]);
    if (rd_word(a) == 64'h0 || !store.exists(a[PA_W-1:6])) begin
      if (!(store.exists(a[PA_W-1:6]) && rd_word(a)[0])) begin
        wr_word(a, 64'(next_tbl) | 64'h3); next_tbl += 48'h1000;
      end
    end
    t = {rd_word(a)[PA_W-1:12], 12'h0};
    a = ea(t, v[17:9]);
    if (!(store.exists(a[PA_W-1:6]) && rd_word(a)[0] && rd_word(a)[63:48] == 16'h0)) begin
      wr_word(a, 64'(next_tbl) | 64'h3); next_tbl += 48'h1000;
    end
    t = {rd_word(a)[PA_W-1:12], 12'h0};
    wr_word(ea(t, v[8:0]), 64'({p, 21'h0}) | 64'h83);
  endfunction

  // Expected translation of a VA (reference model).
  function automatic logic [PA_W-1:0] exp_pa(logic [VA_W-1:0] va, int s);
    logic [SP_W+8:0] k;
    k = {psn_of[s], va[20:12]};
    if (dram_of.exists(k)) return {dram_of[k], va[11:0]};
    return {psn_of[s], va[20:0]};
  endfunction

  // ---------------- LLC port (shared by all core threads) ----------------
  semaphore llc_sem = new(1);
  task automatic llc(input logic [PA_W-1:0] a, input logic we, input logic [LINE_W-1:0] d,
                     output logic [LINE_W-1:0] q);
    llc_sem.get(1);
    @(negedge clk);
    llc_req_valid = 1; llc_req_addr = a; llc_req_we = we; llc_req_wdata = d;
    while (!llc_req_ready) @(negedge clk);
    @(negedge clk); llc_req_valid = 0;
    q = '0;
    if (!we) begin
      while (!llc_resp_valid) @(negedge clk);
      q = llc_resp_data;
    end
    llc_sem.put(1);
  endtask

  // One core access: translate, check, then read the line and check its data.
  task automatic access(input int c, input int s, input logic [8:0] page, input logic [11:0] off);
    logic [VA_W-1:0] va;
    logic [PA_W-1:0] pa;
    logic [LINE_W-1:0] q;
    va = {vsn_of[s], page, off};
    @(negedge clk);
    while (!core_req_ready[c]) @(negedge clk);
    core_req_valid[c] = 1; core_req_va[c] = va;
    @(negedge clk); core_req_valid[c] = 0;
    while (!core_resp_valid[c]) @(negedge clk);
    pa = core_resp_pa[c];
    case (core_resp_case[c])
      XC_SMALL_HIT: n_path1++;
      XC_REMAP:     n_remap++;
      XC_SUPERPAGE: n_super++;
      default:      n_fault++;
    endcase
    if (core_resp_walked[c]) n_walk++;
    check(pa == exp_pa(va, s), $sformatf("core %0d va %h: pa %h exp %h", c, va, pa, exp_pa(va, s)));
    // data: lines past the first 64 bytes hold the NVM page's original data
    if (off >= 12'h040) begin
      llc({pa[PA_W-1:6], 6'b0}, 0, '0, q);
      check(q == pat({psn_of[s], page, off[11:6], 6'b0}),
            $sformatf("data at va %h (pa %h)", va, pa));
    end
  endtask

  // Skewed page choice: pages 0..7 of superpages 0..3 are hot.
  task automatic traffic(input int c, input int n);
    for (int k = 0; k < n; k++) begin
      int s, p;
      if ($urandom_range(0, 3) != 0) begin s = $urandom_range(0, 3); p = $urandom_range(0, 7); end
      else begin s = $urandom_range(0, NSP - 1); p = $urandom_range(0, 511); end
      access(c, s, 9'(p), 12'($urandom_range(64, 4095)));
    end
  endtask

  int active = 0;
  task automatic run_cores(input int n);
    active = NC;
    for (int c = 0; c < NC; c++) begin
      automatic int cc = c;
      fork begin traffic(cc, n); active--; end join_none
    end
    wait (active == 0);
  endtask

  // ---------------- OS helpers ----------------
  task automatic os_flag(input logic [SP_W-1:0] p, input logic [8:0] i, input logic set);
    @(negedge clk); os_bm_valid = 1; os_bm_psn = p; os_bm_idx = i; os_bm_set = set;
    while (!os_bm_ready) @(negedge clk);
    @(negedge clk); os_bm_valid = 0;
    while (!os_bm_done) @(negedge clk);
  endtask
  task automatic sp_read(input int i, output int v);
    @(negedge clk); os_sp_rd_valid = 1; os_sp_rd_idx = 14'(i);
    @(negedge clk); os_sp_rd_valid = 0; v = int'(os_sp_rd_data);
  endtask
  task automatic sc_read(input int s, input int i, output logic [15:0] v);
    @(negedge clk); os_sc_rd_valid = 1; os_sc_rd_slot = 7'(s); os_sc_rd_idx = 9'(i);
    @(negedge clk); os_sc_rd_valid = 0; v = os_sc_rd_data;
  endtask

  // Migrate one small page to DRAM: copy, store the DRAM PPN in the NVM page,
  // set the migration flag.
  task automatic migrate(input int s, input logic [8:0] i);
    logic [PN_W-1:0] d;
    logic [PA_W-1:0] src;
    d = next_dram; next_dram++;
    src = {psn_of[s], i, 12'h0};
    for (int l = 0; l < 64; l++) store[{d, 6'(l)}] = rd_line(src + 48'(l * 64));
    wr_word(src, 64'(d));
    os_flag(psn_of[s], i, 1);
    dram_of[{psn_of[s], i}] = d;
    n_mig++;
  endtask

  // Write a migrated page back: restore the NVM copy, clear the flag, shoot down.
  task automatic writeback(input int s, input logic [8:0] i);
    logic [PN_W-1:0] d;
    logic [PA_W-1:0] dst;
    d = dram_of[{psn_of[s], i}];
    dst = {psn_of[s], i, 12'h0};
    for (int l = 0; l < 64; l++) store[dst[PA_W-1:6] + 42'(l)] = rd_line({d, 12'h0} + 48'(l * 64));
    os_flag(psn_of[s], i, 0);
    dram_of.delete({psn_of[s], i});
    @(negedge clk); os_shootdown_valid = 1; os_shootdown_vpn = {vsn_of[s], i};
    @(negedge clk); os_shootdown_valid = 0;
    n_wb++;
  endtask

  initial begin
    int cnt [NSP];
    int order [NSP];
    int ntop;
    logic [15:0] v;
    for (int c = 0; c < NC; c++) begin
      cr3[c] = ROOT; core_req_valid[c] = 0; core_req_va[c] = '0;
    end
    // superpages: PSNs 0x800 + s*500 for the first ten (one bitmap-cache set)
    for (int s = 0; s < NSP; s++) begin
      vsn_of[s] = 27'h0000040 + 27'(s * 3);
      psn_of[s] = (s < 10) ? 27'h800 + 27'(s * 500) : 27'h900 + 27'(s);
      map(vsn_of[s], psn_of[s]);
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    wait (init_done);

    // ---- stage 1: superpage counting under load ----
    run_cores(60);
    for (int s = 0; s < NSP; s++) sp_read(int'(psn_of[s] - 27'h800), cnt[s]);
    // OS: sort superpages by count, keep the top ones (at most 100 slots)
    for (int s = 0; s < NSP; s++) order[s] = s;
    for (int a = 0; a < NSP; a++)
      for (int b = a + 1; b < NSP; b++)
        if (cnt[order[b]] > cnt[order[a]]) begin int t; t = order[a]; order[a] = order[b]; order[b] = t; end
    ntop = 4;
    for (int k = 0; k < ntop; k++) check(order[k] < 4, $sformatf("hot superpage %0d ranked %0d", order[k], k));
    for (int k = 0; k < ntop; k++) begin
      @(negedge clk); os_ld_valid = 1; os_ld_slot = 7'(k); os_ld_psn = psn_of[order[k]]; os_ld_enable = 1;
      @(negedge clk); os_ld_valid = 0;
    end

    // ---- stage 2: small page counting ----
    run_cores(60);
    for (int k = 0; k < ntop; k++)
      for (int i = 0; i < 512; i++) begin
        sc_read(k, i, v);
        if (v[14:0] >= 15'(HOT_THRESH) || v[15]) migrate(order[k], 9'(i));
      end
    check(n_mig > 0, "hot pages found and migrated");

    // ---- after migration: remapped accesses, then 4 KB TLB hits ----
    run_cores(60);

    // ---- overflow of a stage-2 counter (writes to one monitored page) ----
    begin
      logic [LINE_W-1:0] q;
      logic [PA_W-1:0] a;
      a = {psn_of[order[0]], 9'd300, 12'h0};
      for (int k = 0; k < 4100; k++) llc(a + 48'h40, 1, pat(a + 48'h40), q);
      sc_read(0, 300, v);
      check(v[15], "stage-2 counter overflow flag");
      if (v[15]) n_ovf++;
    end

    // ---- writeback of some migrated pages, with shootdown ----
    begin
      int done_wb;
      done_wb = 0;
      for (int s = 0; s < 4 && done_wb < 3; s++)
        for (int i = 0; i < 8 && done_wb < 3; i++)
          if (dram_of.exists({psn_of[s], 9'(i)})) begin writeback(s, 9'(i)); done_wb++; end
    end
    run_cores(30);

    if (SHORT_INTERVAL) check(n_ticks > 0, "interval tick");
    $display("path1=%0d remap=%0d superpage=%0d walks=%0d bm_hit=%0d bm_miss=%0d bm_writeback=%0d",
             n_path1, n_remap, n_super, n_walk, n_bm_hit, n_bm_miss, n_bm_wb);
    $display("monitored=%0d migrations=%0d writebacks=%0d overflow=%0d ticks=%0d faults=%0d",
             n_mon, n_mig, n_wb, n_ovf, n_ticks, n_fault);
    check(n_path1 > 0, "4 KB TLB hits");
    check(n_remap > 0, "remapped accesses");
    check(n_super > 0, "superpage accesses");
    check(n_walk > 0, "superpage walks");
    check(n_bm_hit > 0 && n_bm_miss > 0, "bitmap cache hits and misses");
    check(n_bm_wb > 0, "bitmap cache dirty evictions");
    check(n_mon > 0, "stage-2 monitored references");
    check(n_wb > 0, "page writebacks");
    check(n_fault == 0, "no translation faults");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
