// xlate_tb: self-checking test of the per-core translation unit with its
// default TLB sizes. Behavioural models stand in for memory (page tables
// and the DRAM page numbers stored at the start of migrated NVM pages) and
// for the bitmap cache (9-cycle answer). Every translation is compared with
// a reference model; the four addressing cases are each exercised and the
// 4 KB-TLB-hit latency (1 cycle) is checked.
module xlate_tb;
  import rainbow_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [PA_W-1:0] cr3 = 48'h0000_0010_0000;
  logic req_valid = 0, req_ready;
  logic [VA_W-1:0] req_va = '0;
  logic resp_valid, resp_small_hit, resp_sp_hit, resp_walked;
  logic [PA_W-1:0] resp_pa;
  xcase_e resp_case;
  logic bm_q_valid, bm_q_ready, bm_r_valid, bm_r_flag;
  logic [SP_W-1:0] bm_q_psn;
  logic [SIDX_W-1:0] bm_q_idx;
  logic mem_req_valid, mem_req_ready, mem_resp_valid;
  logic [PA_W-1:0] mem_req_addr;
  logic [LINE_W-1:0] mem_resp_data;
  logic inv_valid = 0;
  logic [PN_W-1:0] inv_vpn = '0;
  int checks = 0, failures = 0;
  int n_case [5];

  xlate dut (.*);

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ---- memory model (64-bit words) ----
  logic [63:0] mem [logic [PA_W-1:0]];
  assign mem_req_ready = 1'b1;
  initial begin
    mem_resp_valid = 0; mem_resp_data = '0;
    forever begin
      @(posedge clk);
      if (mem_req_valid) begin
        logic [PA_W-1:0] a;
        a = mem_req_addr;
        repeat (3) @(posedge clk);
        #1;
        for (int w = 0; w < 8; w++) begin
          logic [PA_W-1:0] wa;
          wa = {a[PA_W-1:6], 3'(w), 3'b000};
          mem_resp_data[w*64 +: 64] = mem.exists(wa) ? mem[wa] : 64'h0;
        end
        mem_resp_valid = 1;
        @(posedge clk); #1 mem_resp_valid = 0;
      end
    end
  end

  // ---- bitmap model ----
  logic migrated [logic [SP_W+SIDX_W-1:0]];
  assign bm_q_ready = 1'b1;
  initial begin
    bm_r_valid = 0; bm_r_flag = 0;
    forever begin
      @(posedge clk);
      if (bm_q_valid) begin
        logic [SP_W+SIDX_W-1:0] k;
        k = {bm_q_psn, bm_q_idx};
        repeat (8) @(posedge clk);
        #1 bm_r_valid = 1; bm_r_flag = migrated.exists(k) ? migrated[k] : 1'b0;
        @(posedge clk); #1 bm_r_valid = 0;
      end
    end
  end

  // ---- page tables ----
  logic [PA_W-1:0] next_tbl = 48'h0000_0020_0000;
  logic [SP_W-1:0] sp_map [logic [SP_W-1:0]];
  function automatic logic [PA_W-1:0] ea(logic [PA_W-1:0] tbl, logic [8:0] idx);
    return {tbl[PA_W-1:12], idx, 3'b000};
  endfunction
  task automatic map(input logic [SP_W-1:0] v, input logic [SP_W-1:0] p);
    logic [PA_W-1:0] t, a;
    a = ea(cr3, v[26:18]);
    if (!mem.exists(a)) begin mem[a] = 64'(next_tbl) | 64'h3; next_tbl += 48'h1000; end
    t = {mem[a][PA_W-1:12], 12'h0};
    a = ea(t, v[17:9]);
    if (!mem.exists(a)) begin mem[a] = 64'(next_tbl) | 64'h3; next_tbl += 48'h1000; end
    t = {mem[a][PA_W-1:12], 12'h0};
    mem[ea(t, v[8:0])] = 64'({p, 21'h0}) | 64'h83;
    sp_map[v] = p;
  endtask
  // Migrate a small page: DRAM page number into the NVM page's first 8 bytes.
  task automatic migrate(input logic [SP_W-1:0] p, input logic [8:0] i, input logic [PN_W-1:0] dppn);
    mem[{p, i, 12'h000}] = 64'(dppn);
    migrated[{p, i}] = 1'b1;
  endtask

  // Translate and compare with the expected PA and path.
  task automatic xl(input logic [VA_W-1:0] va, input xcase_e exp_case,
                    input logic [PA_W-1:0] exp_pa, input int exp_lat, input xcase_e alt = exp_case);
    int n;
    @(negedge clk);
    while (!req_ready) @(negedge clk);
    req_valid = 1; req_va = va;
    @(negedge clk); req_valid = 0; n = 1;
    while (!resp_valid && n < 500) begin @(negedge clk); n++; end
    check(resp_valid, "response");
    check(resp_case == exp_case || resp_case == alt, $sformatf("case for va %h: %0d exp %0d", va, resp_case, exp_case));
    if (exp_case != XC_FAULT) check(resp_pa == exp_pa, $sformatf("pa for va %h: %h exp %h", va, resp_pa, exp_pa));
    if (exp_lat > 0) check(n == exp_lat, $sformatf("latency %0d exp %0d", n, exp_lat));
    n_case[int'(resp_case)]++;
  endtask

  initial begin
    map(27'h0000100, 27'h0000810);
    map(27'h0000101, 27'h0000811);
    migrate(27'h0000810, 9'd4, 36'h0_0001_2345);
    repeat (3) @(negedge clk);
    rst_n = 1;
    // case 4: both TLBs miss, walk, flag clear
    xl({27'h0000100, 9'd1, 12'h abc}, XC_SUPERPAGE, {27'h0000810, 9'd1, 12'habc}, -1);
    check(dut.walked_q, "walk happened");
    // case 3: superpage TLB hit, flag clear
    xl({27'h0000100, 9'd2, 12'h010}, XC_SUPERPAGE, {27'h0000810, 9'd2, 12'h010}, -1);
    check(!dut.walked_q, "no walk on superpage hit");
    // case 3 with flag set: remap through the NVM page
    xl({27'h0000100, 9'd4, 12'h123}, XC_REMAP, {36'h0_0001_2345, 12'h123}, -1);
    // case 1: 4 KB TLB hit (filled by the remap), 1-cycle answer
    xl({27'h0000100, 9'd4, 12'h456}, XC_SMALL_HIT, {36'h0_0001_2345, 12'h456}, 1);
    // case 4 then remap in a fresh superpage
    migrate(27'h0000811, 9'd511, 36'h0_0000_0777);
    xl({27'h0000101, 9'd511, 12'h008}, XC_REMAP, {36'h0_0000_0777, 12'h008}, -1);
    // writeback: flag cleared, 4 KB entry shot down -> superpage path again
    migrated[{27'h0000810, 9'd4}] = 1'b0;
    @(negedge clk); inv_valid = 1; inv_vpn = {27'h0000100, 9'd4};
    @(negedge clk); inv_valid = 0;
    xl({27'h0000100, 9'd4, 12'h123}, XC_SUPERPAGE, {27'h0000810, 9'd4, 12'h123}, -1);
    // unmapped superpage
    xl({27'h0005000, 9'd0, 12'h000}, XC_FAULT, '0, -1);
    // random traffic over 24 superpages, some pages migrated
    for (int s = 0; s < 24; s++) begin
      map(27'h0002000 + 27'(s * 37), 27'h0000900 + 27'(s));
      for (int i = 0; i < 4; i++) migrate(27'h0000900 + 27'(s), 9'(i * 5), 36'h0_0000_4000 + 36'(s * 16 + i));
    end
    for (int k = 0; k < 600; k++) begin
      int s, i;
      logic [VA_W-1:0] va;
      logic [PN_W-1:0] d;
      s = $urandom_range(0, 23);
      i = 5 * $urandom_range(0, 7);
      va = {27'h0002000 + 27'(s * 37), 9'(i), 12'($urandom)};
      d  = 36'h0_0000_4000 + 36'(s * 16 + i / 5);
      if (i < 20) begin
        xl(va, XC_REMAP, {d, va[11:0]}, -1, XC_SMALL_HIT);
      end else begin
        xl(va, XC_SUPERPAGE, {27'h0000900 + 27'(s), va[20:0]}, -1);
      end
    end
    $display("small_hit=%0d remap=%0d superpage=%0d fault=%0d", n_case[1], n_case[2], n_case[3], n_case[4]);
    check(n_case[1] > 0 && n_case[2] > 0 && n_case[3] > 0 && n_case[4] > 0, "all paths taken");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
