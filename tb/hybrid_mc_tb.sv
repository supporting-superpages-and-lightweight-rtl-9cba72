// hybrid_mc_tb: self-checking test of the hybrid memory controller front
// end (full-size counters and bitmap cache; monitoring interval shortened
// to 1000 cycles). Behavioural DRAM and PCM controllers answer reads with an
// address-derived pattern. Checks: DRAM/NVM routing and response data/ids,
// stage-1 counts (weighted, NVM only), stage-2 counts for a loaded
// superpage, OS flag set/clear seen by core lookups, and the interval tick.
module hybrid_mc_tb;
  import rainbow_pkg::*;
  localparam int unsigned INTERVAL = 1000;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic init_done, interval_tick, nvm_monitored;
  logic req_valid = 0, req_ready, resp_valid;
  mem_req_t req = '0;
  mem_resp_t resp;
  logic dram_req_valid, dram_req_ready, dram_resp_valid, dram_resp_ready;
  logic nvm_req_valid, nvm_req_ready, nvm_resp_valid, nvm_resp_ready;
  mem_req_t dram_req, nvm_req;
  mem_resp_t dram_resp, nvm_resp;
  logic bm_q_valid = 0, bm_q_ready, bm_r_valid, bm_r_flag, bm_r_hit;
  logic [SP_W-1:0] bm_q_psn = '0;
  logic [SIDX_W-1:0] bm_q_idx = '0;
  logic [ID_W-1:0] bm_q_id = '0, bm_r_id;
  logic bmm_req_valid, bmm_req_ready, bmm_req_we, bmm_resp_valid;
  logic [PA_W-1:0] bmm_req_addr;
  logic [LINE_W-1:0] bmm_req_wdata, bmm_resp_data;
  logic os_bm_valid = 0, os_bm_ready, os_bm_set = 0, os_bm_done;
  logic [SP_W-1:0] os_bm_psn = '0;
  logic [SIDX_W-1:0] os_bm_idx = '0;
  logic os_sp_rd_valid = 0, os_sp_rd_resp_valid;
  logic [13:0] os_sp_rd_idx = '0;
  logic [15:0] os_sp_rd_data, os_sc_rd_data;
  logic os_ld_valid = 0, os_ld_enable = 0, os_sc_rd_valid = 0, os_sc_rd_resp_valid;
  logic [6:0] os_ld_slot = '0, os_sc_rd_slot = '0;
  logic [SP_W-1:0] os_ld_psn = '0;
  logic [SIDX_W-1:0] os_sc_rd_idx = '0;
  int checks = 0, failures = 0, dram_n = 0, nvm_n = 0, ticks = 0, mon = 0;

  hybrid_mc #(.INTERVAL(INTERVAL)) dut (.*);

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic logic [LINE_W-1:0] pat(logic [PA_W-1:0] a);
    return {16{32'(a[PA_W-1:6]) ^ 32'hC0DE_0000}};
  endfunction

  // Device models: one request at a time, fixed latencies.
  task automatic device(ref logic rv, ref logic rr, ref mem_req_t rq,
                        ref logic sv, ref mem_resp_t sp, ref logic sready, input int lat, ref int cnt);
    rr = 1; sv = 0; sp = '0;
    forever begin
      @(posedge clk);
      if (rv && rr) begin
        mem_req_t r;
        r = rq; cnt++;
        if (!r.we) begin
          #1 rr = 0;
          repeat (lat) @(posedge clk);
          #1 sv = 1; sp.rdata = pat(r.addr); sp.id = r.id;
          do @(posedge clk); while (!sready);
          #1 sv = 0; rr = 1;
        end
      end
    end
  endtask
  initial device(dram_req_valid, dram_req_ready, dram_req, dram_resp_valid, dram_resp, dram_resp_ready, 4, dram_n);
  initial device(nvm_req_valid, nvm_req_ready, nvm_req, nvm_resp_valid, nvm_resp, nvm_resp_ready, 9, nvm_n);

  // Bitmap backing store: all flags start clear.
  logic [LINE_W-1:0] bstore [logic [PA_W-1:0]];
  assign bmm_req_ready = 1'b1;
  initial begin
    bmm_resp_valid = 0; bmm_resp_data = '0;
    forever begin
      @(posedge clk);
      if (bmm_req_valid) begin
        if (bmm_req_we) bstore[bmm_req_addr] = bmm_req_wdata;
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
    if (interval_tick) ticks++;
    if (nvm_monitored) mon++;
  end

  // A line request; reads wait for and check the response.
  task automatic mreq(input logic [PA_W-1:0] a, input logic we, input logic [ID_W-1:0] id);
    int n;
    @(negedge clk);
    req_valid = 1; req.addr = a; req.we = we; req.wdata = '1; req.id = id;
    while (!req_ready) @(negedge clk);
    @(negedge clk); req_valid = 0;
    if (!we) begin
      n = 0;
      while (!resp_valid && n < 100) begin @(negedge clk); n++; end
      check(resp_valid && resp.id == id && resp.rdata == pat(a), $sformatf("read %h", a));
    end
  endtask

  task automatic sp_read(input int i, input int exp);
    @(negedge clk); os_sp_rd_valid = 1; os_sp_rd_idx = 14'(i);
    @(negedge clk); os_sp_rd_valid = 0;
    check(os_sp_rd_resp_valid && int'(os_sp_rd_data) == exp, $sformatf("sp count %0d: %0d exp %0d", i, os_sp_rd_data, exp));
  endtask

  task automatic sc_read(input int s, input int i, input int exp);
    @(negedge clk); os_sc_rd_valid = 1; os_sc_rd_slot = 7'(s); os_sc_rd_idx = 9'(i);
    @(negedge clk); os_sc_rd_valid = 0;
    check(os_sc_rd_resp_valid && int'(os_sc_rd_data) == exp, $sformatf("small count %0d/%0d: %0d exp %0d", s, i, os_sc_rd_data, exp));
  endtask

  task automatic bm_lookup(input logic [SP_W-1:0] p, input logic [8:0] i, input logic exp);
    int n;
    @(negedge clk); bm_q_valid = 1; bm_q_psn = p; bm_q_idx = i; bm_q_id = 4'd3;
    while (!bm_q_ready) @(negedge clk);
    @(negedge clk); bm_q_valid = 0; n = 0;
    while (!bm_r_valid && n < 100) begin @(negedge clk); n++; end
    check(bm_r_valid && bm_r_flag == exp && bm_r_id == 4'd3, $sformatf("flag %h/%0d", p, i));
  endtask

  task automatic os_flag(input logic [SP_W-1:0] p, input logic [8:0] i, input logic set);
    int n;
    @(negedge clk); os_bm_valid = 1; os_bm_psn = p; os_bm_idx = i; os_bm_set = set;
    while (!os_bm_ready) @(negedge clk);
    @(negedge clk); os_bm_valid = 0; n = 0;
    while (!os_bm_done && n < 100) begin @(negedge clk); n++; end
    check(os_bm_done, "OS flag update done");
  endtask

  localparam logic [PA_W-1:0] NVM0 = 48'h0001_0000_0000;
  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    wait (init_done);
    // DRAM traffic is not counted; NVM traffic is.
    mreq(48'h0000_0012_3440, 0, 4'd1);
    mreq(48'h0000_8000_0000, 1, 4'd2);
    check(dram_n == 2 && nvm_n == 0, "DRAM routing");
    // superpage 5 of NVM: 3 reads + 2 writes = 19
    for (int k = 0; k < 3; k++) mreq(NVM0 + 48'(5 << 21) + 48'(k << 12), 0, 4'd4);
    for (int k = 0; k < 2; k++) mreq(NVM0 + 48'(5 << 21) + 48'h40, 1, 4'd5);
    mreq(NVM0 + 48'(9 << 21), 0, 4'd6);
    check(nvm_n == 6, "NVM routing");
    sp_read(5, 19);
    sp_read(9, 1);
    sp_read(5, 0);
    // stage 2: monitor superpage 9 (PSN = NVM base PSN + 9) in slot 3
    @(negedge clk); os_ld_valid = 1; os_ld_slot = 7'd3; os_ld_psn = 27'h800 + 27'd9; os_ld_enable = 1;
    @(negedge clk); os_ld_valid = 0;
    for (int k = 0; k < 5; k++) mreq(NVM0 + 48'(9 << 21) + 48'(7 << 12), 0, 4'd7);
    mreq(NVM0 + 48'(9 << 21) + 48'(7 << 12), 1, 4'd7);
    mreq(NVM0 + 48'(10 << 21) + 48'(7 << 12), 1, 4'd7);
    sc_read(3, 7, 13);
    sc_read(3, 8, 0);
    check(mon == 6, $sformatf("monitored references %0d", mon));
    sp_read(9, 5 + 8);
    // bitmap: set by the OS, then seen by a core; clear again
    bm_lookup(27'h812, 9'd44, 0);
    os_flag(27'h812, 9'd44, 1);
    bm_lookup(27'h812, 9'd44, 1);
    bm_lookup(27'h812, 9'd45, 0);
    os_flag(27'h812, 9'd44, 0);
    bm_lookup(27'h812, 9'd44, 0);
    // interval tick every INTERVAL cycles
    begin
      int t0;
      t0 = ticks;
      repeat (3 * INTERVAL) @(posedge clk);
      check(ticks - t0 == 3, $sformatf("interval ticks %0d", ticks - t0));
    end
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
