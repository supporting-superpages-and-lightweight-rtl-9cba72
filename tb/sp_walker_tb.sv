// sp_walker_tb: self-checking test of the three-level superpage walker.
// A behavioural memory holds page tables built by the testbench; each walk
// is checked for the PSN, the fault flag and the number of reads (3 for a
// mapping, fewer when an upper level is not present).
module sp_walker_tb;
  import rainbow_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start = 0;
  logic [SP_W-1:0] vsn = '0;
  logic [PA_W-1:0] cr3 = 48'h0000_0010_0000;
  logic busy, mem_req_valid, mem_req_ready, mem_resp_valid, done, fault;
  logic [PA_W-1:0] mem_req_addr;
  logic [LINE_W-1:0] mem_resp_data;
  logic [SP_W-1:0] psn;
  int checks = 0, failures = 0, reads = 0;

  sp_walker dut (.*);

  // Behavioural memory: 64-bit words, random response delay.
  logic [63:0] mem [logic [PA_W-1:0]];
  logic [PA_W-1:0] pend_addr;
  int delay;
  assign mem_req_ready = 1'b1;
  initial begin
    mem_resp_valid = 0;
    mem_resp_data  = '0;
    forever begin
      @(posedge clk);
      if (mem_req_valid) begin
        pend_addr = mem_req_addr;
        reads++;
        delay = 1 + int'($urandom_range(0, 4));
        repeat (delay) @(posedge clk);
        #1;
        for (int w = 0; w < 8; w++) begin
          logic [PA_W-1:0] a;
          a = {pend_addr[PA_W-1:6], 3'(w), 3'b000};
          mem_resp_data[w*64 +: 64] = mem.exists(a) ? mem[a] : 64'h0;
        end
        mem_resp_valid = 1;
        @(posedge clk); #1 mem_resp_valid = 0;
      end
    end
  end

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  // Build a mapping VSN -> PSN (tables allocated from a bump pointer).
  logic [PA_W-1:0] next_tbl = 48'h0000_0020_0000;
  function automatic logic [PA_W-1:0] entry_addr(logic [PA_W-1:0] tbl, logic [8:0] idx);
    return {tbl[PA_W-1:12], idx, 3'b000};
  endfunction
  task automatic map(input logic [SP_W-1:0] v, input logic [SP_W-1:0] p, input logic ps);
    logic [PA_W-1:0] t4, t3, t2, a;
    t4 = cr3;
    a = entry_addr(t4, v[26:18]);
    if (!mem.exists(a)) begin mem[a] = 64'(next_tbl) | 64'h3; next_tbl += 48'h1000; end
    t3 = {mem[a][PA_W-1:12], 12'h0};
    a = entry_addr(t3, v[17:9]);
    if (!mem.exists(a)) begin mem[a] = 64'(next_tbl) | 64'h3; next_tbl += 48'h1000; end
    t2 = {mem[a][PA_W-1:12], 12'h0};
    a = entry_addr(t2, v[8:0]);
    mem[a] = 64'({p, 21'h0}) | 64'h3 | (ps ? 64'h80 : 64'h0);
  endtask

  task automatic walk(input logic [SP_W-1:0] v, input logic exp_fault,
                      input logic [SP_W-1:0] exp_psn, input int exp_reads);
    int n;
    @(negedge clk);
    reads = 0;
    start = 1; vsn = v;
    @(negedge clk); start = 0;
    n = 0;
    while (!done && n < 200) begin @(negedge clk); n++; end
    check(done, "walk finished");
    check(fault == exp_fault, $sformatf("fault for vsn %h", v));
    if (!exp_fault) check(psn == exp_psn, $sformatf("psn for vsn %h: %h exp %h", v, psn, exp_psn));
    check(reads == exp_reads, $sformatf("reads for vsn %h: %0d exp %0d", v, reads, exp_reads));
    @(negedge clk);
    check(!busy, "idle after walk");
  endtask

  initial begin
    // all page tables start empty (a missing word reads as 0, not present)
    map(27'h0000001, 27'h0000810, 1);
    map(27'h0000002, 27'h0000abc, 1);
    map(27'h1234567, 27'h0003fff, 1);
    map(27'h0040003, 27'h0002222, 0);      // level-2 entry without the page-size bit
    repeat (3) @(negedge clk);
    rst_n = 1;
    walk(27'h0000001, 0, 27'h0000810, 3);
    walk(27'h0000002, 0, 27'h0000abc, 3);
    walk(27'h1234567, 0, 27'h0003fff, 3);
    walk(27'h0040003, 1, '0, 3);
    walk(27'h7000000, 1, '0, 1);           // level-4 entry absent
    for (int k = 0; k < 20; k++) begin
      logic [SP_W-1:0] v, p;
      v = SP_W'($urandom);
      p = SP_W'($urandom);
      map(v, p, 1);
      walk(v, 0, p, 3);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
