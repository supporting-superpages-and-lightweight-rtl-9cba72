// bitmap_cache_tb: self-checking test of the migration bitmap cache at its
// full size (4000 entries, 8-way, 500 sets, 9-cycle hit latency).
// A behavioural backing store holds every superpage's 512-bit bitmap; a
// reference model tracks each flag. Checks: flags returned by lookups, the
// effect of set/clear, hit/miss reporting, the exact hit latency, and that
// dirty bitmaps survive eviction (written back and fetched again).
module bitmap_cache_tb;
  import rainbow_pkg::*;
  localparam int unsigned SETS = 500;
  localparam logic [PA_W-1:0] BASE = 48'h0000_F000_0000;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic q_valid = 0, q_ready;
  bm_op_e q_op = BM_LOOKUP;
  logic [SP_W-1:0] q_psn = '0;
  logic [SIDX_W-1:0] q_idx = '0;
  logic [ID_W-1:0] q_id = '0;
  logic r_valid, r_flag, r_hit;
  logic [ID_W-1:0] r_id;
  logic m_req_valid, m_req_ready, m_req_we, m_resp_valid;
  logic [PA_W-1:0] m_req_addr;
  logic [LINE_W-1:0] m_req_wdata, m_resp_data;
  int checks = 0, failures = 0, writebacks = 0, fetches = 0;

  bitmap_cache dut (.*);

  // Initial bitmap of a superpage (a fixed function of its PSN).
  function automatic logic [LINE_W-1:0] init_line(logic [SP_W-1:0] p);
    logic [LINE_W-1:0] l;
    for (int w = 0; w < 16; w++) l[w*32 +: 32] = 32'(p) * 32'h9E37_79B9 ^ 32'(w * 32'h0101_0101);
    return l;
  endfunction

  logic [LINE_W-1:0] store [logic [SP_W-1:0]];   // backing store
  logic [LINE_W-1:0] gold  [logic [SP_W-1:0]];   // reference flags

  assign m_req_ready = 1'b1;
  initial begin
    m_resp_valid = 0;
    m_resp_data  = '0;
    forever begin
      @(posedge clk);
      if (m_req_valid) begin
        logic [SP_W-1:0] p;
        p = SP_W'((m_req_addr - BASE) >> 6);
        if (m_req_we) begin
          store[p] = m_req_wdata;
          writebacks++;
        end else begin
          fetches++;
          repeat (2 + int'($urandom_range(0, 3))) @(posedge clk);
          #1;
          m_resp_data  = store.exists(p) ? store[p] : init_line(p);
          m_resp_valid = 1;
          @(posedge clk); #1 m_resp_valid = 0;
        end
      end
    end
  end

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  // One operation; returns whether it hit and checks flag and latency.
  task automatic op(input bm_op_e o, input logic [SP_W-1:0] p, input logic [8:0] i,
                    input int exp_hit);
    int n;
    logic exp;
    if (!gold.exists(p)) gold[p] = init_line(p);
    if (o == BM_SET)   gold[p][i] = 1'b1;
    if (o == BM_CLEAR) gold[p][i] = 1'b0;
    exp = gold[p][i];
    @(negedge clk);
    while (!q_ready) @(negedge clk);
    q_valid = 1; q_op = o; q_psn = p; q_idx = i; q_id = ID_W'(p);
    @(negedge clk); q_valid = 0; n = 1;
    while (!r_valid && n < 400) begin @(negedge clk); n++; end
    check(r_valid, "response");
    check(r_flag == exp, $sformatf("flag psn %h idx %0d op %0d: got %0d", p, i, o, r_flag));
    check(r_id == ID_W'(p), "response id");
    if (exp_hit >= 0) check(r_hit == exp_hit[0], $sformatf("hit psn %h: got %0d", p, r_hit));
    if (r_hit) check(n == 9, $sformatf("hit latency %0d", n));
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    // cold miss, then hits
    op(BM_LOOKUP, 27'h810, 9'd5, 0);
    op(BM_LOOKUP, 27'h810, 9'd5, 1);
    op(BM_LOOKUP, 27'h810, 9'd300, 1);
    op(BM_SET,    27'h810, 9'd7, 1);
    op(BM_LOOKUP, 27'h810, 9'd7, 1);
    op(BM_CLEAR,  27'h810, 9'd7, 1);
    op(BM_LOOKUP, 27'h810, 9'd7, 1);
    op(BM_SET,    27'h810, 9'd511, 1);
    // nine more superpages in the same set evict 27'h810 (dirty)
    for (int k = 1; k <= 9; k++) op(BM_SET, 27'h810 + 27'(k * SETS), 9'(k), 0);
    check(writebacks >= 1, "dirty victim written back");
    op(BM_LOOKUP, 27'h810, 9'd511, 0);     // fetched again with the update
    op(BM_LOOKUP, 27'h810, 9'd7, 1);
    // random traffic over 40 superpages in 4 sets
    for (int k = 0; k < 1500; k++) begin
      logic [SP_W-1:0] p;
      bm_op_e o;
      p = 27'h1000 + 27'($urandom_range(0, 3)) + 27'(SETS * $urandom_range(0, 9));
      o = bm_op_e'($urandom_range(0, 2));
      op(o, p, 9'($urandom), -1);
    end
    check(fetches > 40, "misses fetch bitmaps");
    $display("fetches=%0d writebacks=%0d", fetches, writebacks);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
