// tlb_tb: self-checking test of one TLB level (32 entries, 4-way).
// Fills every entry, checks hits, data and the one-cycle answer, checks
// misses, shootdown, re-fill of a present tag and round-robin eviction.
module tlb_tb;
  localparam int unsigned ENTRIES = 32, WAYS = 4, SETS = ENTRIES / WAYS;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic lk_valid = 0, fill_valid = 0, inv_valid = 0;
  logic [35:0] lk_tag = '0, fill_tag = '0, fill_data = '0, inv_tag = '0;
  logic lk_resp_valid, lk_hit;
  logic [35:0] lk_data;
  int checks = 0, failures = 0;

  tlb #(.ENTRIES(ENTRIES), .WAYS(WAYS), .TAG_W(36), .DATA_W(36)) dut (.*);

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic fill(input logic [35:0] t, input logic [35:0] d);
    @(negedge clk); fill_valid = 1; fill_tag = t; fill_data = d;
    @(negedge clk); fill_valid = 0;
  endtask

  task automatic lookup(input logic [35:0] t, input logic exp_hit, input logic [35:0] exp_d);
    @(negedge clk); lk_valid = 1; lk_tag = t;
    @(negedge clk); lk_valid = 0;
    check(lk_resp_valid, "response one cycle after request");
    check(lk_hit == exp_hit, $sformatf("hit for tag %h: got %0d", t, lk_hit));
    if (exp_hit) check(lk_data == exp_d, $sformatf("data for tag %h: %h", t, lk_data));
    @(negedge clk);
    check(!lk_resp_valid, "single response");
  endtask

  function automatic logic [35:0] tg(int set, int k);
    return 36'(set + SETS * (k + 1) * 7);
  endfunction

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    lookup(36'h123, 0, '0);
    for (int s = 0; s < SETS; s++)
      for (int k = 0; k < WAYS; k++) fill(tg(s, k), 36'hA000 + 36'(s * 16 + k));
    for (int s = 0; s < SETS; s++)
      for (int k = 0; k < WAYS; k++) lookup(tg(s, k), 1, 36'hA000 + 36'(s * 16 + k));
    lookup(tg(3, 9), 0, '0);
    // shootdown
    @(negedge clk); inv_valid = 1; inv_tag = tg(2, 1);
    @(negedge clk); inv_valid = 0;
    lookup(tg(2, 1), 0, '0);
    lookup(tg(2, 0), 1, 36'hA000 + 36'(2 * 16 + 0));
    // refill into the freed way, then update an existing tag in place
    fill(tg(2, 1), 36'h5555);
    lookup(tg(2, 1), 1, 36'h5555);
    fill(tg(2, 1), 36'h6666);
    lookup(tg(2, 1), 1, 36'h6666);
    for (int k = 0; k < WAYS; k++) if (k != 1) lookup(tg(2, k), 1, 36'hA000 + 36'(2 * 16 + k));
    // full set 5: a new tag evicts the oldest (way 0)
    fill(tg(5, 10), 36'h7777);
    lookup(tg(5, 10), 1, 36'h7777);
    lookup(tg(5, 0), 0, '0);
    for (int k = 1; k < WAYS; k++) lookup(tg(5, k), 1, 36'hA000 + 36'(5 * 16 + k));
    // the next new tag evicts way 1
    fill(tg(5, 11), 36'h8888);
    lookup(tg(5, 1), 0, '0);
    lookup(tg(5, 11), 1, 36'h8888);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
