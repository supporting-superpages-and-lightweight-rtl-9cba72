// tlb_hier_tb: self-checking test of the two-level TLB (L1 32/4-way, L2
// 512/8-way, L2 latency 8). Checks L1-hit latency (1 cycle), L2-hit latency
// (1 + 8 cycles), the L1 refill after an L2 hit, misses, and shootdown.
module tlb_hier_tb;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic req_valid = 0, fill_valid = 0, inv_valid = 0;
  logic [35:0] req_tag = '0, fill_tag = '0, fill_data = '0, inv_tag = '0;
  logic busy, resp_valid, resp_hit;
  logic [35:0] resp_data;
  int checks = 0, failures = 0;

  tlb_hier dut (.*);

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic fill(input logic [35:0] t, input logic [35:0] d);
    @(negedge clk); fill_valid = 1; fill_tag = t; fill_data = d;
    @(negedge clk); fill_valid = 0;
  endtask

  // Look up and return the number of cycles to the answer.
  task automatic lookup(input logic [35:0] t, input logic exp_hit, input logic [35:0] exp_d,
                        input int exp_lat);
    int n;
    @(negedge clk);
    check(!busy, "idle before request");
    req_valid = 1; req_tag = t;
    n = 0;
    @(negedge clk); req_valid = 0; n = 1;
    while (!resp_valid && n < 50) begin @(negedge clk); n++; end
    check(resp_hit == exp_hit, $sformatf("hit for %h", t));
    if (exp_hit) check(resp_data == exp_d, $sformatf("data for %h: %h", t, resp_data));
    if (exp_lat > 0) check(n == exp_lat, $sformatf("latency for %h: %0d expected %0d", t, n, exp_lat));
    @(negedge clk);
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    lookup(36'h42, 0, '0, 9);             // cold miss: L1 miss + L2 miss
    fill(36'h42, 36'h900);
    lookup(36'h42, 1, 36'h900, 1);        // L1 hit
    // six pages of the same L1 set (L1 has 8 sets) push 36'h42 out of L1;
    // they fall in other L2 sets (L2 has 64 sets), so L2 keeps it
    for (int k = 1; k <= 6; k++) fill(36'h42 + 36'(8 * k), 36'h100 + 36'(k));
    lookup(36'h42, 1, 36'h900, 9);        // L1 miss, L2 hit after 8 more cycles
    lookup(36'h42, 1, 36'h900, 1);        // refilled into L1
    for (int k = 1; k <= 6; k++) lookup(36'h42 + 36'(8 * k), 1, 36'h100 + 36'(k), -1);
    // shootdown removes the page from both levels
    @(negedge clk); inv_valid = 1; inv_tag = 36'h42;
    @(negedge clk); inv_valid = 0;
    lookup(36'h42, 0, '0, 9);
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
