// small_counter_tb: self-checking test of the stage-2 table at full size
// (100 slots x 512 counters). Loads slots with PSNs, drives weighted NVM
// references (to monitored and unmonitored superpages) and compares every
// read-and-clear result with a reference model; checks the 15-bit value
// with its overflow flag, and slot disable.
module small_counter_tb;
  import rainbow_pkg::*;
  localparam int unsigned N = 100, P = 512;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic init_done, acc_match;
  logic acc_valid = 0, acc_write = 0, ld_valid = 0, ld_enable = 0, rd_valid = 0;
  logic [SP_W-1:0] acc_psn = '0, ld_psn = '0;
  logic [8:0] acc_idx = '0, rd_idx = '0;
  logic [6:0] ld_slot = '0, rd_slot = '0;
  logic rd_resp_valid;
  logic [15:0] rd_data;
  int checks = 0, failures = 0, n_match = 0;
  int unsigned model [N][P];
  logic        ovf   [N][P];
  logic [SP_W-1:0] slot_psn [N];
  logic            slot_on  [N];

  small_counter dut (.*);

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic load(input int s, input logic [SP_W-1:0] p, input logic en);
    @(negedge clk); ld_valid = 1; ld_slot = 7'(s); ld_psn = p; ld_enable = en;
    @(negedge clk); ld_valid = 0;
    slot_psn[s] = p; slot_on[s] = en;
  endtask

  task automatic access(input logic [SP_W-1:0] p, input logic [8:0] i, input logic w);
    int hit;
    hit = -1;
    for (int s = 0; s < N; s++) if (slot_on[s] && slot_psn[s] == p) hit = s;
    @(negedge clk); acc_valid = 1; acc_psn = p; acc_idx = i; acc_write = w;
    #1 check(acc_match == (hit >= 0), "match flag");
    if (hit >= 0) begin
      int unsigned v;
      n_match++;
      v = model[hit][i] + (w ? 8 : 1);
      if (v > 32767) begin v = 32767; ovf[hit][i] = 1; end
      model[hit][i] = v;
    end
    @(negedge clk); acc_valid = 0;
  endtask

  task automatic read(input int s, input int i);
    @(negedge clk); rd_valid = 1; rd_slot = 7'(s); rd_idx = 9'(i);
    @(negedge clk); rd_valid = 0;
    check(rd_resp_valid, "read response");
    check(rd_data == {ovf[s][i], 15'(model[s][i])},
          $sformatf("slot %0d page %0d: %h exp %h", s, i, rd_data, {ovf[s][i], 15'(model[s][i])}));
    model[s][i] = 0; ovf[s][i] = 0;
  endtask

  initial begin
    for (int s = 0; s < N; s++) begin
      slot_on[s] = 0; slot_psn[s] = '0;
      for (int i = 0; i < P; i++) begin model[s][i] = 0; ovf[s][i] = 0; end
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    wait (init_done);
    for (int s = 0; s < N; s++) load(s, 27'h800 + 27'(s * 3), 1);
    access(27'h801, 9'd3, 0);                      // not monitored
    for (int k = 0; k < 3000; k++)
      access(27'h800 + 27'($urandom_range(0, 3 * N)), 9'($urandom_range(0, 15)), 1'($urandom));
    for (int s = 0; s < N; s += 7) for (int i = 0; i < 16; i++) read(s, i);
    // overflow: 4100 writes x 8 > 32767
    for (int k = 0; k < 4100; k++) access(27'h800 + 27'(99 * 3), 9'd511, 1);
    read(99, 511);
    read(99, 511);
    // disabled slot stops counting
    load(5, 27'h800 + 27'(5 * 3), 0);
    access(27'h800 + 27'(5 * 3), 9'd1, 0);
    read(5, 1);
    check(n_match > 1000, "monitored references seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
