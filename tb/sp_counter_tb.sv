// sp_counter_tb: self-checking test of the stage-1 superpage counters at
// full size (16384 counters). Random weighted reads/writes against a
// reference model, read-and-clear by the OS (also in the same cycle as an
// access to the same counter), and saturation at 0xFFFF.
module sp_counter_tb;
  localparam int unsigned NUM_SP = 16384;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic init_done;
  logic acc_valid = 0, acc_write = 0, rd_valid = 0;
  logic [13:0] acc_sp = '0, rd_idx = '0;
  logic rd_resp_valid;
  logic [15:0] rd_data;
  int checks = 0, failures = 0;
  int unsigned model [NUM_SP];

  sp_counter dut (.*);

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic int unsigned sat(int unsigned v);
    return (v > 65535) ? 65535 : v;
  endfunction

  // One cycle with an optional access and an optional read.
  task automatic cyc(input logic a, input logic [13:0] sp, input logic w,
                     input logic r, input logic [13:0] ri);
    int unsigned exp_rd;
    @(negedge clk);
    acc_valid = a; acc_sp = sp; acc_write = w; rd_valid = r; rd_idx = ri;
    exp_rd = model[ri];
    if (r) model[ri] = 0;
    if (a) model[sp] = sat(model[sp] + (w ? 8 : 1));
    @(negedge clk);
    acc_valid = 0; rd_valid = 0;
    if (r) begin
      check(rd_resp_valid, "read response");
      check(32'(rd_data) == exp_rd, $sformatf("count of %0d: %0d exp %0d", ri, rd_data, exp_rd));
    end
  endtask

  initial begin
    foreach (model[i]) model[i] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    wait (init_done);
    // every counter starts at zero
    for (int i = 0; i < NUM_SP; i += 1021) cyc(0, '0, 0, 1, 14'(i));
    // weights: 3 reads + 2 writes = 19
    for (int k = 0; k < 3; k++) cyc(1, 14'd77, 0, 0, '0);
    for (int k = 0; k < 2; k++) cyc(1, 14'd77, 1, 0, '0);
    cyc(0, '0, 0, 1, 14'd77);
    cyc(0, '0, 0, 1, 14'd77);          // cleared by the previous read
    // random traffic over a few counters with interleaved reads
    for (int k = 0; k < 4000; k++) begin
      logic [13:0] s, r;
      s = 14'($urandom_range(0, 15)) * 14'd1000;
      r = 14'($urandom_range(0, 15)) * 14'd1000;
      cyc(1, s, 1'($urandom), ($urandom_range(0, 9) == 0), r);
    end
    // saturation: 8200 writes = 65600 > 65535
    for (int k = 0; k < 8200; k++) cyc(1, 14'd16383, 1, 0, '0);
    cyc(0, '0, 0, 1, 14'd16383);
    for (int i = 0; i < 16; i++) cyc(0, '0, 0, 1, 14'(i * 1000));
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
