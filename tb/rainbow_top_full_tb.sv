// rainbow_top_full_tb: the same end-to-end run as rainbow_top_tb with every
// parameter of rainbow_top at its default (8 cores, full TLBs, 4000-entry
// bitmap cache, 16384 superpage counters, 100 stage-2 slots, 10^8-cycle
// interval, which does not elapse within the run).
module rainbow_top_full_tb;
  localparam bit SHORT_INTERVAL = 1'b0;
  `include "rainbow_tb_body.svh"
  rainbow_top dut (.*);
endmodule
