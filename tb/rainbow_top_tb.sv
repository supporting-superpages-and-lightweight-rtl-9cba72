// rainbow_top_tb: end-to-end test of the whole design with the monitoring
// interval shortened to 20000 cycles (all other sizes at their defaults),
// so that interval ticks occur. The body is shared with rainbow_top_full_tb.
module rainbow_top_tb;
  localparam bit SHORT_INTERVAL = 1'b1;
  `include "rainbow_tb_body.svh"
  rainbow_top #(.INTERVAL(20000)) dut (.*);
endmodule
