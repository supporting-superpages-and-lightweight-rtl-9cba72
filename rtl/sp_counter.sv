// sp_counter: stage-1 access counters, one per NVM superpage.
//
// Every reference the memory controller sends to NVM adds RD_WEIGHT (read)
// or WR_WEIGHT (write) to the 16-bit counter of its 2 MB superpage; the
// counter saturates at its maximum. At the end of each monitoring interval
// the OS reads all counters through rd_*, sorts them and picks the top-N
// superpages for stage 2. A read returns the count one cycle later and
// clears the counter, so the next interval starts from zero.
//
// Timing: one access and one OS read per cycle. If both name the same
// counter in one cycle the read returns the old count and the counter
// restarts at the access's weight, so no reference is lost.
//
// From the source: two bytes per superpage, counting NVM references only,
// writes weighted more than reads, one counter per superpage of the PCM
// (32 GB / 2 MB = 16384). This design's choices: the weights (1 and 8, after
// the 171 ns / 19.5 ns PCM write/read latency ratio), saturation and
// clear-on-read.
module sp_counter #(
  parameter int unsigned NUM_SP    = 16384,
  parameter int unsigned CNT_W     = 16,
  parameter int unsigned RD_WEIGHT = 1,
  parameter int unsigned WR_WEIGHT = 8
) (
  input  logic                      clk,
  input  logic                      rst_n,
  output logic                      init_done,
  input  logic                      acc_valid,
  input  logic [$clog2(NUM_SP)-1:0] acc_sp,
  input  logic                      acc_write,
  input  logic                      rd_valid,
  input  logic [$clog2(NUM_SP)-1:0] rd_idx,
  output logic                      rd_resp_valid,
  output logic [CNT_W-1:0]          rd_data
);
  localparam logic [CNT_W-1:0] MAX = '1;

  logic [CNT_W-1:0] cnt_mem [NUM_SP];

  // Clearing all counters after reset takes NUM_SP cycles; accesses and
  // reads are ignored until init_done.
  logic [$clog2(NUM_SP)-1:0] init_idx;

  logic [CNT_W-1:0] weight, cur, sum;
  assign weight = acc_write ? CNT_W'(WR_WEIGHT) : CNT_W'(RD_WEIGHT);
  assign cur    = (rd_valid && rd_idx == acc_sp) ? '0 : cnt_mem[acc_sp];
  assign sum    = (cur > MAX - weight) ? MAX : cur + weight;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      init_done     <= 1'b0;
      init_idx      <= '0;
      rd_resp_valid <= 1'b0;
      rd_data       <= '0;
    end else begin
      if (!init_done) begin
        init_idx <= init_idx + 1'b1;
        if (32'(init_idx) == NUM_SP - 1) init_done <= 1'b1;
      end
      rd_resp_valid <= rd_valid && init_done;
      if (rd_valid && init_done) rd_data <= cnt_mem[rd_idx];
    end
  end

  always_ff @(posedge clk) begin
    if (!init_done) begin
      cnt_mem[init_idx] <= '0;
    end else begin
      if (rd_valid)  cnt_mem[rd_idx] <= '0;
      if (acc_valid) cnt_mem[acc_sp] <= sum;
    end
  end

endmodule
