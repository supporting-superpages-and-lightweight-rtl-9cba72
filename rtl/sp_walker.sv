// sp_walker: hardware page-table walker for 2 MB superpages.
//
// A superpage mapping needs three page-table levels, so a walk is three
// dependent memory reads. Starting from the root (cr3), the walker reads
// the level-4 entry indexed by VA[47:39], the level-3 entry indexed by
// VA[38:30] and the level-2 entry indexed by VA[29:21]; the level-2 entry
// must be present with its page-size bit set, and its bits 47..21 are the
// physical superpage number (PSN). Any non-present entry, or a level-2
// entry without the page-size bit, ends the walk with fault.
//
// Interface: start/vsn/cr3 begin a walk when busy is low. Reads go out on
// mem_req_* (valid/ready handshake, one outstanding read, byte address of
// the 8-byte entry) and return as a 64-byte line on mem_resp_*; the entry
// is the 64-bit word selected by address bits 5..3. done pulses for one
// cycle with psn and fault.
//
// The three-level structure is from the source; the entry format (bit 0
// present, bit 7 page size, bits 47..12 next-table address) is the x86-64
// format, chosen here because the source evaluates an x86-64 system.
module sp_walker
  import rainbow_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [SP_W-1:0]   vsn,
  input  logic [PA_W-1:0]   cr3,
  output logic              busy,
  output logic              mem_req_valid,
  input  logic              mem_req_ready,
  output logic [PA_W-1:0]   mem_req_addr,
  input  logic              mem_resp_valid,
  input  logic [LINE_W-1:0] mem_resp_data,
  output logic              done,
  output logic [SP_W-1:0]   psn,
  output logic              fault
);
  typedef enum logic [2:0] {W_IDLE, W_REQ, W_WAIT, W_DONE} wstate_e;
  wstate_e state_q;
  logic [1:0]      level_q;  // 2 = level 4 (root), 1 = level 3, 0 = level 2
  logic [PA_W-1:0] table_q;  // base of the table being read
  logic [SP_W-1:0] vsn_q;
  logic [SP_W-1:0] psn_q;
  logic            fault_q;

  logic [8:0] index;
  always_comb begin
    case (level_q)
      2'd2:    index = vsn_q[26:18];
      2'd1:    index = vsn_q[17:9];
      default: index = vsn_q[8:0];
    endcase
  end

  assign busy          = state_q != W_IDLE;
  assign mem_req_valid = state_q == W_REQ;
  assign mem_req_addr  = {table_q[PA_W-1:12], index, 3'b000};

  logic [63:0] entry;
  assign entry = line_word(mem_resp_data, mem_req_addr);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= W_IDLE;
      level_q <= '0;
      table_q <= '0;
      vsn_q   <= '0;
      psn_q   <= '0;
      fault_q <= 1'b0;
    end else begin
      case (state_q)
        W_IDLE: if (start) begin
          state_q <= W_REQ;
          level_q <= 2'd2;
          table_q <= cr3;
          vsn_q   <= vsn;
          fault_q <= 1'b0;
        end
        W_REQ: if (mem_req_ready) state_q <= W_WAIT;
        W_WAIT: if (mem_resp_valid) begin
          if (!entry[0]) begin
            fault_q <= 1'b1;
            state_q <= W_DONE;
          end else if (level_q == 2'd0) begin
            fault_q <= !entry[7];
            psn_q   <= entry[PA_W-1:21];
            state_q <= W_DONE;
          end else begin
            table_q <= {entry[PA_W-1:12], 12'h000};
            level_q <= level_q - 1'b1;
            state_q <= W_REQ;
          end
        end
        W_DONE: state_q <= W_IDLE;
        default: state_q <= W_IDLE;
      endcase
    end
  end

  assign done  = state_q == W_DONE;
  assign psn   = psn_q;
  assign fault = fault_q;

endmodule
