// rr_arb: round-robin arbiter for valid/ready request streams.
//
// N requesters raise req[i]; the arbiter grants the first requester at or
// after the one following the last accepted grant (gnt_idx, gnt_valid).
// The pointer moves only when the granted request is accepted (accept), so
// every requester is served within N accepted requests. Combinational grant,
// pointer updated at the clock edge. A helper of this design, not part of
// the source's description.
module rr_arb #(
  parameter int unsigned N = 8
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [N-1:0]         req,
  input  logic                 accept,
  output logic                 gnt_valid,
  output logic [$clog2(N)-1:0] gnt_idx
);
  localparam int unsigned W = $clog2(N);
  logic [W-1:0] ptr_q;

  always_comb begin
    gnt_valid = 1'b0;
    gnt_idx   = '0;
    for (int k = N-1; k >= 0; k--) begin
      int unsigned i;
      i = (int'(ptr_q) + k) % N;
      if (req[i]) begin
        gnt_valid = 1'b1;
        gnt_idx   = W'(i);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                   ptr_q <= '0;
    else if (accept && gnt_valid) ptr_q <= W'((int'(gnt_idx) + 1) % N);
  end

endmodule
